// bit_detector: down-sampler and bit matched filter after the Costas loop.
//
// The filtered in-phase arm (already a moving sum over one carrier period)
// is down-sampled once per carrier period, at the clock where the sample
// counter equals DS_PHASE. CPB down-samples are summed, which together covers
// one whole bit period: the integrate-and-dump matched filter of an NRZ
// pulse. At the down-sample where the event counter equals DUMP_PHASE the sum
// is decided (sum >= 0 gives bit 1) and restarted. bit_out/bit_valid are
// registered; bit_valid is a one-clock pulse per bit.
//
// Symbol timing is not recovered: both counters start at reset, and the
// defaults place the windows on the bit boundaries of the transceiver's own
// loop-back path (transmitter and receiver reset together). The order
// down-sample then matched filter follows the paper's receiver chain; the
// rest is this design's choice.
module bit_detector
  import sc_pkg::*;
#(
  parameter int unsigned W          = FILT_W,
  parameter int unsigned SPC        = SAMPLES_PER_CARRIER,
  parameter int unsigned CPB        = CARRIERS_PER_BIT,
  parameter int unsigned DS_PHASE   = 3,
  parameter int unsigned DUMP_PHASE = 0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic signed [W-1:0] arm_i,
  output logic                bit_out,
  output logic                bit_valid,
  output logic signed [W+$clog2(CPB)-1:0] metric
);
  localparam int unsigned SW = (SPC > 1) ? $clog2(SPC) : 1;
  localparam int unsigned EW = (CPB > 1) ? $clog2(CPB) : 1;
  localparam int unsigned AW = W + $clog2(CPB);

  logic [SW-1:0]        scnt;
  logic [EW-1:0]        ecnt;
  logic signed [AW-1:0] acc, acc_next;
  logic                 ds;

  always_comb begin
    ds       = (scnt == SW'(DS_PHASE));
    acc_next = acc + AW'(arm_i);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scnt      <= '0;
      ecnt      <= '0;
      acc       <= '0;
      bit_out   <= 1'b0;
      bit_valid <= 1'b0;
      metric    <= '0;
    end else begin
      scnt      <= (scnt == SW'(SPC - 1)) ? '0 : scnt + 1'b1;
      bit_valid <= 1'b0;
      if (ds) begin
        ecnt <= (ecnt == EW'(CPB - 1)) ? '0 : ecnt + 1'b1;
        if (ecnt == EW'(DUMP_PHASE)) begin
          bit_out   <= !acc_next[AW-1];
          bit_valid <= 1'b1;
          metric    <= acc_next;
          acc       <= '0;
        end else begin
          acc <= acc_next;
        end
      end
    end
  end
endmodule
