// vco_mux: the Costas loop's VCO, a phase accumulator whose step is chosen by
// a 3:1 multiplexer.
//
// Each clock the mux selects the phase increment: NOM normally, NOM+STEP on a
// loop-filter `up` pulse, NOM-STEP on a `dn` pulse. A pulse therefore moves the
// local carrier's phase by STEP/2^PW of a cycle. The phase addresses two sine
// tables: lo_i = sin(phase) is in phase with the transmit carrier and
// lo_q = sin(phase + 90 deg) = cos(phase) is its quadrature partner. (The
// paper's Costas diagram writes the references as 2cos and -2sin for a
// cosine carrier; for the sine carrier used here sin and cos play those
// roles.) Outputs are registered: after edge k they show the phase held
// before edge k. Reset loads INIT_PHASE.
//
// The paper builds the VCO from a MUX; the increment-selecting mux,
// the step size and the table are this design's choices.
module vco_mux
  import sc_pkg::*;
#(
  parameter int unsigned   PW         = PHASE_W,
  parameter int unsigned   AW         = LUT_AW,
  parameter int unsigned   W          = SAMPLE_W,
  parameter logic [PW-1:0] NOM        = PW'(FCW),
  parameter logic [PW-1:0] STEP       = PW'(VCO_STEP),
  parameter logic [PW-1:0] INIT_PHASE = '0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                up,
  input  logic                dn,
  output logic signed [W-1:0] lo_i,
  output logic signed [W-1:0] lo_q,
  output logic [PW-1:0]       phase_out
);
  localparam logic [AW-1:0] QUARTER = AW'(1) << (AW - 2);

  logic [PW-1:0]       phase, inc;
  logic [AW-1:0]       addr_i, addr_q;
  logic signed [W-1:0] sin_d, cos_d;

  always_comb begin
    unique case ({up, dn})
      2'b10:   inc = NOM + STEP;
      2'b01:   inc = NOM - STEP;
      default: inc = NOM;
    endcase
    addr_i  = phase[PW-1 -: AW];
    addr_q  = addr_i + QUARTER;
  end

  sine_lut #(.AW(AW), .W(W)) u_sin (.addr(addr_i), .data(sin_d));
  sine_lut #(.AW(AW), .W(W)) u_cos (.addr(addr_q), .data(cos_d));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= INIT_PHASE;
      lo_i  <= '0;
      lo_q  <= '0;
    end else begin
      phase <= phase + inc;
      lo_i  <= sin_d;
      lo_q  <= cos_d;
    end
  end

  assign phase_out = phase;
endmodule
