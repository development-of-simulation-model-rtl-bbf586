// dds: direct digital synthesizer for the transmit carrier.
//
// A PHASE_W-bit phase accumulator advances by FCW every clock; its top LUT_AW
// bits address the sine table and the looked-up value is registered as the
// carrier sample. One sample is produced per clock, so the carrier frequency
// is f_clk * FCW / 2^PHASE_W (f_clk/16 with the defaults).
//
// Timing: after the k-th rising edge following reset (k = 0, 1, ...) the
// output holds sin(2*pi*k*FCW/2^PHASE_W). Reset clears phase and output.
//
// The paper uses a DDS to feed sine samples to the modulator's mux; the
// accumulator-plus-table structure and all sizes are this design's choices.
module dds
  import sc_pkg::*;
#(
  parameter int unsigned     PW   = PHASE_W,
  parameter int unsigned     AW   = LUT_AW,
  parameter int unsigned     W    = SAMPLE_W,
  parameter logic [PW-1:0]   STEP = PW'(FCW)
) (
  input  logic                clk,
  input  logic                rst_n,
  output logic signed [W-1:0] sin_out,
  output logic [PW-1:0]       phase_out
);
  logic [PW-1:0]       phase;
  logic signed [W-1:0] lut_data;

  sine_lut #(.AW(AW), .W(W)) u_lut (.addr(phase[PW-1 -: AW]), .data(lut_data));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase   <= '0;
      sin_out <= '0;
    end else begin
      phase   <= phase + STEP;
      sin_out <= lut_data;
    end
  end

  assign phase_out = phase;
endmodule
