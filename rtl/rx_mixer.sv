// rx_mixer: the two multipliers at the front of the Costas loop.
//
// The received sample is multiplied by the VCO's in-phase reference lo_i and
// by its quadrature reference lo_q. Each W x W product is scaled back to W
// bits by an arithmetic right shift of W-1 (the references have amplitude
// just below 2^(W-1)), and both results are registered: one clock latency.
//
// The paper's Costas loop multiplies the received signal by two carriers of
// the same frequency, 90 degrees apart. The product scaling and the register
// are this design's choices.
module rx_mixer
  import sc_pkg::*;
#(
  parameter int unsigned W = SAMPLE_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic signed [W-1:0] rx_sample,
  input  logic signed [W-1:0] lo_i,
  input  logic signed [W-1:0] lo_q,
  output logic signed [W-1:0] mix_i,
  output logic signed [W-1:0] mix_q
);
  logic signed [2*W-1:0] prod_i, prod_q;

  always_comb begin
    prod_i = rx_sample * lo_i;
    prod_q = rx_sample * lo_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mix_i <= '0;
      mix_q <= '0;
    end else begin
      mix_i <= W'(prod_i >>> (W - 1));
      mix_q <= W'(prod_q >>> (W - 1));
    end
  end
endmodule
