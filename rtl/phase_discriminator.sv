// phase_discriminator: the Costas loop's phase detector, built as flip-flops.
//
// The loop's error is the product I*Q of the two filtered arms; only its sign
// is used. The sign is the XNOR of the arms' sign bits, and a flip-flop
// captures it every clock: adv = 1 means the local carrier lags the received
// one (advance it), adv = 0 that it leads (retard it). A second flip-flop,
// valid, is low when either arm is exactly zero, where the sign means
// nothing. The sign of I*Q does not depend on the data bit, which is what
// lets a Costas loop track a BPSK carrier. One clock latency.
//
// The paper models the phase discriminator with a flip-flop circuit; the
// XNOR-of-signs detector and the zero dead band are this design's choices.
module phase_discriminator
  import sc_pkg::*;
#(
  parameter int unsigned W = FILT_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic signed [W-1:0] arm_i,
  input  logic signed [W-1:0] arm_q,
  output logic                adv,
  output logic                valid
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      adv   <= 1'b0;
      valid <= 1'b0;
    end else begin
      adv   <= ~(arm_i[W-1] ^ arm_q[W-1]);
      valid <= (arm_i != '0) && (arm_q != '0);
    end
  end
endmodule
