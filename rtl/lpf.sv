// lpf: low-pass (matched) filter of one Costas arm.
//
// A moving sum over the last TAPS input samples: each clock the newest
// sample is added and the one that leaves the window is subtracted, using a
// TAPS-deep delay line. With TAPS equal to one carrier period the filter has
// a zero at the double-frequency mixing product, so only the slowly varying
// (data and phase-error) part of the arm remains. Its gain is TAPS.
//
// Interface: xin is an IN_W-bit signed sample (8 bits), yout the OUT_W-bit
// signed sum (16 bits); these two widths are the ones printed in the paper's
// LPF simulation waveform. Timing: yout after edge n is the sum of the TAPS
// samples presented at edges n-TAPS+1 .. n. Reset clears the window.
// The moving-sum form and TAPS are this design's choices.
module lpf
  import sc_pkg::*;
#(
  parameter int unsigned IN_W  = SAMPLE_W,
  parameter int unsigned OUT_W = FILT_W,
  parameter int unsigned TAPS  = SAMPLES_PER_CARRIER
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [IN_W-1:0]  xin,
  output logic signed [OUT_W-1:0] yout
);
  logic signed [IN_W-1:0] dly [TAPS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < TAPS; k++) dly[k] <= '0;
      yout <= '0;
    end else begin
      dly[0] <= xin;
      for (int k = 1; k < TAPS; k++) dly[k] <= dly[k-1];
      yout <= yout + OUT_W'(xin) - OUT_W'(dly[TAPS-1]);
    end
  end

  initial assert (OUT_W >= IN_W + $clog2(TAPS))
    else $error("lpf: OUT_W too narrow for TAPS");
endmodule
