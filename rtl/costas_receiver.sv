// costas_receiver: Costas-loop carrier recovery and bit detection for BPSK.
//
// Loop: rx_sample is mixed with the VCO's in-phase and quadrature references
// (rx_mixer), each product is low-pass filtered by a one-carrier-period moving
// sum (lpf, one per arm), the phase discriminator registers the sign of I*Q,
// the shift-register loop filter turns a run of LF_LEN agreeing decisions
// into one advance or retard pulse, and the mux VCO moves its phase by
// VCO_STEP on each pulse. This is a first-order bang-bang loop: it locks the
// local carrier to the received one at 0 or 180 degrees (the BPSK phase
// ambiguity, which the loop cannot resolve). The filtered I arm then goes to
// the bit detector (down-sample, bit matched filter, sign decision).
//
// Latency from a received sample to the arms: 1 (mixer) + 1 (LPF) clocks,
// plus the LPF window. pd_up/pd_dn expose the loop's correction pulses.
// Loop structure follows the paper's Costas loop and its receiver hardware
// model (flip-flop discriminator, shift-register filter, mux VCO); sizes,
// step and detector rule are this design's choices.
module costas_receiver
  import sc_pkg::*;
#(
  parameter int unsigned   LEN        = LF_LEN,
  parameter logic [PHASE_W-1:0] STEP  = VCO_STEP,
  parameter logic [PHASE_W-1:0] NOM   = FCW,
  parameter int unsigned   DS_PHASE   = 3,
  parameter int unsigned   DUMP_PHASE = 0
) (
  input  logic    clk,
  input  logic    rst_n,
  input  sample_t rx_sample,
  output logic    rx_bit,
  output logic    rx_bit_valid,
  output filt_t   arm_i,
  output filt_t   arm_q,
  output logic    pd_up,
  output logic    pd_dn,
  output phase_t  vco_phase
);
  sample_t lo_i, lo_q, mix_i, mix_q;
  logic    pd_adv, pd_valid;
  logic signed [FILT_W+$clog2(CARRIERS_PER_BIT)-1:0] metric_unused;

  rx_mixer u_mix (
    .clk, .rst_n, .rx_sample, .lo_i, .lo_q, .mix_i, .mix_q
  );

  lpf u_lpf_i (.clk, .rst_n, .xin(mix_i), .yout(arm_i));
  lpf u_lpf_q (.clk, .rst_n, .xin(mix_q), .yout(arm_q));

  phase_discriminator u_pd (
    .clk, .rst_n, .arm_i, .arm_q, .adv(pd_adv), .valid(pd_valid)
  );

  loop_filter #(.LEN(LEN)) u_lf (
    .clk, .rst_n, .pd_adv, .pd_valid, .up(pd_up), .dn(pd_dn)
  );

  vco_mux #(.NOM(NOM), .STEP(STEP)) u_vco (
    .clk, .rst_n, .up(pd_up), .dn(pd_dn), .lo_i, .lo_q, .phase_out(vco_phase)
  );

  bit_detector #(.DS_PHASE(DS_PHASE), .DUMP_PHASE(DUMP_PHASE)) u_det (
    .clk, .rst_n, .arm_i, .bit_out(rx_bit), .bit_valid(rx_bit_valid),
    .metric(metric_unused)
  );
endmodule
