// sc_transceiver_top: single-carrier BPSK transceiver, transmitter and
// Costas-loop receiver side by side.
//
// Transmit path: tx_bit/tx_bit_valid/tx_bit_ready (one bit per SAMPLES_PER_BIT
// clocks) -> unipolar NRZ line coder -> 2:1 mux choosing +/- DDS carrier ->
// tx_sample, one signed 8-bit sample per clock for a DAC. With no bit offered
// the transmitter sends an idle bit 1 and pulses tx_idle.
// Receive path: rx_sample, one signed 8-bit sample per clock from an ADC ->
// Costas loop (mixers, LPFs, flip-flop phase discriminator, shift-register
// loop filter, mux VCO) -> down-sampler and bit matched filter -> rx_bit with
// a one-clock rx_bit_valid per bit. rx_pd_up/rx_pd_dn pulse on each carrier
// phase correction.
//
// The DAC, ADC, pulse shaping and RF parts are outside this module. Both
// sides share one clock and reset; the bit detector's windows assume that
// rx_sample is tx_sample looped back (possibly through a few samples of
// delay), because symbol-timing recovery is not part of the design.
module sc_transceiver_top
  import sc_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  // transmitter
  input  logic    tx_bit,
  input  logic    tx_bit_valid,
  output logic    tx_bit_ready,
  output sample_t tx_sample,
  output logic    tx_idle,
  // receiver
  input  sample_t rx_sample,
  output logic    rx_bit,
  output logic    rx_bit_valid,
  output filt_t   rx_arm_i,
  output filt_t   rx_arm_q,
  output logic    rx_pd_up,
  output logic    rx_pd_dn
);
  logic   tx_bit_start_unused;
  phase_t vco_phase_unused;

  bpsk_transmitter u_tx (
    .clk, .rst_n, .bit_in(tx_bit), .bit_valid(tx_bit_valid),
    .bit_ready(tx_bit_ready), .tx_sample, .bit_start(tx_bit_start_unused),
    .idle(tx_idle)
  );

  costas_receiver u_rx (
    .clk, .rst_n, .rx_sample, .rx_bit, .rx_bit_valid,
    .arm_i(rx_arm_i), .arm_q(rx_arm_q), .pd_up(rx_pd_up), .pd_dn(rx_pd_dn),
    .vco_phase(vco_phase_unused)
  );
endmodule
