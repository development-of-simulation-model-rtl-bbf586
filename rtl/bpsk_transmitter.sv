// bpsk_transmitter: line coder, carrier DDS and 2:1 mux modulator in a row.
//
// Each input bit becomes SPB samples of +carrier (bit 1) or -carrier (bit 0).
// The DDS and the line coder start together at reset, and SPB is a whole
// number of carrier cycles, so every bit starts at carrier phase 0. The
// sample for clock k appears on tx_sample after edge k+1 (two register
// stages: DDS/line coder, then the mux).
//
// The structure (bit stream, carrier, multiply-by-mux) follows the paper's
// transmitter model. Pulse shaping, which the paper names as a textbook
// step, is not part of it: the modelled transmitter is a plain mux.
module bpsk_transmitter
  import sc_pkg::*;
#(
  parameter int unsigned   SPB  = SAMPLES_PER_BIT,
  parameter logic [PHASE_W-1:0] STEP = FCW
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           bit_in,
  input  logic           bit_valid,
  output logic           bit_ready,
  output sample_t        tx_sample,
  output logic           bit_start,
  output logic           idle
);
  sample_t carrier;
  logic    nrz;
  phase_t  phase_unused;

  line_coder #(.SPB(SPB)) u_coder (
    .clk, .rst_n, .bit_in, .bit_valid, .bit_ready,
    .nrz, .bit_start, .idle
  );

  dds #(.STEP(STEP)) u_dds (
    .clk, .rst_n, .sin_out(carrier), .phase_out(phase_unused)
  );

  bpsk_mux u_mux (
    .clk, .rst_n, .carrier, .data_bit(nrz), .tx_sample
  );
endmodule
