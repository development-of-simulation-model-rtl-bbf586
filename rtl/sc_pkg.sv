// sc_pkg: shared widths and default numbers of the single-carrier BPSK transceiver.
//
// Every block takes its defaults from here. Only the two sample widths are
// printed numbers: the LPF waveform shows an 8-digit input Xin and a 16-digit
// output Yout. All other numbers are this design's own choices: 16 samples per
// carrier cycle, 4 carrier cycles per bit (64 samples per bit), a 16-bit phase
// accumulator and a 256-entry sine table.
package sc_pkg;

  // Sample widths (LPF input Xin and output Yout).
  parameter int unsigned SAMPLE_W  = 8;
  parameter int unsigned FILT_W    = 16;

  // Numerically controlled oscillators.
  parameter int unsigned PHASE_W   = 16;
  parameter int unsigned LUT_AW    = 8;
  parameter int unsigned AMPLITUDE = 127;

  // Carrier and bit timing, in samples (one sample per clock).
  parameter int unsigned SAMPLES_PER_CARRIER = 16;
  parameter int unsigned CARRIERS_PER_BIT    = 4;
  parameter int unsigned SAMPLES_PER_BIT     = SAMPLES_PER_CARRIER * CARRIERS_PER_BIT;

  // Frequency control word: carrier = f_clk / SAMPLES_PER_CARRIER.
  parameter logic [PHASE_W-1:0] FCW = PHASE_W'((64'd1 << PHASE_W) / SAMPLES_PER_CARRIER);

  // Receiver loop: loop-filter length and the VCO's phase step per correction.
  parameter int unsigned LF_LEN   = 4;
  parameter logic [PHASE_W-1:0] VCO_STEP = PHASE_W'(128);

  typedef logic signed [SAMPLE_W-1:0] sample_t;
  typedef logic signed [FILT_W-1:0]   filt_t;
  typedef logic        [PHASE_W-1:0]  phase_t;

endpackage
