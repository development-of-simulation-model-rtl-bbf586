// tb_bpsk_ber: bit error rate of the whole transceiver over an additive white
// Gaussian noise channel, compared with ideal coherent BPSK.
//
// The transmitter's samples are scaled to amplitude ~32 (so that noise peaks
// are not clipped by the 8-bit ADC range), Gaussian noise of variance
// sigma^2 = Eb / (2 * Eb/N0) is added (Box-Muller), and the result is rounded
// and clipped to 8 bits as an ADC would. Eb is the energy of one 64-sample bit
// at that amplitude. At each Eb/N0 point the design is reset, the first
// SETTLE bits are skipped while the Costas loop locks, and NBITS bits are
// counted. Pass: the measured BER is no worse than ideal BPSK at an Eb/N0
// LOSS_DB lower (implementation loss of the 8-bit, bang-bang receiver), and
// at least one error is seen where ideal BPSK predicts ten or more. The ideal
// BER is 0.5*erfc(sqrt(Eb/N0)); the last point is 9.6 dB, where it is 1e-5.
module tb_bpsk_ber;
  import sc_pkg::*;

  localparam int  NPTS    = 4;
  localparam real EBN0_DB [NPTS] = '{4.0, 6.0, 8.0, 9.6};
  localparam int  NBITS   [NPTS] = '{20000, 40000, 100000, 1000000};
  localparam int  SETTLE  = 40;
  localparam real LOSS_DB = 1.0;
  localparam real SCALE   = 0.25;

  logic clk = 1'b0, rst_n = 1'b0;
  logic tx_bit, tx_bit_valid, tx_bit_ready, tx_idle;
  sample_t tx_sample, rx_sample;
  logic rx_bit, rx_bit_valid, rx_pd_up, rx_pd_dn;
  filt_t rx_arm_i, rx_arm_q;

  sc_transceiver_top dut (.*);
  always #5 clk = ~clk;

  real pi = 3.14159265358979323846;
  real sigma = 0.0;
  int checks = 0, failures = 0;
  bit sent [$];
  int n_rx = 0, n_err = 0, n_up = 0, n_dn = 0;
  bit counting = 1'b0;

  // erfc by Abramowitz & Stegun 7.1.26 (error below 1.5e-7)
  function automatic real erfc_approx(real x);
    real t, y;
    t = 1.0 / (1.0 + 0.3275911 * x);
    y = t * (0.254829592 + t * (-0.284496736 + t * (1.421413741 + t * (-1.453152027 + t * 1.061405429))));
    return y * $exp(-x * x);
  endfunction

  function automatic real ber_ideal(real ebn0_db);
    return 0.5 * erfc_approx($sqrt(10.0 ** (ebn0_db / 10.0)));
  endfunction

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * pi * u2);
  endfunction

  // noisy channel with an 8-bit ADC
  always_ff @(posedge clk) begin
    real v;
    int  q;
    v = real'(tx_sample) * SCALE + sigma * gauss();
    q = $rtoi($floor(v + 0.5));
    if (q > 127) q = 127;
    if (q < -128) q = -128;
    rx_sample <= sample_t'(q);
  end

  assign tx_bit_valid = 1'b1;
  always_ff @(posedge clk) begin
    if (rst_n && tx_bit_ready) sent.push_back(tx_bit);
    if (tx_bit_ready) tx_bit <= 1'($urandom);
    if (rst_n && rx_bit_valid) begin
      if (n_rx >= SETTLE && n_rx >= 1 && counting) begin
        if (rx_bit != sent[n_rx - 1]) n_err <= n_err + 1;
      end
      n_rx <= n_rx + 1;
    end
    if (rx_pd_up) n_up <= n_up + 1;
    if (rx_pd_dn) n_dn <= n_dn + 1;
  end

  initial begin
    real eb, ber, ideal, bound;
    tx_bit = 1'b0;
    rx_sample = '0;
    // energy of one bit at the scaled amplitude: 64 samples of (127*SCALE)^2/2
    eb = real'(SAMPLES_PER_BIT) * (127.0 * SCALE) * (127.0 * SCALE) / 2.0;
    for (int p = 0; p < NPTS; p++) begin
      sigma = $sqrt(eb / (2.0 * (10.0 ** (EBN0_DB[p] / 10.0))));
      rst_n = 1'b0;
      counting = 1'b0;
      repeat (3) @(posedge clk);
      sent.delete();
      n_rx = 0; n_err = 0;
      @(negedge clk) rst_n = 1'b1;
      counting = 1'b1;
      wait (n_rx >= SETTLE + NBITS[p]);
      @(negedge clk);
      ber   = real'(n_err) / real'(NBITS[p]);
      ideal = ber_ideal(EBN0_DB[p]);
      bound = ber_ideal(EBN0_DB[p] - LOSS_DB);
      $display("Eb/N0 %4.1f dB: %0d errors in %0d bits, BER %e (ideal BPSK %e, bound %e)",
               EBN0_DB[p], n_err, NBITS[p], ber, ideal, bound);
      checks++;
      if (ber > bound) begin failures++; $display("FAIL: BER above the %0.1f dB loss bound", LOSS_DB); end
      if (ideal * real'(NBITS[p]) >= 10.0) begin
        checks++;
        if (n_err == 0) begin failures++; $display("FAIL: no errors where some are expected"); end
      end
    end
    checks += 2;
    if (n_up == 0) failures++;
    if (n_dn == 0) failures++;
    $display("loop corrections: up=%0d dn=%0d", n_up, n_dn);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1200000 * SAMPLES_PER_BIT) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
