// tb_costas_receiver: the receiver fed by a behavioural BPSK transmitter
// whose carrier starts PHI0_DEG off the receiver's and runs FOFS phase units
// per sample faster (a small Doppler-like frequency offset). Sample m-1 is
// presented after clock edge m, as the loop-back transmitter would. Checks,
// after the loop has pulled in: received bit r equals sent bit r-1; the
// carrier phase error, taken modulo 180 degrees, stays within 20 degrees;
// the loop issued more advance than retard pulses (it must make up the
// frequency offset). Both pulse kinds must occur.
module tb_costas_receiver;
  import sc_pkg::*;
  localparam int    NBITS    = 300;
  localparam int    SETTLE   = 30;
  localparam int    FOFS     = 6;
  localparam real   PHI0_DEG = 60.0;

  logic clk = 1'b0, rst_n = 1'b0;
  sample_t rx_sample = '0;
  logic rx_bit, rx_bit_valid, pd_up, pd_dn;
  filt_t arm_i, arm_q;
  phase_t vco_phase;
  int checks = 0, failures = 0;
  int n_up = 0, n_dn = 0, n_phase_bad = 0, n_phase_chk = 0;
  bit sent [$];
  bit got  [$];

  costas_receiver dut (.*);
  always #5 clk = ~clk;

  real pi = 3.14159265358979323846;
  real theta;            // transmit phase of the sample on rx_sample, in cycles
  real theta_prev;
  int  m = 0;            // edges since reset release
  phase_t vco_prev;

  always @(posedge clk) if (rst_n) begin
    real t, err;
    bit  b;
    // error between the sample now on rx_sample (index m-1) and the VCO
    // phase the mixer pairs it with
    if (m >= 2 && got.size() > SETTLE) begin
      err = theta - real'(vco_prev) / 65536.0;
      err = err - $floor(err * 2.0 + 0.5) / 2.0;   // modulo half a cycle
      n_phase_chk++;
      if (err > 20.0 / 360.0 || err < -20.0 / 360.0) n_phase_bad++;
    end
    vco_prev <= vco_phase;
    // next sample: index m
    if (m % SAMPLES_PER_BIT == 0) sent.push_back(1'($urandom));
    t = real'(m) * real'(4096 + FOFS) / 65536.0 + PHI0_DEG / 360.0;
    b = sent[m / SAMPLES_PER_BIT];
    rx_sample <= sample_t'($rtoi($floor((b ? 127.0 : -127.0) * $sin(2.0 * pi * t) + 0.5)));
    theta = t;
    m++;
    if (pd_up) n_up++;
    if (pd_dn) n_dn++;
    if (rx_bit_valid) got.push_back(rx_bit);
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    wait (got.size() >= NBITS);
    for (int r = SETTLE; r < NBITS; r++) begin
      checks++;
      if (got[r] != sent[r-1]) begin
        failures++;
        if (failures < 10) $display("FAIL: rx bit %0d = %0d, sent %0d", r, got[r], sent[r-1]);
      end
    end
    checks += 4;
    if (n_phase_bad != 0) begin failures++; $display("FAIL: %0d of %0d phase errors over 20 deg", n_phase_bad, n_phase_chk); end
    if (n_up <= n_dn) begin failures++; $display("FAIL: up=%0d not above dn=%0d", n_up, n_dn); end
    if (n_up == 0) failures++;
    if (n_dn == 0) failures++;
    $display("pulses up=%0d dn=%0d phase checks=%0d", n_up, n_dn, n_phase_chk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat ((NBITS + 20) * SAMPLES_PER_BIT) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
