// tb_sc_transceiver_top: end-to-end test of the transceiver at its default sizes.
//
// The transmitter's samples are looped back to the receiver through a channel
// delay of CH_DELAY samples, which (with the receiver's own one-sample lead)
// starts the Costas loop about -(CH_DELAY+1)*22.5 degrees off the carrier.
// The bit source sends random bits, with gaps where it offers none so that
// the transmitter inserts idle bits. Expected behaviour, worked out from the
// pipeline: receive bit r is transmit bit r-1 (the receiver's first decision
// covers the clocks before the first bit) with no inversion, once the loop
// has pulled in. Counted mechanisms: idle insertion, advance and retard
// corrections of the loop, and received bits; each must occur.
module tb_sc_transceiver_top;
  import sc_pkg::*;

  localparam int CH_DELAY = 2;
  localparam int NBITS    = 400;
  localparam int SETTLE   = 24;     // received bits ignored while the loop pulls in
  localparam int MAXCYC   = (NBITS + 40) * SAMPLES_PER_BIT;

  logic clk = 1'b0, rst_n = 1'b0;
  logic tx_bit, tx_bit_valid, tx_bit_ready, tx_idle;
  sample_t tx_sample, rx_sample;
  logic rx_bit, rx_bit_valid, rx_pd_up, rx_pd_dn;
  filt_t rx_arm_i, rx_arm_q;

  sc_transceiver_top dut (.*);

  always #5 clk = ~clk;

  // channel: pure delay of CH_DELAY samples
  sample_t chan [CH_DELAY+1];
  always_ff @(posedge clk) begin
    chan[0] <= tx_sample;
    for (int k = 1; k <= CH_DELAY; k++) chan[k] <= chan[k-1];
  end
  assign rx_sample = chan[CH_DELAY];

  int checks = 0, failures = 0;
  bit sent [$];
  bit got  [$];
  int n_idle = 0, n_up = 0, n_dn = 0, n_cyc = 0;
  int n_offered = 0;

  // bit source: bits 8..11 and every 50th bit slot are left empty (idle fill)
  always_ff @(posedge clk) begin
    if (rst_n) begin
      n_cyc <= n_cyc + 1;
      if (tx_bit_ready) begin
        sent.push_back(tx_bit_valid ? tx_bit : 1'b1);
        n_offered <= n_offered + 1;
      end
      if (tx_idle) n_idle <= n_idle + 1;
      if (rx_pd_up) n_up <= n_up + 1;
      if (rx_pd_dn) n_dn <= n_dn + 1;
      if (rx_bit_valid) got.push_back(rx_bit);
    end
  end

  always_comb begin
    tx_bit_valid = !((n_offered >= 8 && n_offered < 12) || (n_offered % 50 == 49));
  end
  always_ff @(posedge clk) if (tx_bit_ready) tx_bit <= 1'($urandom);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    tx_bit = 1'b0;
    for (int k = 0; k <= CH_DELAY; k++) chan[k] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    wait (got.size() >= NBITS);
    @(posedge clk);
    for (int r = SETTLE; r < NBITS; r++) begin
      if (got[r] != sent[r-1]) begin
        failures++;
        if (failures < 10) $display("FAIL: rx bit %0d = %0d, tx bit %0d = %0d", r, got[r], r-1, sent[r-1]);
      end
      checks++;
    end
    // rate: one received bit per SAMPLES_PER_BIT clocks
    check(n_cyc >= (NBITS - 1) * SAMPLES_PER_BIT && n_cyc <= (NBITS + 1) * SAMPLES_PER_BIT,
          $sformatf("bit rate: %0d cycles for %0d bits", n_cyc, NBITS));
    check(n_idle > 0, "idle insertion never happened");
    check(n_up > 0, "loop never advanced");
    check(n_dn > 0, "loop never retarded");
    $display("mechanisms: idle=%0d up=%0d dn=%0d rx_bits=%0d cycles=%0d", n_idle, n_up, n_dn, got.size(), n_cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (MAXCYC) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
