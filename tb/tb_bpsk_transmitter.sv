// tb_bpsk_transmitter: random bits with gaps; the sample after edge k+1 must
// be (bit ? +1 : -1) * round(127*sin(2*pi*k/16)), where bit is the one sent
// in period floor(k/64) (idle periods send 1). Also counts idle periods.
module tb_bpsk_transmitter;
  import sc_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic bit_in = 1'b0, bit_valid = 1'b0, bit_ready, bit_start, idle;
  sample_t tx_sample;
  int checks = 0, failures = 0;
  bit sent [$];
  int n_idle = 0;

  bpsk_transmitter dut (.*);
  always #5 clk = ~clk;

  // source: offers a random bit most of the time
  always_ff @(posedge clk) if (rst_n && bit_ready) begin
    sent.push_back(bit_valid ? bit_in : 1'b1);
    bit_in    <= 1'($urandom);
    bit_valid <= ($urandom % 5) != 0;
  end
  always_ff @(posedge clk) if (idle) n_idle <= n_idle + 1;

  initial begin
    int exp, s;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    @(posedge clk);   // edge 0
    for (int k = 0; k < 64 * 40; k++) begin
      @(posedge clk); #1;  // edge k+1
      s = ref_sin(((k * 4096) % 65536) >> 8, 8, 127);
      exp = sent[k / 64] ? s : -s;
      checks++;
      if (int'(tx_sample) != exp) begin
        failures++;
        if (failures < 10) $display("FAIL k=%0d out=%0d exp=%0d", k, tx_sample, exp);
      end
    end
    checks++;
    if (n_idle == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
