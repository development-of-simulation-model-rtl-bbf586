// tb_bpsk_mux: random carrier samples and data bits; one clock later the
// output must be +carrier for bit 1 and -carrier for bit 0.
module tb_bpsk_mux;
  import sc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  sample_t carrier = '0, tx_sample;
  logic data_bit = 1'b0;
  int checks = 0, failures = 0;

  bpsk_mux dut (.*);
  always #5 clk = ~clk;

  initial begin
    int c, exp;
    bit d;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int k = 0; k < 500; k++) begin
      c = int'($urandom % 255) - 127;
      d = 1'($urandom);
      carrier = sample_t'(c);
      data_bit = d;
      exp = d ? c : -c;
      @(posedge clk); #1;
      checks++;
      if (int'(tx_sample) != exp) begin
        failures++;
        if (failures < 10) $display("FAIL: c=%0d d=%0d out=%0d", c, d, tx_sample);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
