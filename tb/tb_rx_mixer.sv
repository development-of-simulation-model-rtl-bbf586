// tb_rx_mixer: random received samples and references; one clock later each
// arm must hold floor(x * lo / 128), the product scaled back to 8 bits.
module tb_rx_mixer;
  import sc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  sample_t rx_sample = '0, lo_i = '0, lo_q = '0, mix_i, mix_q;
  int checks = 0, failures = 0;

  rx_mixer dut (.*);
  always #5 clk = ~clk;

  function automatic int fdiv128(int v);
    return (v >= 0) ? v / 128 : -((-v + 127) / 128);
  endfunction

  initial begin
    int x, a, b;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int k = 0; k < 500; k++) begin
      x = int'($urandom % 255) - 127;
      a = int'($urandom % 255) - 127;
      b = int'($urandom % 255) - 127;
      rx_sample = sample_t'(x); lo_i = sample_t'(a); lo_q = sample_t'(b);
      @(posedge clk); #1;
      checks += 2;
      if (int'(mix_i) != fdiv128(x * a)) begin failures++; $display("FAIL I: %0d*%0d -> %0d", x, a, mix_i); end
      if (int'(mix_q) != fdiv128(x * b)) begin failures++; $display("FAIL Q: %0d*%0d -> %0d", x, b, mix_q); end
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
