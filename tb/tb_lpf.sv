// tb_lpf: random 8-bit input; after every clock Yout must equal the sum of
// the last 16 inputs (fewer right after reset, the rest counting as 0).
// A second part feeds a full-scale sine at twice the carrier frequency and
// checks that the filter removes it (output 0 once the window is full).
module tb_lpf;
  import sc_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  sample_t xin = '0;
  filt_t   yout;
  int checks = 0, failures = 0;
  int hist [$];

  lpf dut (.*);
  always #5 clk = ~clk;

  initial begin
    int v, sum;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int k = 0; k < 600; k++) begin
      v = (k < 300) ? int'($urandom % 256) - 128 : ref_sin((k * 32) % 256, 8, 127);
      xin = sample_t'(v);
      hist.push_back(v);
      if (hist.size() > 16) void'(hist.pop_front());
      @(posedge clk); #1;
      sum = 0;
      foreach (hist[i]) sum += hist[i];
      checks++;
      if (int'(yout) != sum) begin
        failures++;
        if (failures < 10) $display("FAIL: k=%0d yout=%0d exp=%0d", k, yout, sum);
      end
      if (k >= 316) begin
        checks++;
        if (yout != 0) begin failures++; $display("FAIL: 2fc not removed, k=%0d yout=%0d", k, yout); end
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
