// tb_bit_detector: random I-arm values; a reference counts clocks from
// reset, takes the value at every clock n with n mod 16 = 3, adds four such
// values per bit and decides at down-sample events 0, 4, 8, ... (sum >= 0
// gives 1). Checks every decision, its value and sum, and the rate of one
// decision per 64 clocks.
module tb_bit_detector;
  import sc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  filt_t arm_i = '0;
  logic bit_out, bit_valid;
  logic signed [FILT_W+1:0] metric;
  int checks = 0, failures = 0;

  bit_detector dut (.*);
  always #5 clk = ~clk;

  initial begin
    int n, ev, sum, v, last_dec, n_dec;
    bit exp_valid, exp_bit;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    sum = 0; ev = 0; last_dec = -1; n_dec = 0;
    for (n = 0; n < 3000; n++) begin
      // biased values so that both decisions occur
      v = int'($urandom % 4000) - ((n / 64) % 2 == 0 ? 1000 : 3000);
      arm_i = filt_t'(v);
      exp_valid = 0;
      if (n % 16 == 3) begin
        sum += v;
        if (ev % 4 == 0) begin
          exp_valid = 1;
          exp_bit = (sum >= 0);
        end
        ev++;
      end
      @(posedge clk); #1;
      checks++;
      if (bit_valid != exp_valid) begin failures++; if (failures < 10) $display("FAIL valid n=%0d", n); end
      if (exp_valid) begin
        checks += 2;
        if (bit_out != exp_bit) begin failures++; if (failures < 10) $display("FAIL bit n=%0d", n); end
        if (int'(metric) != sum) begin failures++; if (failures < 10) $display("FAIL sum n=%0d %0d %0d", n, metric, sum); end
        if (last_dec >= 0) begin
          checks++;
          if (n - last_dec != 64) begin failures++; $display("FAIL rate"); end
        end
        last_dec = n; n_dec++;
        sum = 0;
      end
    end
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
