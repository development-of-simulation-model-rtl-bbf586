// tb_line_coder: drives a random bit stream with random gaps in the valid
// signal and checks, clock by clock, that each bit is held for exactly SPB
// clocks, that ready is high only in the last clock of a period, and that a
// period with no valid bit sends the idle bit 1 with the idle flag.
module tb_line_coder;
  localparam int SPB = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic bit_in = 1'b0, bit_valid = 1'b0, bit_ready, nrz, bit_start, idle;
  int checks = 0, failures = 0;
  int n_idle = 0;

  line_coder #(.SPB(SPB)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    bit exp_bit, exp_idle;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int b = 0; b < 100; b++) begin
      // present the next bit (or none) during the clock before the period
      #1;
      bit_valid = ($urandom % 4) != 0;
      bit_in    = 1'($urandom);
      check(bit_ready, $sformatf("ready before bit %0d", b));
      exp_bit  = bit_valid ? bit_in : 1'b1;
      exp_idle = !bit_valid;
      @(posedge clk); #1;
      bit_valid = 1'b0;
      bit_in    = 1'($urandom);
      if (exp_idle) n_idle++;
      check(bit_start && idle == exp_idle, $sformatf("start/idle of bit %0d", b));
      for (int c = 0; c < SPB; c++) begin
        check(nrz == exp_bit, $sformatf("bit %0d clock %0d nrz=%0d", b, c, nrz));
        if (c > 0) check(!bit_start, "bit_start only in first clock");
        if (c < SPB - 1) begin
          check(!bit_ready, $sformatf("ready early bit %0d clock %0d", b, c));
          @(posedge clk); #1;
        end
      end
    end
    check(n_idle > 0, "no idle period was exercised");
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
