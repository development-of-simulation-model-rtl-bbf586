// tb_phase_discriminator: random I and Q (zero now and then); one clock later
// adv must be 1 exactly when I*Q >= 0 with both nonzero signs agreeing, and
// valid must be low whenever I or Q is zero.
module tb_phase_discriminator;
  import sc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  filt_t arm_i = '0, arm_q = '0;
  logic adv, valid;
  int checks = 0, failures = 0;

  phase_discriminator dut (.*);
  always #5 clk = ~clk;

  initial begin
    int a, b;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int k = 0; k < 800; k++) begin
      a = ($urandom % 8 == 0) ? 0 : int'($urandom % 60000) - 30000;
      b = ($urandom % 8 == 0) ? 0 : int'($urandom % 60000) - 30000;
      arm_i = filt_t'(a); arm_q = filt_t'(b);
      @(posedge clk); #1;
      checks += 2;
      if (valid != (a != 0 && b != 0)) begin failures++; $display("FAIL valid a=%0d b=%0d", a, b); end
      if (a != 0 && b != 0 && adv != ((a > 0) == (b > 0))) begin
        failures++; $display("FAIL adv a=%0d b=%0d adv=%0d", a, b, adv);
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
