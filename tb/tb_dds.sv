// tb_dds: checks the DDS output against round(127*sin(2*pi*k*FCW/2^16)) for
// every clock k after reset, and that the phase returns to 0 every 16 clocks
// (carrier = f_clk/16). A second instance with a different step checks that
// the step parameter sets the frequency.
module tb_dds;
  import sc_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  sample_t s0, s1;
  phase_t  p0, p1;
  int checks = 0, failures = 0;

  dds u0 (.clk, .rst_n, .sin_out(s0), .phase_out(p0));
  dds #(.STEP(16'd1000)) u1 (.clk, .rst_n, .sin_out(s1), .phase_out(p1));

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 check(s0 == 0 && p0 == 0, "reset state");
    @(negedge clk) rst_n = 1'b1;
    for (int k = 0; k < 200; k++) begin
      @(posedge clk); #1;
      check(int'(s0) == ref_sin(((k * 4096) % 65536) >> 8, 8, 127),
            $sformatf("k=%0d s0=%0d", k, s0));
      check(int'(s1) == ref_sin(((k * 1000) % 65536) >> 8, 8, 127),
            $sformatf("k=%0d s1=%0d", k, s1));
      if ((k + 1) % SAMPLES_PER_CARRIER == 0) check(p0 == 0, $sformatf("period at k=%0d", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
