// tb_loop_filter: feeds runs and random mixes of phase-detector decisions
// (with invalid cycles in between) and compares the up/dn pulses with a
// reference: a pulse follows the LEN-th valid decision in a row that agrees,
// counted since the last pulse, and then the count starts again.
module tb_loop_filter;
  localparam int LEN = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic pd_adv = 1'b0, pd_valid = 1'b0, up, dn;
  int checks = 0, failures = 0;
  int n_up = 0, n_dn = 0;

  loop_filter #(.LEN(LEN)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    bit win [$];
    bit eu, ed, all1, all0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int k = 0; k < 2000; k++) begin
      pd_valid = ($urandom % 5) != 0;
      // long same-sign stretches so pulses happen, random bits otherwise
      pd_adv = (k % 200 < 60) ? 1'b1 : (k % 200 < 120) ? 1'b0 : 1'($urandom);
      eu = 0; ed = 0;
      if (pd_valid) begin
        win.push_back(pd_adv);
        if (win.size() > LEN) void'(win.pop_front());
        if (win.size() == LEN) begin
          all1 = 1; all0 = 1;
          foreach (win[i]) begin all1 &= win[i]; all0 &= !win[i]; end
          eu = all1; ed = all0;
          if (all1 || all0) win.delete();
        end
      end
      @(posedge clk); #1;
      checks++;
      if (up != eu || dn != ed) begin
        failures++;
        if (failures < 10) $display("FAIL k=%0d up=%0d dn=%0d exp %0d %0d", k, up, dn, eu, ed);
      end
      n_up += up; n_dn += dn;
    end
    checks += 2;
    if (n_up == 0) failures++;
    if (n_dn == 0) failures++;
    $display("pulses up=%0d dn=%0d", n_up, n_dn);
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
