// tb_vco_mux: random up/dn pulses; a reference phase advances by 4096,
// 4096+128 or 4096-128 per clock, and after each clock lo_i and lo_q must be
// the sine and cosine (127 amplitude, 256-entry resolution) of the phase held
// before that clock.
module tb_vco_mux;
  import sc_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic up = 1'b0, dn = 1'b0;
  sample_t lo_i, lo_q;
  phase_t  phase_out;
  int checks = 0, failures = 0;

  vco_mux dut (.*);
  always #5 clk = ~clk;

  initial begin
    int ph, old;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    ph = 0;
    for (int k = 0; k < 1000; k++) begin
      case ($urandom % 3)
        0: begin up = 1; dn = 0; end
        1: begin up = 0; dn = 1; end
        default: begin up = 0; dn = 0; end
      endcase
      old = ph;
      ph = (ph + 4096 + (up ? 128 : 0) - (dn ? 128 : 0)) % 65536;
      @(posedge clk); #1;
      checks += 3;
      if (int'(phase_out) != ph) begin failures++; if (failures < 10) $display("FAIL phase %0d exp %0d", phase_out, ph); end
      if (int'(lo_i) != ref_sin(old >> 8, 8, 127)) begin failures++; if (failures < 10) $display("FAIL lo_i"); end
      if (int'(lo_q) != ref_sin(((old >> 8) + 64) % 256, 8, 127)) begin failures++; if (failures < 10) $display("FAIL lo_q"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
