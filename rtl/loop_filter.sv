// loop_filter: shift-register (sequential) loop filter of the Costas loop.
//
// Every valid phase-detector decision is shifted into an LEN-bit register and
// a fill counter counts how many entries are fresh. When the register is full
// and all entries agree, the filter emits one pulse (up = all advance, dn =
// all retard) and empties itself, so at most one correction leaves every LEN
// decisions and a noisy or balanced detector (mixed entries) gives none.
// Outputs are registered one-clock pulses; up and dn are never high together.
//
// The paper designs the loop filter as a shift register; the all-agree
// rule, the restart after a pulse and LEN are this design's choices.
module loop_filter
  import sc_pkg::*;
#(
  parameter int unsigned LEN = LF_LEN
) (
  input  logic clk,
  input  logic rst_n,
  input  logic pd_adv,
  input  logic pd_valid,
  output logic up,
  output logic dn
);
  localparam int unsigned FW = $clog2(LEN + 1);
  logic [LEN-2:0] hist;      // the LEN-1 previous decisions
  logic [LEN-1:0] sr_next;   // window including the new decision
  logic [FW-1:0]  fill;
  logic           full_next;

  always_comb begin
    sr_next   = {hist, pd_adv};
    full_next = (fill == FW'(LEN - 1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hist <= '0;
      fill <= '0;
      up   <= 1'b0;
      dn   <= 1'b0;
    end else begin
      up <= 1'b0;
      dn <= 1'b0;
      if (pd_valid) begin
        hist <= sr_next[LEN-2:0];
        if (full_next && (sr_next == '1)) begin
          up   <= 1'b1;
          fill <= '0;
        end else if (full_next && (sr_next == '0)) begin
          dn   <= 1'b1;
          fill <= '0;
        end else if (!full_next) begin
          fill <= fill + 1'b1;
        end
      end
    end
  end

  initial assert (LEN >= 2) else $error("loop_filter: LEN must be at least 2");
  a_not_both: assert property (@(posedge clk) disable iff (!rst_n) !(up && dn));
endmodule
