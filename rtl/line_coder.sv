// line_coder: turns the input bit stream into a unipolar NRZ level.
//
// Bits arrive on a valid/ready handshake. Each accepted bit is held on `nrz`
// for SPB clocks (one bit period of carrier samples). `bit_in` is taken when
// `bit_valid && bit_ready`; `bit_ready` is high in the last clock of a bit
// period, so a new bit starts on the next edge. If no bit is offered then, the
// coder sends IDLE_BIT for one period and pulses `idle` with `bit_start`.
// After reset the first bit period starts at the first clock edge.
//
// The paper sends a unipolar NRZ sequence into the modulator. The handshake
// and the idle fill are this design's choices.
module line_coder
  import sc_pkg::*;
#(
  parameter int unsigned SPB      = SAMPLES_PER_BIT,
  parameter logic        IDLE_BIT = 1'b1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic bit_in,
  input  logic bit_valid,
  output logic bit_ready,
  output logic nrz,
  output logic bit_start,
  output logic idle
);
  localparam int unsigned CW = (SPB > 1) ? $clog2(SPB) : 1;
  logic [CW-1:0] cnt;

  assign bit_ready = (cnt == CW'(SPB - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= CW'(SPB - 1);
      nrz       <= IDLE_BIT;
      bit_start <= 1'b0;
      idle      <= 1'b0;
    end else if (bit_ready) begin
      cnt       <= '0;
      nrz       <= bit_valid ? bit_in : IDLE_BIT;
      bit_start <= 1'b1;
      idle      <= !bit_valid;
    end else begin
      cnt       <= cnt + 1'b1;
      bit_start <= 1'b0;
      idle      <= 1'b0;
    end
  end
endmodule
