// sine_lut: read-only sine table shared by the transmit DDS and the receive VCO.
//
// Entry k holds round(AMP * sin(2*pi*k/2^AW)) as a signed W-bit value. The
// table is computed at elaboration from that formula, so no data file is
// needed. The read is combinational: addr in, value out in the same cycle.
// The table size and amplitude are this design's choices; the paper only
// says that the DDS feeds sine data to the modulator's mux.
module sine_lut #(
  parameter int unsigned AW  = sc_pkg::LUT_AW,
  parameter int unsigned W   = sc_pkg::SAMPLE_W,
  parameter int unsigned AMP = sc_pkg::AMPLITUDE
) (
  input  logic [AW-1:0]       addr,
  output logic signed [W-1:0] data
);
  localparam int unsigned DEPTH = 1 << AW;
  typedef logic signed [W-1:0] rom_t [DEPTH];

  function automatic rom_t gen_rom();
    rom_t r;
    real  pi;
    pi = 3.14159265358979323846;
    for (int k = 0; k < DEPTH; k++) begin
      r[k] = W'($rtoi($floor(real'(AMP) * $sin(2.0 * pi * real'(k) / real'(DEPTH)) + 0.5)));
    end
    return r;
  endfunction

  localparam rom_t ROM = gen_rom();

  assign data = ROM[addr];
endmodule
