// bpsk_mux: the BPSK modulator as a 2:1 multiplexer.
//
// The two mux inputs are the carrier sample and its negation; the NRZ data
// bit is the select line: bit 1 passes +carrier, bit 0 passes -carrier
// (a 180 degree phase flip). The chosen sample is registered, so the output
// lags its inputs by one clock.
//
// The paper models the transmitter as a 2x1 mux fed by DDS sine data; the
// register on the output and the bit-to-phase mapping are this design's
// choices. The carrier must not reach the most negative code, so that its
// negation fits (the sine table's amplitude of 127 ensures this).
module bpsk_mux
  import sc_pkg::*;
#(
  parameter int unsigned W = SAMPLE_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic signed [W-1:0] carrier,
  input  logic                data_bit,
  output logic signed [W-1:0] tx_sample
);
  logic signed [W-1:0] carrier_n;
  assign carrier_n = -carrier;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tx_sample <= '0;
    else        tx_sample <= data_bit ? carrier : carrier_n;
  end
endmodule
