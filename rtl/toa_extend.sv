// toa_extend: widens the 16-bit coarse ToA of a Timepix4 event to 32 bits.
//
// The 16-bit ToA sits at in_raw[TOA_LSB +: 16]. Its upper 16 bits are taken
// from a reference counter (toa_ref) that runs at the ToA rate: an event
// always reaches the FPGA after it happened, so if its 16-bit ToA is above
// the low half of the reference, the reference has wrapped since and the
// upper half is reduced by one. This is exact for events that arrive less
// than 2^16 ToA ticks (1.6 ms at 25 ns) after their ToA.
// out_evt = {toa[31:16], in_raw[63:0]}: 80 bits, as the paper gives; where the
// ToA lies in the 64-bit word and the wrap rule are this design's choices.
// Timing: one event per clock, one cycle latency.
module toa_extend
  import ctpx1_pkg::*;
#(
  parameter int TOA_LSB = 28
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             in_valid,
  input  logic [RAW_W-1:0] in_raw,
  input  logic [31:0]      toa_ref,
  output logic             out_valid,
  output event_t           out_evt
);
  logic [15:0] toa, hi;

  assign toa = in_raw[TOA_LSB +: 16];
  assign hi  = toa_ref[31:16] - 16'(toa > toa_ref[15:0]);

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_evt   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_evt <= {hi, in_raw};
    end
  end
endmodule
