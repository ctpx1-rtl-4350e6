// toa_ref_counter: 32-bit reference time counter for the ToA extension.
// It advances once every DIV clocks, so with the 80 MHz link clock and DIV=2
// it ticks at 40 MHz, the rate of the Timepix4 coarse ToA (25 ns bins).
// While clear is high it holds zero; releasing clear together with the
// chip's own timer reset aligns the two. This counter is this design's means
// of extending the ToA; the paper gives only the 16-to-32-bit extension.
module toa_ref_counter #(
  parameter int DIV = 2
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        clear,
  output logic [31:0] count
);
  localparam int PW = (DIV > 1) ? $clog2(DIV) : 1;
  logic [PW-1:0] pre;

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      pre   <= '0;
      count <= '0;
    end else if (pre == PW'(DIV-1)) begin
      pre   <= '0;
      count <= count + 1'b1;
    end else begin
      pre <= pre + 1'b1;
    end
  end
endmodule
