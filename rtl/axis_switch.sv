// axis_switch: the AXI4-Stream Switch in front of the output links.
// Two sources, the direct stream from the mode MUX (src = 0, Streaming Mode)
// and the DDR read stream (src = 1, Buffered Mode), and two destinations,
// the Aurora link over QSFP+ (dest = 0) and the UDP link over SFP+
// (dest = 1). One source is routed to one destination; the other source is
// held and the other destination idles. The route is taken only between
// packets. The paper gives the sources, destinations and purpose; the
// select encoding and packet-boundary rule are this design's.
module axis_switch
  import ctpx1_pkg::*;
(
  input  logic  clk,
  input  logic  rst,
  input  logic  src,
  input  logic  dest,
  input  logic  s0_valid,
  output logic  s0_ready,
  input  beat_t s0_beat,
  input  logic  s1_valid,
  output logic  s1_ready,
  input  beat_t s1_beat,
  output logic  m0_valid,
  input  logic  m0_ready,
  output beat_t m0_beat,
  output logic  m1_valid,
  input  logic  m1_ready,
  output beat_t m1_beat
);
  logic  in_pkt, cur_src, cur_dest, rs, rd;
  logic  v, r;
  beat_t b;

  assign rs = in_pkt ? cur_src  : src;
  assign rd = in_pkt ? cur_dest : dest;
  assign v  = rs ? s1_valid : s0_valid;
  assign b  = rs ? s1_beat  : s0_beat;
  assign r  = rd ? m1_ready : m0_ready;

  assign s0_ready = !rs && r;
  assign s1_ready =  rs && r;
  assign m0_valid = v && !rd;
  assign m1_valid = v &&  rd;
  assign m0_beat  = b;
  assign m1_beat  = b;

  always_ff @(posedge clk) begin
    if (rst) begin
      in_pkt   <= 1'b0;
      cur_src  <= 1'b0;
      cur_dest <= 1'b0;
    end else begin
      if (!in_pkt) begin
        cur_src  <= src;
        cur_dest <= dest;
      end
      if (v && r) in_pkt <= !b.last;
    end
  end
endmodule
