// mode_mux: the "MUX" with select S0 after the second merge stage.
// mode = 0 (Streaming Mode) sends the 512-bit stream straight to the output
// switch (port d_*); mode = 1 (Buffered Mode) sends it to the DDR writer
// (port b_*). The select is sampled only between packets, so a mode change
// never splits a packet between the two paths. Packet-boundary switching is
// this design's choice.
module mode_mux
  import ctpx1_pkg::*;
(
  input  logic  clk,
  input  logic  rst,
  input  logic  mode,
  input  logic  s_valid,
  output logic  s_ready,
  input  beat_t s_beat,
  output logic  d_valid,
  input  logic  d_ready,
  output beat_t d_beat,
  output logic  b_valid,
  input  logic  b_ready,
  output beat_t b_beat,
  output logic  cur_mode
);
  logic in_pkt, sel;

  assign sel     = in_pkt ? cur_mode : mode;
  assign d_valid = s_valid && !sel;
  assign b_valid = s_valid && sel;
  assign d_beat  = s_beat;
  assign b_beat  = s_beat;
  assign s_ready = sel ? b_ready : d_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      in_pkt   <= 1'b0;
      cur_mode <= 1'b0;
    end else begin
      if (!in_pkt) cur_mode <= mode;
      if (s_valid && s_ready) in_pkt <= !s_beat.last;
    end
  end
endmodule
