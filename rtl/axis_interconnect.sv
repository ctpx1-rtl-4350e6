// axis_interconnect: second merge stage of CTPX1.
// Each of the four 80-bit MCRRM streams is widened to 512-bit beats
// (axis_upsizer) and collected packet by packet (axis_packet_fifo); a
// round-robin arbiter (axis_rr_arbiter) then merges the four packet streams
// onto one 512-bit bus at the same 320 MHz clock. Widening before
// arbitration lets each input use a sixth of the bus, so four full-rate
// MCRRMs (4 x 4 links x 80 Mevent/s = 1.28 Gevent/s) use two thirds of it
// (320 MHz x 6 events per beat = 1.92 Gevent/s). The paper gives the function (4-1 arbitration
// and width conversion to 512 bits); this arrangement is this design's.
module axis_interconnect
  import ctpx1_pkg::*;
#(
  parameter int PKT_FIFO_DEPTH = 64
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic   [N_GROUPS-1:0] s_valid,
  output logic   [N_GROUPS-1:0] s_ready,
  input  event_t [N_GROUPS-1:0] s_data,
  input  logic   [N_GROUPS-1:0] s_last,
  output logic                  m_valid,
  input  logic                  m_ready,
  output beat_t                 m_beat
);
  logic  [N_GROUPS-1:0] up_valid, up_ready, pf_valid, pf_ready;
  beat_t [N_GROUPS-1:0] up_beat, pf_beat;

  for (genvar i = 0; i < N_GROUPS; i++) begin : g_in
    axis_upsizer u_up (
      .clk, .rst, .s_valid(s_valid[i]), .s_ready(s_ready[i]), .s_data(s_data[i]),
      .s_last(s_last[i]), .m_valid(up_valid[i]), .m_ready(up_ready[i]), .m_beat(up_beat[i]));
    axis_packet_fifo #(.DEPTH(PKT_FIFO_DEPTH)) u_pf (
      .clk, .rst, .s_valid(up_valid[i]), .s_ready(up_ready[i]), .s_beat(up_beat[i]),
      .m_valid(pf_valid[i]), .m_ready(pf_ready[i]), .m_beat(pf_beat[i]));
  end

  axis_rr_arbiter #(.N(N_GROUPS)) u_arb (
    .clk, .rst, .s_valid(pf_valid), .s_ready(pf_ready), .s_beat(pf_beat),
    .m_valid, .m_ready, .m_beat, .m_src());
endmodule
