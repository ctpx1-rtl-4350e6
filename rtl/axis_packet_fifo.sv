// axis_packet_fifo: store-and-forward FIFO for 512-bit beats.
// The output offers data only once a whole packet (up to its TLAST beat) is
// stored, so once the arbiter grants a packet it moves at one beat per clock.
// If the FIFO fills without holding a complete packet (a packet longer than
// DEPTH) it falls back to cut-through so it cannot lock up.
// Interfaces: s_* and m_* AXI-Stream; m_valid does not depend on m_ready.
// Storing whole packets before the arbiter is this design's choice; the
// paper only says the second stage merges the four streams.
module axis_packet_fifo
  import ctpx1_pkg::*;
#(
  parameter int DEPTH = 64
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  s_valid,
  output logic  s_ready,
  input  beat_t s_beat,
  output logic  m_valid,
  input  logic  m_ready,
  output beat_t m_beat
);
  localparam int CW = $clog2(DEPTH) + 1;
  logic full, empty, wr, rd;
  logic [CW-1:0] pkts;

  assign s_ready = !full;
  assign wr      = s_valid && s_ready;
  assign m_valid = !empty && (pkts != '0 || full);
  assign rd      = m_valid && m_ready;

  sync_fifo #(.W(BEAT_W), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst, .wr_en(wr), .wr_data(s_beat), .rd_en(rd), .rd_data(m_beat),
    .full, .empty, .count());

  always_ff @(posedge clk) begin
    if (rst) pkts <= '0;
    else pkts <= pkts + CW'(wr && s_beat.last) - CW'(rd && m_beat.last && pkts != '0);
  end
endmodule
