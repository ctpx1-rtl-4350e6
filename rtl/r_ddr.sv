// r_ddr: reads the DDR4 ring buffer back out as a 512-bit AXI-Stream.
// While enable is high and the ring holds words (req_ptr != wr_ptr) it issues
// one read request per clock, as long as the requests in flight plus the words
// already buffered fit in its OBUF-entry output FIFO, so read data is never
// refused. Responses return in order. Packets of at most PKT_WORDS beats are
// formed as the requests are made: a request closes a packet (TLAST) when it
// is the PKT_WORDS-th of the packet or the last word then in the ring. The
// keep bits come back from the spare bits 485:480 where w_ddr put them. rd_ptr, the release
// pointer given back to w_ddr, advances as beats leave, so a word is never
// overwritten before it has been sent. clear empties the ring.
// The paper names this block (R_DDR); its organisation is this design's.
module r_ddr
  import ctpx1_pkg::*;
#(
  parameter int ADDR_W    = 27,
  parameter int PKT_WORDS = 32,
  parameter int OBUF      = 16
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              clear,
  input  logic              enable,
  input  logic [ADDR_W:0]   wr_ptr,
  output logic [ADDR_W:0]   rd_ptr,
  output logic              mem_arvalid,
  input  logic              mem_arready,
  output logic [ADDR_W-1:0] mem_araddr,
  input  logic              mem_rvalid,
  input  logic [BUS_W-1:0]  mem_rdata,
  output logic              m_valid,
  input  logic              m_ready,
  output beat_t             m_beat
);
  localparam int OW = $clog2(OBUF) + 1;
  localparam int PW = $clog2(PKT_WORDS) + 1;

  logic [ADDR_W:0] req_ptr;
  logic [OW-1:0]   inflight, ocount, tcount;
  logic [PW-1:0]   pkt_cnt;
  logic            issue, req_last, tag_last, tag_empty, tag_full, ofull, oempty;
  logic [BUS_W:0]  odata;   // {last, data}

  assign req_last    = (pkt_cnt == PW'(PKT_WORDS-1)) || (req_ptr + 1'b1 == wr_ptr);
  assign mem_arvalid = enable && !clear && (req_ptr != wr_ptr) &&
                       ((inflight + ocount) < OW'(OBUF));
  assign mem_araddr  = req_ptr[ADDR_W-1:0];
  assign issue       = mem_arvalid && mem_arready;

  // Tags: the TLAST decision of each request in flight.
  sync_fifo #(.W(1), .DEPTH(OBUF)) u_tag (
    .clk, .rst(rst || clear), .wr_en(issue), .wr_data(req_last), .rd_en(mem_rvalid),
    .rd_data(tag_last), .full(tag_full), .empty(tag_empty), .count(tcount));

  sync_fifo #(.W(BUS_W+1), .DEPTH(OBUF)) u_obuf (
    .clk, .rst(rst || clear), .wr_en(mem_rvalid), .wr_data({tag_last, mem_rdata}),
    .rd_en(m_valid && m_ready), .rd_data(odata), .full(ofull), .empty(oempty), .count(ocount));

  assign m_valid = !oempty;
  always_comb begin
    m_beat.data = odata[BUS_W-1:0];
    m_beat.data[BUS_W-1:SPARE_LSB] = '0;
    m_beat.keep = odata[SPARE_LSB +: SLOTS];
    m_beat.last = odata[BUS_W];
  end

  assign inflight = tcount;

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      req_ptr <= '0;
      rd_ptr  <= '0;
      pkt_cnt <= '0;
    end else begin
      if (issue) begin
        req_ptr <= req_ptr + 1'b1;
        pkt_cnt <= req_last ? '0 : pkt_cnt + 1'b1;
      end
      if (m_valid && m_ready) rd_ptr <= rd_ptr + 1'b1;
    end
  end

  // Read data only arrives for requests made, and always finds room.
  always_ff @(posedge clk)
    if (!rst && mem_rvalid) assert (!tag_empty && !ofull) else $error("r_ddr: unexpected read data");
endmodule
