// mcrrm: Multi-Channel Round-Robin Merger, the first merge stage of CTPX1.
//
// Serves four GWT links. Per link, in the 80 MHz link clock domain: a 64b/66b
// descrambler restores the 64-bit raw word and a ToA extender widens the
// 16-bit coarse ToA to 32 bits, giving an 80-bit event. The four streams then
// cross into the 320 MHz domain and are merged round-robin (rr_merge4), and
// burst_ctrl buffers them and sends them as AXI-Stream packets closed by
// TLAST, started by the count trigger (threshold events) or the latency
// trigger (timeout). This structure is the paper's (its Fig. 7); the sizes
// of the buffers are this design's.
// Ports: blk/blk_valid per link (lclk); toa_ref from toa_ref_counter (lclk);
// link_en = GWT_en mask; m_* 80-bit AXI-Stream (aclk).
module mcrrm
  import ctpx1_pkg::*;
#(
  parameter int          TOA_LSB           = 28,
  parameter int          CDC_DEPTH         = 16,
  parameter int          FIFO_DEPTH        = 1024
) (
  input  logic                              lclk,
  input  logic                              lrst,
  input  logic [GRP_LINKS-1:0]              blk_valid,
  input  logic [GRP_LINKS-1:0][BLK_W-1:0]   blk,
  input  logic [31:0]                       toa_ref,
  input  logic [GRP_LINKS-1:0]              link_en,
  output logic [GRP_LINKS-1:0]              hdr_err,
  output logic [GRP_LINKS-1:0]              cdc_drop,
  input  logic                              aclk,
  input  logic                              arst,
  input  logic [15:0]                       threshold,
  input  logic [31:0]                       timeout,
  output logic                              m_valid,
  input  logic                              m_ready,
  output event_t                            m_data,
  output logic                              m_last,
  output logic                              evt_in,
  output logic                              drop,
  output logic                              trig_count,
  output logic                              trig_timeout
);
  logic   [GRP_LINKS-1:0]            raw_valid, ext_valid;
  logic   [GRP_LINKS-1:0][RAW_W-1:0] raw;
  event_t [GRP_LINKS-1:0]            ext;
  logic                              mg_valid;
  event_t                            mg_evt;
  logic [$clog2(FIFO_DEPTH):0]       level;

  for (genvar i = 0; i < GRP_LINKS; i++) begin : g_link
    gwt_descrambler u_desc (
      .clk(lclk), .rst(lrst), .blk_valid(blk_valid[i]), .blk(blk[i]),
      .evt_valid(raw_valid[i]), .evt(raw[i]), .hdr_err(hdr_err[i]));
    toa_extend #(.TOA_LSB(TOA_LSB)) u_toa (
      .clk(lclk), .rst(lrst), .in_valid(raw_valid[i]), .in_raw(raw[i]), .toa_ref,
      .out_valid(ext_valid[i]), .out_evt(ext[i]));
  end

  rr_merge4 #(.CDC_DEPTH(CDC_DEPTH)) u_merge (
    .lclk, .lrst, .in_valid(ext_valid), .in_evt(ext), .link_en, .cdc_drop,
    .aclk, .arst, .out_valid(mg_valid), .out_evt(mg_evt), .out_src());

  burst_ctrl #(.FIFO_DEPTH(FIFO_DEPTH)) u_burst (
    .clk(aclk), .rst(arst), .in_valid(mg_valid), .in_evt(mg_evt), .threshold, .timeout,
    .m_valid, .m_ready, .m_data, .m_last, .drop, .trig_count, .trig_timeout, .level);

  assign evt_in = mg_valid;
endmodule
