// ctpx1_top: programmable-logic data path of the CTPX1 Timepix4 camera.
//
// Sixteen GWT links from one Timepix4 (8 from the top half, 8 from the
// bottom half of the chip) arrive as 66-bit blocks from the FPGA
// transceivers, in the 80 MHz link clock domain. Two merge stages gather
// them onto one bus:
//   stage 1: four MCRRMs, one per group of four links, descramble each link,
//            extend the event ToA from 16 to 32 bits (80-bit events), merge
//            the four links round-robin at 320 MHz and send buffered packets
//            closed by a count trigger (128 events) or a 1 ms latency trigger;
//   stage 2: an AXI-Stream interconnect widens the four 80-bit streams to
//            512 bits and merges them packet by packet.
// The mode MUX then sends the 512-bit stream straight to the output switch
// (Streaming Mode) or into DDR4 through w_ddr (Buffered Mode); r_ddr reads
// the buffer back, and the switch connects the chosen source to the Aurora
// (QSFP+) or the UDP (SFP+) output. pl_registers (AXI4-Lite) holds the
// configuration and status, and tpx4_slow_control passes slow-control bytes
// from the processing system to the chip.
// The transceivers, the memory controller with its AXI interconnect, the
// Aurora and UDP cores and the processing system are outside this module:
// their connections are ports. The structure follows the paper's firmware
// block diagram; the memory and register interfaces are this design's.
// Clocks: lclk (80 MHz link side), aclk (320 MHz, everything else), each with
// a synchronous active-high reset.
module ctpx1_top
  import ctpx1_pkg::*;
#(
  parameter int TOA_LSB        = 28,
  parameter int CDC_DEPTH      = 16,
  parameter int FIFO_DEPTH     = 1024,
  parameter int PKT_FIFO_DEPTH = 64,
  parameter int DDR_ADDR_W     = 27,
  parameter int RD_PKT_WORDS   = 32,
  parameter int SC_DIV         = 8
) (
  // link side
  input  logic                          lclk,
  input  logic                          lrst,
  input  logic [N_LINKS-1:0]            gwt_valid,
  input  logic [N_LINKS-1:0][BLK_W-1:0] gwt_blk,
  output logic [N_LINKS-1:0]            gwt_hdr_err,
  output logic [N_LINKS-1:0]            gwt_cdc_drop,
  // processing side
  input  logic                          aclk,
  input  logic                          arst,
  // AXI4-Lite from the processing system
  input  logic [7:0]                    s_axil_awaddr,
  input  logic                          s_axil_awvalid,
  output logic                          s_axil_awready,
  input  logic [31:0]                   s_axil_wdata,
  input  logic [3:0]                    s_axil_wstrb,
  input  logic                          s_axil_wvalid,
  output logic                          s_axil_wready,
  output logic [1:0]                    s_axil_bresp,
  output logic                          s_axil_bvalid,
  input  logic                          s_axil_bready,
  input  logic [7:0]                    s_axil_araddr,
  input  logic                          s_axil_arvalid,
  output logic                          s_axil_arready,
  output logic [31:0]                   s_axil_rdata,
  output logic [1:0]                    s_axil_rresp,
  output logic                          s_axil_rvalid,
  input  logic                          s_axil_rready,
  // slow-control stream from/to the processing system, and chip pins
  input  logic                          s_sc_valid,
  output logic                          s_sc_ready,
  input  logic [7:0]                    s_sc_data,
  output logic                          m_sc_valid,
  input  logic                          m_sc_ready,
  output logic [7:0]                    m_sc_data,
  output logic                          tpx_sc_clk,
  output logic                          tpx_sc_cs_n,
  output logic                          tpx_sc_dout,
  input  logic                          tpx_sc_din,
  // DDR4 buffer memory (write and read ports)
  output logic                          mem_wvalid,
  input  logic                          mem_wready,
  output logic [DDR_ADDR_W-1:0]         mem_waddr,
  output logic [BUS_W-1:0]              mem_wdata,
  output logic                          mem_arvalid,
  input  logic                          mem_arready,
  output logic [DDR_ADDR_W-1:0]         mem_araddr,
  input  logic                          mem_rvalid,
  input  logic [BUS_W-1:0]              mem_rdata,
  // output links
  output logic                          aurora_valid,
  input  logic                          aurora_ready,
  output beat_t                         aurora_beat,
  output logic                          udp_valid,
  input  logic                          udp_ready,
  output beat_t                         udp_beat
);
  // configuration
  logic               mode, dest, ddr_rd_en, ddr_clear, toa_clear;
  logic [N_LINKS-1:0] link_en;
  logic [15:0]        threshold;
  logic [31:0]        timeout;

  // ToA reference counter in the link domain
  logic        tc_s1, tc_s2;
  logic [31:0] toa_ref;

  always_ff @(posedge lclk) begin
    if (lrst) begin
      tc_s1 <= 1'b1;
      tc_s2 <= 1'b1;
    end else begin
      tc_s1 <= toa_clear;
      tc_s2 <= tc_s1;
    end
  end

  toa_ref_counter #(.DIV(2)) u_toa_ref (.clk(lclk), .rst(lrst), .clear(tc_s2), .count(toa_ref));

  // stage 1
  logic   [N_GROUPS-1:0] g_valid, g_ready, g_last, g_evt_in, g_drop, g_tc, g_tt;
  event_t [N_GROUPS-1:0] g_data;

  for (genvar g = 0; g < N_GROUPS; g++) begin : g_mcrrm
    mcrrm #(.TOA_LSB(TOA_LSB), .CDC_DEPTH(CDC_DEPTH), .FIFO_DEPTH(FIFO_DEPTH)) u_mcrrm (
      .lclk, .lrst,
      .blk_valid(gwt_valid[g*GRP_LINKS +: GRP_LINKS]),
      .blk(gwt_blk[g*GRP_LINKS +: GRP_LINKS]),
      .toa_ref,
      .link_en(link_en[g*GRP_LINKS +: GRP_LINKS]),
      .hdr_err(gwt_hdr_err[g*GRP_LINKS +: GRP_LINKS]),
      .cdc_drop(gwt_cdc_drop[g*GRP_LINKS +: GRP_LINKS]),
      .aclk, .arst, .threshold, .timeout,
      .m_valid(g_valid[g]), .m_ready(g_ready[g]), .m_data(g_data[g]), .m_last(g_last[g]),
      .evt_in(g_evt_in[g]), .drop(g_drop[g]), .trig_count(g_tc[g]), .trig_timeout(g_tt[g]));
  end

  // stage 2
  logic  ic_valid, ic_ready;
  beat_t ic_beat;

  axis_interconnect #(.PKT_FIFO_DEPTH(PKT_FIFO_DEPTH)) u_ic (
    .clk(aclk), .rst(arst), .s_valid(g_valid), .s_ready(g_ready), .s_data(g_data), .s_last(g_last),
    .m_valid(ic_valid), .m_ready(ic_ready), .m_beat(ic_beat));

  // mode MUX
  logic  d_valid, d_ready, b_valid, b_ready;
  beat_t d_beat, b_beat;
  logic  cur_mode;

  mode_mux u_mux (
    .clk(aclk), .rst(arst), .mode, .s_valid(ic_valid), .s_ready(ic_ready), .s_beat(ic_beat),
    .d_valid, .d_ready, .d_beat, .b_valid, .b_ready, .b_beat, .cur_mode);

  // DDR ring buffer
  logic [DDR_ADDR_W:0] wr_ptr, rd_ptr;
  logic                ddr_full;
  logic                r_valid, r_ready;
  beat_t               r_beat;

  w_ddr #(.ADDR_W(DDR_ADDR_W)) u_wddr (
    .clk(aclk), .rst(arst), .clear(ddr_clear), .s_valid(b_valid), .s_ready(b_ready), .s_beat(b_beat),
    .mem_wvalid, .mem_wready, .mem_waddr, .mem_wdata, .rd_ptr, .wr_ptr, .full(ddr_full));

  r_ddr #(.ADDR_W(DDR_ADDR_W), .PKT_WORDS(RD_PKT_WORDS)) u_rddr (
    .clk(aclk), .rst(arst), .clear(ddr_clear), .enable(ddr_rd_en), .wr_ptr, .rd_ptr,
    .mem_arvalid, .mem_arready, .mem_araddr, .mem_rvalid, .mem_rdata,
    .m_valid(r_valid), .m_ready(r_ready), .m_beat(r_beat));

  // output switch: source follows the mode (direct stream or DDR reader)
  axis_switch u_sw (
    .clk(aclk), .rst(arst), .src(mode), .dest,
    .s0_valid(d_valid), .s0_ready(d_ready), .s0_beat(d_beat),
    .s1_valid(r_valid), .s1_ready(r_ready), .s1_beat(r_beat),
    .m0_valid(aurora_valid), .m0_ready(aurora_ready), .m0_beat(aurora_beat),
    .m1_valid(udp_valid), .m1_ready(udp_ready), .m1_beat(udp_beat));

  // registers
  pl_registers u_regs (
    .clk(aclk), .rst(arst),
    .s_awaddr(s_axil_awaddr), .s_awvalid(s_axil_awvalid), .s_awready(s_axil_awready),
    .s_wdata(s_axil_wdata), .s_wstrb(s_axil_wstrb), .s_wvalid(s_axil_wvalid), .s_wready(s_axil_wready),
    .s_bresp(s_axil_bresp), .s_bvalid(s_axil_bvalid), .s_bready(s_axil_bready),
    .s_araddr(s_axil_araddr), .s_arvalid(s_axil_arvalid), .s_arready(s_axil_arready),
    .s_rdata(s_axil_rdata), .s_rresp(s_axil_rresp), .s_rvalid(s_axil_rvalid), .s_rready(s_axil_rready),
    .mode, .dest, .ddr_rd_en, .ddr_clear, .toa_clear, .link_en, .threshold, .timeout,
    .ddr_fill(32'(wr_ptr - rd_ptr)),
    .ev_drop(g_drop), .ev_in(g_evt_in), .ev_trig_count(g_tc), .ev_trig_timeout(g_tt));

  // slow control
  tpx4_slow_control #(.DIV(SC_DIV)) u_sc (
    .clk(aclk), .rst(arst), .s_valid(s_sc_valid), .s_ready(s_sc_ready), .s_data(s_sc_data),
    .m_valid(m_sc_valid), .m_ready(m_sc_ready), .m_data(m_sc_data),
    .sc_clk(tpx_sc_clk), .sc_cs_n(tpx_sc_cs_n), .sc_dout(tpx_sc_dout), .sc_din(tpx_sc_din));
endmodule
