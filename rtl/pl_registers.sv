// pl_registers: AXI4-Lite register file of the CTPX1 programmable logic.
//
// The processing system sets up the data path through these registers and
// reads back status. Register map (byte addresses, 32-bit registers):
//   0x00 CTRL       RW  [0] mode: 0 Streaming, 1 Buffered (also selects the
//                        DDR reader as switch source) [1] dest: 0 Aurora,
//                        1 UDP  [2] DDR read-out enable  [3] DDR clear
//                        (held while 1)  [4] ToA reference clear (held)
//   0x04 LINK_EN    RW  [15:0] per-link enable (GWT mask), reset 0xFFFF
//   0x08 THRESHOLD  RW  [15:0] count trigger of the MCRRM bursts, reset 128
//   0x0C TIMEOUT    RW  latency trigger in 320 MHz clocks, reset 320000 (1 ms)
//   0x10 DDR_FILL   RO  words held in the DDR ring
//   0x14 DROP_CNT   RC  events lost at a full MCRRM buffer
//   0x18 EVT_CNT    RC  events entering the MCRRM buffers
//   0x1C CNT_BURSTS RC  bursts started by the count trigger
//   0x20 TMO_BURSTS RC  bursts started by the latency trigger
// RC: read-only counter, cleared by any write to it. The paper names the
// block and its AXI4-Lite bus and says the link masks and modes are
// configurable; the map itself is this design's. The reset values 128 and
// 1 ms are the paper's. Handshake: a write is taken when AWVALID and WVALID
// are both high and no response is pending; BRESP/RRESP are always OKAY.
// Runs on the 320 MHz data-path clock.
module pl_registers
  import ctpx1_pkg::*;
#(
  parameter logic [15:0] THRESHOLD_RESET = 16'd128,
  parameter logic [31:0] TIMEOUT_RESET   = 32'd320000
) (
  input  logic                clk,
  input  logic                rst,
  // AXI4-Lite slave
  input  logic [7:0]          s_awaddr,
  input  logic                s_awvalid,
  output logic                s_awready,
  input  logic [31:0]         s_wdata,
  input  logic [3:0]          s_wstrb,
  input  logic                s_wvalid,
  output logic                s_wready,
  output logic [1:0]          s_bresp,
  output logic                s_bvalid,
  input  logic                s_bready,
  input  logic [7:0]          s_araddr,
  input  logic                s_arvalid,
  output logic                s_arready,
  output logic [31:0]         s_rdata,
  output logic [1:0]          s_rresp,
  output logic                s_rvalid,
  input  logic                s_rready,
  // configuration
  output logic                mode,
  output logic                dest,
  output logic                ddr_rd_en,
  output logic                ddr_clear,
  output logic                toa_clear,
  output logic [N_LINKS-1:0]  link_en,
  output logic [15:0]         threshold,
  output logic [31:0]         timeout,
  // status
  input  logic [31:0]         ddr_fill,
  input  logic [N_GROUPS-1:0] ev_drop,
  input  logic [N_GROUPS-1:0] ev_in,
  input  logic [N_GROUPS-1:0] ev_trig_count,
  input  logic [N_GROUPS-1:0] ev_trig_timeout
);
  logic [4:0]  ctrl;
  logic [31:0] drop_cnt, evt_cnt, cnt_bursts, tmo_bursts;
  logic        wr;
  logic [31:0] wmask;

  assign {toa_clear, ddr_clear, ddr_rd_en, dest, mode} = ctrl;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign s_awready = s_awvalid && s_wvalid && !s_bvalid;
  assign s_wready  = s_awready;
  assign s_arready = !s_rvalid;
  assign wr        = s_awready;

  always_comb
    for (int b = 0; b < 4; b++) wmask[b*8 +: 8] = {8{s_wstrb[b]}};

  function automatic logic [31:0] popc(input logic [N_GROUPS-1:0] v);
    logic [31:0] n = '0;
    for (int i = 0; i < N_GROUPS; i++) n += 32'(v[i]);
    return n;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      ctrl       <= '0;
      link_en    <= '1;
      threshold  <= THRESHOLD_RESET;
      timeout    <= TIMEOUT_RESET;
      drop_cnt   <= '0;
      evt_cnt    <= '0;
      cnt_bursts <= '0;
      tmo_bursts <= '0;
      s_bvalid   <= 1'b0;
      s_rvalid   <= 1'b0;
      s_rdata    <= '0;
    end else begin
      drop_cnt   <= drop_cnt   + popc(ev_drop);
      evt_cnt    <= evt_cnt    + popc(ev_in);
      cnt_bursts <= cnt_bursts + popc(ev_trig_count);
      tmo_bursts <= tmo_bursts + popc(ev_trig_timeout);

      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr) begin
        s_bvalid <= 1'b1;
        unique case (s_awaddr[7:2])
          6'h00: ctrl      <= (ctrl & ~wmask[4:0]) | (s_wdata[4:0] & wmask[4:0]);
          6'h01: link_en   <= (link_en & ~wmask[15:0]) | (s_wdata[15:0] & wmask[15:0]);
          6'h02: threshold <= (threshold & ~wmask[15:0]) | (s_wdata[15:0] & wmask[15:0]);
          6'h03: timeout   <= (timeout & ~wmask) | (s_wdata & wmask);
          6'h05: drop_cnt   <= '0;
          6'h06: evt_cnt    <= '0;
          6'h07: cnt_bursts <= '0;
          6'h08: tmo_bursts <= '0;
          default: ;
        endcase
      end

      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        unique case (s_araddr[7:2])
          6'h00: s_rdata <= {27'd0, ctrl};
          6'h01: s_rdata <= {16'd0, link_en};
          6'h02: s_rdata <= {16'd0, threshold};
          6'h03: s_rdata <= timeout;
          6'h04: s_rdata <= ddr_fill;
          6'h05: s_rdata <= drop_cnt;
          6'h06: s_rdata <= evt_cnt;
          6'h07: s_rdata <= cnt_bursts;
          6'h08: s_rdata <= tmo_bursts;
          default: s_rdata <= 32'hDEAD_BEEF;
        endcase
      end
    end
  end
endmodule
