// tb_ctpx1_top: end-to-end test of the CTPX1 data path, at reduced buffer sizes
// (MCRRM buffer 128 events, DDR ring of 64 words) so that the ring fills.
//
// Sixteen reference GWT links send scrambled events mixed with idle blocks;
// each event carries its link number and a sequence number, and a ToA taken
// from the reference time. Both output links and the DDR path are watched.
// Every event delivered must match the next expected event of its link
// ({ToA[31:16], raw word}); events lost to a full MCRRM buffer may be
// skipped, and the number skipped must equal the register count of drops.
// The test walks through: Streaming Mode to Aurora with the count trigger and
// the latency trigger, a masked link and a switch of destination to UDP, an
// overflow with the outputs stalled, Buffered Mode into DDR (filling the ring
// where it is small enough) and read-out, sync-header errors, a
// slow-control exchange, and a lossless full-rate run: all sixteen links
// send an event on every link clock (1.28 G events/s at 80 MHz) for many
// times the MCRRM buffer depth while the outputs accept data, and no event
// may be dropped, which shows the merge keeps up with the full link rate.
// Each mechanism is counted and must happen.
// The block structure follows the paper; the buffer and ring sizes
// here are reduced test settings, not the paper's.
module tb_ctpx1_top;
  import ctpx1_pkg::*;
  import tb_gwt_pkg::*;

  localparam int THR  = 16;
  localparam int TMO1 = 2000;     // latency trigger used for the first flush
  localparam int TMO  = 2000;      // latency trigger used afterwards
  localparam int NBURST = 1500; // link clocks of traffic per phase

  logic lclk = 0, aclk = 0, lrst = 1, arst = 1;
  logic [N_LINKS-1:0] gwt_valid = '0, gwt_hdr_err, gwt_cdc_drop;
  logic [N_LINKS-1:0][BLK_W-1:0] gwt_blk = '0;
  logic [7:0] awaddr = 0, araddr = 0;
  logic awvalid = 0, awready, wvalid = 0, wready, bvalid, arvalid = 0, arready, rvalid;
  logic [31:0] wdata = 0, rdata;
  logic [1:0] bresp, rresp;
  logic s_sc_valid = 0, s_sc_ready, m_sc_valid;
  logic [7:0] s_sc_data = 0, m_sc_data;
  logic sc_clk, sc_cs_n, sc_dout;
  logic mem_wvalid, mem_wready, mem_arvalid, mem_arready, mem_rvalid;
  logic [6-1:0] mem_waddr, mem_araddr;
  logic [BUS_W-1:0] mem_wdata, mem_rdata;
  logic aurora_valid, aurora_ready = 1, udp_valid, udp_ready = 1;
  beat_t aurora_beat, udp_beat;

  int checks = 0, failures = 0;
  event_t q[N_LINKS][$];
  logic [57:0] st[N_LINKS];
  logic [19:0] seq[N_LINKS];
  int skipped = 0, n_aurora = 0, n_udp = 0, n_hdr = 0, n_masked_seen = 0;
  int n_ddr_full = 0, n_ddr_w = 0, n_ddr_r = 0, n_cdc = 0, n_evt = 0;
  logic [N_LINKS-1:0] masked = '0;
  bit rand_ready = 0;

  always #4 lclk = ~lclk;
  always #1 aclk = ~aclk;

  ctpx1_top #(.FIFO_DEPTH(128), .DDR_ADDR_W(6), .RD_PKT_WORDS(8), .SC_DIV(2)) dut (
    .lclk, .lrst, .gwt_valid, .gwt_blk, .gwt_hdr_err, .gwt_cdc_drop, .aclk, .arst,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready), .s_axil_wdata(wdata),
    .s_axil_wstrb(4'hF), .s_axil_wvalid(wvalid), .s_axil_wready(wready), .s_axil_bresp(bresp),
    .s_axil_bvalid(bvalid), .s_axil_bready(1'b1), .s_axil_araddr(araddr), .s_axil_arvalid(arvalid),
    .s_axil_arready(arready), .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid),
    .s_axil_rready(1'b1), .s_sc_valid, .s_sc_ready, .s_sc_data, .m_sc_valid, .m_sc_ready(1'b1), .m_sc_data,
    .tpx_sc_clk(sc_clk), .tpx_sc_cs_n(sc_cs_n), .tpx_sc_dout(sc_dout), .tpx_sc_din(sc_dout),
    .mem_wvalid, .mem_wready, .mem_waddr, .mem_wdata, .mem_arvalid, .mem_arready, .mem_araddr,
    .mem_rvalid, .mem_rdata, .aurora_valid, .aurora_ready, .aurora_beat, .udp_valid, .udp_ready, .udp_beat);

  ddr_mem_model #(.ADDR_W(6), .LATENCY(10)) u_mem (.clk(aclk), .rst(arst),
    .wvalid(mem_wvalid), .wready(mem_wready), .waddr(mem_waddr), .wdata(mem_wdata),
    .arvalid(mem_arvalid), .arready(mem_arready), .araddr(mem_araddr), .rvalid(mem_rvalid), .rdata(mem_rdata));

  initial begin
    #(50000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- output scoreboard ----
  task automatic take_event(input event_t ev);
    automatic int l = int'(ev[63:60]);
    automatic int idx = -1;
    checks++;
    if (masked[l]) n_masked_seen++;
    foreach (q[l][i]) if (idx < 0 && q[l][i] === ev) idx = i;
    if (idx < 0) begin
      failures++;
      if (failures < 10) $display("event %h of link %0d not expected", ev, l);
    end else begin
      skipped += idx;
      n_evt++;
      for (int i = 0; i <= idx; i++) void'(q[l].pop_front());
    end
  endtask

  task automatic take_beat(input beat_t b);
    for (int s = 0; s < SLOTS; s++)
      if (b.keep[s]) begin
        take_event(b.data[s*SLOT_W +: EVT_W]);
      end
  endtask

  always @(posedge aclk) if (!arst) begin
    if (aurora_valid && aurora_ready) begin n_aurora++; take_beat(aurora_beat); end
    if (udp_valid && udp_ready) begin n_udp++; take_beat(udp_beat); end
    if (dut.ddr_full) n_ddr_full++;
    if (mem_wvalid && mem_wready) n_ddr_w++;
    if (mem_rvalid) n_ddr_r++;
  end
  always @(negedge aclk) if (rand_ready) begin
    aurora_ready = $urandom_range(0, 3) != 0;
    udp_ready    = $urandom_range(0, 3) != 0;
  end
  always @(posedge lclk) if (!lrst) begin
    n_hdr += $countones(gwt_hdr_err);
    n_cdc += $countones(gwt_cdc_drop);
  end

  // ---- AXI4-Lite master ----
  task automatic reg_wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge aclk);
    awaddr = a; wdata = d; awvalid = 1; wvalid = 1;
    @(posedge aclk);
    while (!awready) @(posedge aclk);
    @(negedge aclk) begin awvalid = 0; wvalid = 0; end
  endtask

  task automatic reg_rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge aclk);
    araddr = a; arvalid = 1;
    @(posedge aclk);
    while (!arready) @(posedge aclk);
    @(negedge aclk) arvalid = 0;
    while (!rvalid) @(negedge aclk);
    d = rdata;
  endtask

  // ---- link sources ----
  task automatic links(input int cycles, input int rate_pct, input bit bad_hdr = 0);
    for (int n = 0; n < cycles; n++) begin
      @(negedge lclk);
      for (int i = 0; i < N_LINKS; i++) begin
        automatic logic [31:0] t = dut.toa_ref - 32'($urandom_range(0, 30));
        automatic logic [63:0] r;
        if (bad_hdr && n == 3 && i < 3) begin
          gwt_blk[i] = scramble({$urandom, $urandom}, 2'b11, st[i]);
        end else if ($urandom_range(1, 100) <= rate_pct) begin
          seq[i]++;
          r = make_raw(t[15:0], {4'(i), seq[i], 20'($urandom)});
          gwt_blk[i] = scramble(r, SH_DATA, st[i]);
          if (!masked[i]) q[i].push_back({t[31:16], r});
        end else begin
          gwt_blk[i] = scramble({$urandom, $urandom}, SH_CTRL, st[i]);
        end
        gwt_valid[i] = 1'b1;
      end
    end
  endtask

  function automatic int pending();
    int n = 0;
    for (int i = 0; i < N_LINKS; i++) n += q[i].size();
    return n;
  endfunction

  task automatic settle();
    skipped += pending();
    for (int i = 0; i < N_LINKS; i++) q[i].delete();
  endtask

  // wait for the latency trigger to flush what is left
  task automatic drain(input int tmo);
    links(tmo / 4 + 400, 0);
  endtask

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [31:0] v, cnt_bursts, tmo_bursts, drops, f_drops;
  int f_evt0, f_skip0, f_events;

  initial begin
    for (int i = 0; i < N_LINKS; i++) begin st[i] = '0; seq[i] = '0; end
    repeat (4) @(posedge lclk);
    lrst = 0; arst = 0;
    links(4, 0);
    reg_wr(8'h08, THR);
    reg_wr(8'h0C, TMO1);

    // A. Streaming Mode to Aurora: count trigger, then latency trigger
    links(NBURST, 60);
    drain(TMO1);
    check(pending() == 0, "A: all events delivered to Aurora");
    reg_rd(8'h1C, cnt_bursts);
    reg_rd(8'h20, tmo_bursts);
    check(cnt_bursts > 0, "A: count trigger used");
    check(tmo_bursts > 0, "A: latency trigger used");
    check(n_aurora > 0 && n_udp == 0, "A: traffic on Aurora only");
    reg_wr(8'h0C, TMO);

    // B. mask link 5, destination UDP, random back-pressure
    masked = 16'h0020;
    reg_wr(8'h04, ~32'h0020);
    reg_wr(8'h00, 32'h2);
    links(4, 0);
    rand_ready = 1;
    links(NBURST, 70);
    drain(TMO);
    rand_ready = 0; aurora_ready = 1; udp_ready = 1;
    drain(TMO);
    check(pending() == 0, "B: all events delivered to UDP");
    check(n_udp > 0, "B: traffic on UDP");
    check(n_masked_seen == 0, "B: masked link silent");
    masked = '0;
    reg_wr(8'h04, 32'hFFFF);
    links(4, 0);

    // C. overflow: outputs stalled, all links at full rate
    udp_ready = 0;
    links(600, 100);
    udp_ready = 1;
    drain(TMO);
    drain(TMO);
    reg_rd(8'h14, drops);
    check(drops > 0, "C: overflow drops happened");
    // dropped events at the tail of a link are never skipped over: count them
    check(int'(drops) == skipped + pending(),
          $sformatf("C: drops %0d match missing events %0d", drops, skipped + pending()));
    settle();

    // D. Buffered Mode: capture into DDR, then read out to Aurora
    reg_wr(8'h00, 32'h1);              // buffered, read-out off, dest Aurora
    links(4, 0);
    links(600, 90);
    drain(TMO);
    check(n_ddr_w > 0, "D: words written to DDR");
    check(n_ddr_full > 0, "D: DDR ring filled and held the writer off");
    reg_wr(8'h00, 32'h5);              // read-out on
    drain(TMO);
    drain(TMO);
    reg_rd(8'h10, v);
    check(v == 0, "D: DDR ring empty after read-out");
    check(n_ddr_r > 0, "D: words read from DDR");
    reg_rd(8'h14, drops);
    check(int'(drops) == skipped + pending(),
          $sformatf("D: drops %0d match missing events %0d", drops, skipped + pending()));
    settle();

    // E. header errors and slow control
    reg_wr(8'h00, 32'h0);
    links(8, 50, 1);
    drain(TMO);
    check(n_hdr == 3, $sformatf("E: %0d header errors seen, 3 sent", n_hdr));
    check(pending() == 0, "E: events around header errors delivered");
    for (int k = 0; k < 3; k++) begin
      @(negedge aclk) begin s_sc_data = 8'hA0 + 8'(k); s_sc_valid = 1; end
      @(posedge aclk); while (!s_sc_ready) @(posedge aclk);
      @(negedge aclk) s_sc_valid = 0;
      while (!m_sc_valid) @(posedge aclk);
      check(m_sc_data == 8'hA0 + 8'(k), "E: slow-control loop-back byte");
      @(posedge aclk);
    end

    // F. full-rate throughput into Streaming Mode, outputs always ready
    reg_wr(8'h14, 32'h0);              // clear the drop counter
    links(4, 0);
    n_cdc = 0; f_evt0 = n_evt; f_skip0 = skipped;
    links(1500, 100);
    drain(TMO);
    f_events = n_evt - f_evt0;
    reg_rd(8'h14, f_drops);
    check(f_drops == 0, $sformatf("F: %0d events dropped at full link rate", f_drops));
    check(n_cdc == 0, "F: no clock-crossing FIFO overflow");
    check(pending() == 0 && skipped == f_skip0, "F: every full-rate event delivered in order");
    check(f_events == N_LINKS * 1500, $sformatf("F: %0d events delivered, %0d sent", f_events, N_LINKS * 1500));
    $display("mechanisms: count bursts %0d, timeout bursts %0d, drops %0d, aurora beats %0d, udp beats %0d, ddr writes %0d, ddr reads %0d, ddr full clocks %0d, header errors %0d, lossless full-rate events %0d",
             cnt_bursts, tmo_bursts, drops, n_aurora, n_udp, n_ddr_w, n_ddr_r, n_ddr_full, n_hdr, f_events);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
