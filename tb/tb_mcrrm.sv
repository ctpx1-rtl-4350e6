// tb_mcrrm: end-to-end test of one Multi-Channel Round-Robin Merger.
// Four reference GWT links send scrambled data blocks mixed with idle blocks.
// Each event carries its link number and a sequence number in its tag and the
// low 16 bits of its true time T as ToA. At the output every event must
// appear once, in its link's order, as {T[31:16], raw word}. Packets must be
// threshold events long (count trigger) except for timeout flushes, and the
// tail of the run must be flushed by the latency trigger. A masked link must
// contribute nothing.
// The MCRRM structure follows the paper; the test shortens the trigger
// settings.
module tb_mcrrm;
  import ctpx1_pkg::*;
  import tb_gwt_pkg::*;

  logic lclk = 0, aclk = 0, lrst = 1, arst = 1;
  logic [3:0] blk_valid = '0, link_en = 4'hF, hdr_err, cdc_drop;
  logic [3:0][65:0] blk;
  logic [31:0] toa_ref;
  logic [15:0] threshold = 16'd16;
  logic [31:0] timeout = 32'd400;
  logic m_valid, m_ready = 1, m_last, evt_in, drop, trig_count, trig_timeout;
  event_t m_data;
  int checks = 0, failures = 0;
  event_t q[4][$];
  logic [57:0] st[4];
  int ncnt = 0, ntmo = 0, beats = 0, errs = 0;
  logic [19:0] seq[4];

  always #4 lclk = ~lclk;
  always #1 aclk = ~aclk;

  toa_ref_counter #(.DIV(2)) u_ref (.clk(lclk), .rst(lrst), .clear(1'b0), .count(toa_ref));

  mcrrm #(.TOA_LSB(TOA_LSB), .FIFO_DEPTH(256)) dut (
    .lclk, .lrst, .blk_valid, .blk, .toa_ref, .link_en, .hdr_err, .cdc_drop,
    .aclk, .arst, .threshold, .timeout, .m_valid, .m_ready, .m_data, .m_last,
    .evt_in, .drop, .trig_count, .trig_timeout);

  initial begin
    #4000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge aclk) if (!arst) begin
    if (trig_count) ncnt++;
    if (trig_timeout) ntmo++;
    if (drop) errs++;
    if (m_valid && m_ready) begin
      automatic int l = int'(m_data[63:60]);
      checks++;
      beats++;
      if (l > 3 || q[l].size() == 0) begin failures++; $display("unexpected %h", m_data); end
      else begin
        automatic event_t e = q[l].pop_front();
        if (e !== m_data) begin failures++; $display("link %0d got %h exp %h", l, m_data, e); end
      end
      if (m_last) begin
        checks++;
        if (beats != 16 && !(ntmo > 0)) begin failures++; $display("packet of %0d", beats); end
        beats = 0;
      end
    end
  end

  task automatic run(input int cycles, input int rate_pct, input logic [3:0] en);
    for (int n = 0; n < cycles; n++) begin
      @(negedge lclk);
      for (int i = 0; i < 4; i++) begin
        automatic logic [31:0] t = toa_ref - 32'($urandom_range(0, 20));
        automatic logic [63:0] r;
        seq[i]++;
        r = make_raw(t[15:0], {4'(i), seq[i], 20'($urandom)});
        if ($urandom_range(1, 100) <= rate_pct) begin
          blk[i] = scramble(r, SH_DATA, st[i]);
          if (en[i]) q[i].push_back({t[31:16], r});
        end else begin
          blk[i] = scramble({$urandom, $urandom}, SH_CTRL, st[i]);
        end
        blk_valid[i] = 1'b1;
      end
    end
  endtask

  initial begin
    for (int i = 0; i < 4; i++) begin st[i] = '0; seq[i] = '0; end
    repeat (4) @(posedge lclk);
    lrst = 0; arst = 0;
    // idle blocks first so the descramblers lock
    run(2, 0, 4'hF);
    run(1500, 60, 4'hF);
    link_en = 4'b1011;
    repeat (4) run(1, 0, 4'hF);
    run(1000, 90, 4'b1011);
    run(300, 0, 4'hF);   // quiet: tail flushed by the latency trigger
    repeat (200) @(posedge lclk);
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (q[i].size() != 0) begin failures++; $display("link %0d: %0d missing", i, q[i].size()); end
    end
    checks++;
    if (ncnt == 0 || ntmo == 0) begin failures++; $display("triggers: count %0d timeout %0d", ncnt, ntmo); end
    checks++;
    if (errs != 0 || hdr_err != 0) begin failures++; $display("drops %0d", errs); end
    $display("count bursts %0d, timeout bursts %0d", ncnt, ntmo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
