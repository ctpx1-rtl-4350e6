// tb_axis_interconnect: checks the second merge stage.
// Four AXI-Stream sources send packets of 80-bit events (random lengths,
// then full-rate 16-event packets). The 512-bit output is unpacked slot by
// slot: each event must appear once, in its source's order, in a slot marked
// by keep; a packet must hold events of one source only
// and end (TLAST) exactly where the source packet ended. With all four
// sources at full rate the output must carry about 4 of every 6 clocks
// (one beat per six events, four events per clock in).
// The 80-bit input and 512-bit output widths are the paper's; the
// six-slot packing it checks is this design's.
module tb_axis_interconnect;
  import ctpx1_pkg::*;

  logic clk = 0, rst = 1;
  logic [3:0] s_valid = '0, s_ready, s_last = '0;
  event_t [3:0] s_data;
  logic m_valid, m_ready = 1;
  beat_t m_beat;
  int checks = 0, failures = 0;
  event_t q[4][$];
  bit     lastq[4][$];
  int cur_src = -1, busy = 0;
  bit measure = 0;
  int plen = 0;

  always #1 clk = ~clk;

  axis_interconnect #(.PKT_FIFO_DEPTH(16)) dut (.clk, .rst, .s_valid, .s_ready, .s_data, .s_last,
    .m_valid, .m_ready, .m_beat);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst && m_valid && m_ready) begin
    automatic int nslot = 0;
    if (measure) busy++;
    for (int s = 0; s < SLOTS; s++) begin
      automatic logic [79:0] sl = m_beat.data[s*80 +: 80];
      if (m_beat.keep[s]) begin
        automatic int src = int'(sl[79:78]);
        checks++;
        nslot++;
        if (cur_src >= 0 && src != cur_src) begin failures++; $display("packets interleaved"); end
        cur_src = src;
        if (q[src].size() == 0) begin failures++; $display("unexpected event"); end
        else begin
          automatic event_t e = q[src].pop_front();
          automatic bit l = lastq[src].pop_front();
          if (e !== sl) begin failures++; $display("src %0d got %h exp %h", src, sl, e); end
          // TLAST must come with the last event of the source packet
          checks++;
          if (l != (m_beat.last && (s == SLOTS-1 || !m_beat.keep[s+1]))) begin
            failures++; $display("TLAST misplaced src %0d", src);
          end
        end
      end else if (sl != '0) begin
        failures++; $display("empty slot not zero");
      end
    end
    checks++;
    if (m_beat.data[511:480] != 0) begin failures++; $display("spare bits not zero"); end
    checks++;
    if (nslot == 0) begin failures++; $display("beat without events"); end
    if (m_beat.last) cur_src = -1;
  end

  task automatic source(input int i, input int npkts, input int fixed_len, input int rate_pct);
    logic [31:0] seq = 0;
    for (int p = 0; p < npkts; p++) begin
      automatic int len = fixed_len > 0 ? fixed_len : $urandom_range(1, 40);
      for (int k = 0; k < len; k++) begin
        @(negedge clk);
        while ($urandom_range(1, 100) > rate_pct) begin s_valid[i] = 0; @(negedge clk); end
        seq++;
        s_data[i] = {2'(i), 6'd0, seq, 40'($urandom)};
        s_last[i] = (k == len - 1);
        s_valid[i] = 1;
        q[i].push_back(s_data[i]);
        lastq[i].push_back(s_last[i]);
        @(posedge clk);
        while (!s_ready[i]) @(posedge clk);
      end
      @(negedge clk) s_valid[i] = 0;
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    fork
      source(0, 30, 0, 70); source(1, 30, 0, 50); source(2, 30, 0, 90); source(3, 30, 0, 30);
    join
    // random back-pressure
    fork
      source(0, 10, 0, 100); source(1, 10, 0, 100);
      repeat (600) begin @(negedge clk); m_ready = $urandom_range(0, 1); end
    join
    m_ready = 1;
    repeat (50) @(posedge clk);
    // full rate: 4 x 40 packets of 16 events, one event per clock each
    fork
      source(0, 40, 16, 100); source(1, 40, 16, 100); source(2, 40, 16, 100); source(3, 40, 16, 100);
      begin repeat (60) @(posedge clk); measure = 1; repeat (500) @(posedge clk); measure = 0; end
    join
    repeat (100) @(posedge clk);
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (q[i].size() != 0) begin failures++; $display("src %0d: %0d missing", i, q[i].size()); end
    end
    checks++;
    if (busy < 300) begin failures++; $display("output busy %0d of 500 clocks", busy); end
    $display("busy %0d of 500", busy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
