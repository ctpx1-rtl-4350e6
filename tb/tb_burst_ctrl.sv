// tb_burst_ctrl: checks the dual-trigger burst buffer.
//  - count trigger: with threshold T, bursts of exactly T events end in TLAST;
//  - latency trigger: fewer than T events are flushed, with TLAST, once the
//    timer passes timeout (checked to the clock);
//  - full-rate input with a ready sink passes without drops or idle clocks;
//  - a stalled sink makes the FIFO overflow and the extra events are dropped;
//  - order and content of all delivered events are kept.
// The two triggers (128 events, 1 ms) are the paper's; the test uses
// smaller settings of the same registers to stay short.
module tb_burst_ctrl;
  import ctpx1_pkg::*;

  localparam int DEPTH = 64;
  logic clk = 0, rst = 1;
  logic in_valid = 0;
  event_t in_evt = '0;
  logic [15:0] threshold = 16'd8;
  logic [31:0] timeout = 32'd50;
  logic m_valid, m_ready = 1, m_last, drop, trig_count, trig_timeout;
  event_t m_data;
  logic [$clog2(DEPTH):0] level;
  int checks = 0, failures = 0;
  event_t q[$];
  int beats_in_pkt = 0, pkts = 0, drops = 0, ncnt = 0, ntmo = 0, busy = 0;
  int pkt_len[$];
  logic [31:0] seq = 0;
  int cyc = 0, last_in_cyc = 0, flush_cyc = -1;

  always #5 clk = ~clk;

  burst_ctrl #(.FIFO_DEPTH(DEPTH)) dut (.clk, .rst, .in_valid, .in_evt, .threshold, .timeout,
    .m_valid, .m_ready, .m_data, .m_last, .drop, .trig_count, .trig_timeout, .level);

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst) begin
    cyc++;
    if (trig_count) ncnt++;
    if (trig_timeout) begin ntmo++; flush_cyc = cyc; end
    if (drop) drops++;
    if (m_valid && m_ready) begin
      busy++;
      checks++;
      if (q.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        automatic event_t e = q.pop_front();
        if (e !== m_data) begin failures++; $display("got %h exp %h", m_data, e); end
      end
      beats_in_pkt++;
      if (m_last) begin pkt_len.push_back(beats_in_pkt); beats_in_pkt = 0; pkts++; end
    end
  end

  task automatic send(input int n, input int rate_pct);
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      in_valid = ($urandom_range(1, 100) <= rate_pct);
      if (!in_valid) begin k--; continue; end
      seq++;
      in_evt = {seq, 48'($urandom)};
      if (level != DEPTH) q.push_back(in_evt);
    end
    @(negedge clk) in_valid = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    // 1. count trigger: 32 events -> four bursts of 8
    send(32, 60);
    repeat (30) @(posedge clk);
    checks++;
    if (pkt_len.size() != 4 || ncnt != 4) begin failures++; $display("count trigger: %0d packets", pkt_len.size()); end
    foreach (pkt_len[i]) begin checks++; if (pkt_len[i] != 8) begin failures++; $display("burst len %0d", pkt_len[i]); end end
    pkt_len.delete();
    // 2. latency trigger: 5 events, flush after timeout
    send(5, 100);
    last_in_cyc = cyc;
    repeat (120) @(posedge clk);
    checks++;
    if (pkt_len.size() != 1 || pkt_len[0] != 5 || ntmo != 1) begin failures++; $display("timeout flush wrong"); end
    // timer starts the clock after the first event is counted as pending and
    // must exceed 50: flush starts 52..56 clocks after the first event
    checks++;
    if (flush_cyc - (last_in_cyc - 4) < 51 || flush_cyc - (last_in_cyc - 4) > 56) begin
      failures++; $display("flush after %0d clocks", flush_cyc - (last_in_cyc - 4));
    end
    pkt_len.delete();
    // 3. full rate, ready sink: no drops, output busy every clock
    threshold = 16;
    busy = 0;
    send(16 * 40, 100);
    repeat (40) @(posedge clk);
    checks++;
    if (drops != 0) begin failures++; $display("drops at full rate: %0d", drops); end
    checks++;
    if (busy != 640) begin failures++; $display("busy %0d", busy); end
    // 4. sink stalled: overflow
    m_ready = 0;
    send(100, 100);
    checks++;
    if (drops != 100 - DEPTH) begin failures++; $display("drops %0d expected %0d", drops, 100 - DEPTH); end
    m_ready = 1;
    // random back-pressure while draining
    fork
      repeat (400) begin @(negedge clk); m_ready = $urandom_range(0, 1); end
      send(200, 50);
    join
    m_ready = 1;
    repeat (200) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d events not delivered", q.size()); end
    $display("count bursts %0d, timeout bursts %0d, drops %0d", ncnt, ntmo, drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
