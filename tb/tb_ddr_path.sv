// tb_ddr_path: checks the Buffered Mode path, w_ddr and r_ddr around a
// behavioural memory (a 16-word ring, ADDR_W = 4, packets of 4 words).
//  1. with read-out off, 20 beats are offered: 16 are stored, then the
//     writer holds off (ring full) and the fill level is 16;
//  2. read-out on: the 16 words come back in order, keep restored from the
//     spare bits, TLAST on every 4th word;
//  3. writes and reads run together with random stalls: order is kept,
//     packets are at most 4 words, the last word carries TLAST;
//  4. clear empties the ring.
// The paper gives only the 8 GB DDR4 and the write and read blocks;
// the ring-buffer behaviour checked here is this design's.
module tb_ddr_path;
  import ctpx1_pkg::*;

  localparam int AW = 4;
  logic clk = 0, rst = 1, clear = 0, enable = 0;
  logic s_valid = 0, s_ready, full;
  beat_t s_beat = '0;
  logic mem_wvalid, mem_wready, mem_arvalid, mem_arready, mem_rvalid;
  logic [AW-1:0] mem_waddr, mem_araddr;
  logic [511:0] mem_wdata, mem_rdata;
  logic [AW:0] wr_ptr, rd_ptr;
  logic m_valid, m_ready = 1;
  beat_t m_beat;
  int checks = 0, failures = 0;
  beat_t q[$];
  int plen = 0, maxplen = 0, nlast = 0, nout = 0;
  bit strict4 = 0;

  always #1 clk = ~clk;

  w_ddr #(.ADDR_W(AW)) u_w (.clk, .rst, .clear, .s_valid, .s_ready, .s_beat, .mem_wvalid, .mem_wready,
    .mem_waddr, .mem_wdata, .rd_ptr, .wr_ptr, .full);
  r_ddr #(.ADDR_W(AW), .PKT_WORDS(4), .OBUF(8)) u_r (.clk, .rst, .clear, .enable, .wr_ptr, .rd_ptr,
    .mem_arvalid, .mem_arready, .mem_araddr, .mem_rvalid, .mem_rdata, .m_valid, .m_ready, .m_beat);
  ddr_mem_model #(.ADDR_W(AW), .LATENCY(5), .STALL_PCT(20)) u_mem (.clk, .rst, .wvalid(mem_wvalid),
    .wready(mem_wready), .waddr(mem_waddr), .wdata(mem_wdata), .arvalid(mem_arvalid), .arready(mem_arready),
    .araddr(mem_araddr), .rvalid(mem_rvalid), .rdata(mem_rdata));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic beat_t mk(input int n);
    beat_t b = '0;
    automatic int k = $urandom_range(1, SLOTS);
    for (int s = 0; s < k; s++) begin
      b.data[s*80 +: 80] = {16'(n), 16'(s), 48'({$urandom, $urandom})};
      b.keep[s] = 1'b1;
    end
    return b;
  endfunction

  always @(posedge clk) if (!rst && m_valid && m_ready) begin
    checks++;
    nout++;
    plen++;
    if (q.size() == 0) begin failures++; $display("unexpected read word"); end
    else begin
      automatic beat_t e = q.pop_front();
      if (e.data !== m_beat.data || e.keep !== m_beat.keep) begin failures++; $display("word %0d wrong", nout); end
    end
    if (m_beat.last) begin
      nlast++;
      if (strict4) begin checks++; if (plen != 4) begin failures++; $display("packet %0d words", plen); end end
      if (plen > maxplen) maxplen = plen;
      plen = 0;
    end
  end

  task automatic write_beats(input int n, input bit expect_all);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      s_beat = mk(i);
      s_valid = 1;
      @(posedge clk);
      if (!expect_all) begin
        if (!s_ready) begin @(negedge clk) s_valid = 0; return; end
      end else
        while (!s_ready) @(posedge clk);
      q.push_back(s_beat);
    end
    @(negedge clk) s_valid = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    // 1. fill the ring: at most 16 accepted
    for (int i = 0; i < 20; i++) begin
      @(negedge clk);
      s_beat = mk(i);
      s_valid = 1;
      @(posedge clk);
      while (!s_ready && !full) @(posedge clk);
      if (full) break;
      q.push_back(s_beat);
    end
    @(negedge clk) s_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (q.size() != 16 || !full || (wr_ptr - rd_ptr) != 16) begin
      failures++; $display("fill: %0d stored, full %0b", q.size(), full);
    end
    // 2. read back
    strict4 = 1;
    enable = 1;
    repeat (200) @(posedge clk);
    checks++;
    if (q.size() != 0 || nlast != 4) begin failures++; $display("read back: %0d left, %0d packets", q.size(), nlast); end
    strict4 = 0;
    // 3. concurrent, with back-pressure
    fork
      write_beats(300, 1);
      repeat (900) begin @(negedge clk); m_ready = $urandom_range(0, 2) != 0; end
    join
    m_ready = 1;
    repeat (100) @(posedge clk);
    checks++;
    if (q.size() != 0 || maxplen > 4 || plen != 0) begin
      failures++; $display("concurrent: %0d left, max packet %0d, open packet %0d", q.size(), maxplen, plen);
    end
    // 4. clear
    enable = 0;
    write_beats(5, 1);
    repeat (5) @(posedge clk);
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    checks++;
    if (wr_ptr != 0 || rd_ptr != 0) begin failures++; $display("clear failed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
