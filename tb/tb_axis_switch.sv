// tb_axis_switch: checks the 2x2 output switch.
// Both sources offer packets continuously; src and dest change at random
// times. Each beat delivered must come from the source and reach the
// destination that were selected when its packet began, packets must not be
// cut, the unselected source must be held, and every route must be used.
// The two outputs (Aurora and UDP) follow the paper; switching only
// between packets is this design's rule.
module tb_axis_switch;
  import ctpx1_pkg::*;

  logic clk = 0, rst = 1, src = 0, dest = 0;
  logic s0_valid = 0, s0_ready, s1_valid = 0, s1_ready;
  logic m0_valid, m0_ready = 1, m1_valid, m1_ready = 1;
  beat_t s0_beat = '0, s1_beat = '0, m0_beat, m1_beat;
  int checks = 0, failures = 0;
  int routes[4];
  int pkt_route = -1;
  int sent[2];

  always #1 clk = ~clk;

  axis_switch dut (.clk, .rst, .src, .dest, .s0_valid, .s0_ready, .s0_beat, .s1_valid, .s1_ready, .s1_beat,
                   .m0_valid, .m0_ready, .m0_beat, .m1_valid, .m1_ready, .m1_beat);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // source i sends beats numbered 0,1,2..; data[31:0] = number, data[32] = i,
  // packets of 5 beats.
  function automatic beat_t mk(input int i, input int n);
    beat_t b = '0;
    b.data[31:0] = n;
    b.data[32] = 1'(i);
    b.keep = '1;
    b.last = (n % 5) == 4;
    return b;
  endfunction

  int exp_n[2];
  always @(posedge clk) if (!rst) begin
    checks++;
    if (m0_valid && m1_valid) begin failures++; $display("both outputs valid"); end
    for (int d = 0; d < 2; d++) begin
      automatic logic v = d ? m1_valid : m0_valid;
      automatic logic r = d ? m1_ready : m0_ready;
      automatic beat_t b = d ? m1_beat : m0_beat;
      if (v && r) begin
        automatic int s = int'(b.data[32]);
        automatic int route = s * 2 + d;
        checks++;
        if (int'(b.data[31:0]) != exp_n[s]) begin failures++; $display("source %0d beat %0d expected %0d", s, b.data[31:0], exp_n[s]); end
        exp_n[s]++;
        if (pkt_route >= 0 && route != pkt_route) begin failures++; $display("packet cut"); end
        pkt_route = b.last ? -1 : route;
        routes[route]++;
      end
    end
    if (s0_valid && s0_ready) begin sent[0]++; end
    if (s1_valid && s1_ready) begin sent[1]++; end
  end

  always @(posedge clk) if (!rst) begin
    if (s0_valid && s0_ready) s0_beat <= mk(0, sent[0] + 1);
    if (s1_valid && s1_ready) s1_beat <= mk(1, sent[1] + 1);
  end

  always @(negedge clk) if (!rst) begin
    m0_ready = $urandom_range(0, 3) != 0;
    m1_ready = $urandom_range(0, 3) != 0;
    if ($urandom_range(0, 15) == 0) src = ~src;
    if ($urandom_range(0, 15) == 0) dest = ~dest;
  end

  initial begin
    exp_n[0] = 0; exp_n[1] = 0; sent[0] = 0; sent[1] = 0;
    for (int i = 0; i < 4; i++) routes[i] = 0;
    s0_beat = mk(0, 0); s1_beat = mk(1, 0);
    repeat (3) @(posedge clk);
    @(negedge clk) begin rst = 0; s0_valid = 1; s1_valid = 1; end
    repeat (3000) @(posedge clk);
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (routes[i] == 0) begin failures++; $display("route %0d never used", i); end
    end
    $display("routes %0d %0d %0d %0d", routes[0], routes[1], routes[2], routes[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
