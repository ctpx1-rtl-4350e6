// tb_mode_mux: checks the Streaming/Buffered select.
// Packets of random length are sent while mode is toggled at random clocks.
// Every beat must reach exactly one output, with back-pressure honoured, and
// all beats of a packet must take the same path: the path given by mode at
// the packet's first beat.
// The two modes are the paper's; changing mode only between packets is
// this design's rule.
module tb_mode_mux;
  import ctpx1_pkg::*;

  logic clk = 0, rst = 1, mode = 0;
  logic s_valid = 0, s_ready, d_valid, d_ready = 1, b_valid, b_ready = 1, cur_mode;
  beat_t s_beat = '0, d_beat, b_beat;
  int checks = 0, failures = 0;
  beat_t dq[$], bq[$];
  int nd = 0, nb = 0;

  always #1 clk = ~clk;

  mode_mux dut (.clk, .rst, .mode, .s_valid, .s_ready, .s_beat, .d_valid, .d_ready, .d_beat,
                .b_valid, .b_ready, .b_beat, .cur_mode);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst) begin
    checks++;
    if (d_valid && b_valid) begin failures++; $display("both outputs valid"); end
    if (d_valid && d_ready) begin
      nd++; checks++;
      if (dq.size() == 0 || dq.pop_front() !== d_beat) begin failures++; $display("wrong beat on streaming path"); end
    end
    if (b_valid && b_ready) begin
      nb++; checks++;
      if (bq.size() == 0 || bq.pop_front() !== b_beat) begin failures++; $display("wrong beat on buffered path"); end
    end
  end

  always @(negedge clk) begin
    d_ready = $urandom_range(0, 3) != 0;
    b_ready = $urandom_range(0, 3) != 0;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int p = 0; p < 300; p++) begin
      automatic int len = $urandom_range(1, 8);
      automatic bit pm;
      for (int k = 0; k < len; k++) begin
        @(negedge clk);
        if ($urandom_range(0, 3) == 0) mode = ~mode;
        s_beat = '{data: {16{$urandom}}, keep: '1, last: (k == len - 1)};
        s_valid = 1;
        if (k == 0) pm = mode;
        if (pm) bq.push_back(s_beat); else dq.push_back(s_beat);
        @(posedge clk);
        while (!s_ready) @(posedge clk);
      end
    end
    @(negedge clk) s_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (dq.size() != 0 || bq.size() != 0 || nd == 0 || nb == 0) begin
      failures++; $display("left %0d/%0d, streaming %0d buffered %0d", dq.size(), bq.size(), nd, nb);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
