// tb_tpx4_slow_control: checks the slow-control bridge.
// A serial model of the chip samples sc_dout on each rising sc_clk edge
// while sc_cs_n is low and drives the next reply bit (MSB first) after each
// falling edge. Bytes sent from the PS side must arrive at the chip in order,
// each reply byte must come back on m_*, and a byte must last 16 x DIV
// clocks (8 serial clocks of 2 x DIV system clocks each).
// The serial protocol is this design's stand-in; the paper does not
// describe the chip's slow-control interface.
module tb_tpx4_slow_control;
  localparam int DIV = 4;
  logic clk = 0, rst = 1;
  logic s_valid = 0, s_ready, m_valid, m_ready = 1;
  logic [7:0] s_data = 0, m_data;
  logic sc_clk, sc_cs_n, sc_dout, sc_din;
  int checks = 0, failures = 0;
  logic [7:0] sent[$], replies[$], rx_chip = 0, tx_chip = 0;
  int nbit = 0, first_fall = -1, cyc = 0, last_done = 0;
  int byte_cycles[$];

  always #1 clk = ~clk;
  always @(posedge clk) cyc++;

  tpx4_slow_control #(.DIV(DIV), .FIFO_DEPTH(4)) dut (.clk, .rst, .s_valid, .s_ready, .s_data,
    .m_valid, .m_ready, .m_data, .sc_clk, .sc_cs_n, .sc_dout, .sc_din);

  // chip model
  assign sc_din = tx_chip[7];
  always @(posedge sc_clk) if (!sc_cs_n) begin
    rx_chip = {rx_chip[6:0], sc_dout};
    nbit++;
    if (nbit == 8) begin
      checks++;
      if (sent.size() == 0 || sent.pop_front() !== rx_chip) begin failures++; $display("chip got %h", rx_chip); end
      nbit = 0;
    end
  end
  always @(negedge sc_clk) if (!sc_cs_n) begin
    if (nbit == 0) begin
      tx_chip = ~rx_chip + 8'd3;      // next reply
      replies.push_back(tx_chip);
    end else tx_chip = {tx_chip[6:0], 1'b0};
  end

  always @(posedge clk) if (!rst && m_valid && m_ready) begin
    checks++;
    if (replies.size() == 0 || replies.pop_front() !== m_data) begin failures++; $display("reply %h wrong", m_data); end
    byte_cycles.push_back(cyc - last_done);
    last_done = cyc;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    // first reply is what the chip shifts before it has received anything
    tx_chip = 8'h5A;
    replies.push_back(8'h5A);
    last_done = cyc;
    for (int i = 0; i < 40; i++) begin
      @(negedge clk);
      s_data = $urandom;
      s_valid = 1;
      @(posedge clk);
      while (!s_ready) @(posedge clk);
      sent.push_back(s_data);
      @(negedge clk) s_valid = 0;
      if ($urandom_range(0, 1)) m_ready = 0;
      repeat ($urandom_range(0, 3)) @(negedge clk);
      m_ready = 1;
    end
    wait (sent.size() == 0);
    repeat (100) @(posedge clk);
    checks++;
    if (replies.size() > 1) begin failures++; $display("%0d replies missing", replies.size()); end
    // back-to-back bytes: 16*DIV clocks plus 2 clocks of turn-around
    checks++;
    if (byte_cycles.size() < 10 || byte_cycles[5] < 16 * DIV || byte_cycles[5] > 16 * DIV + 4) begin
      failures++; $display("byte took %0d clocks", byte_cycles.size() > 5 ? byte_cycles[5] : -1);
    end
    $display("byte time %0d clocks", byte_cycles[5]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
