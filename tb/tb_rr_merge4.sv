// tb_rr_merge4: checks the 4:1 clock-boosted merge.
// Four links each send up to one event per 80 MHz clock into the merger,
// whose output runs at four times that rate. Every event of an enabled link
// must come out once, in its link's order, with the right source number;
// events of a masked link must not appear; with all four links at full rate
// nothing may be dropped and the output must be busy on (nearly) every clock.
// The 80 to 320 MHz clock ratio is the paper's; the FIFO depth and
// round-robin order are this design's.
module tb_rr_merge4;
  import ctpx1_pkg::*;

  logic lclk = 0, aclk = 0, lrst = 1, arst = 1;
  logic [3:0] in_valid = '0, link_en = 4'hF, cdc_drop;
  event_t [3:0] in_evt;
  logic out_valid;
  event_t out_evt;
  logic [1:0] out_src;
  int checks = 0, failures = 0;
  event_t q[4][$];
  int drops = 0, busy = 0;
  logic [31:0] seq[4];
  bit measure = 0;

  always #4 lclk = ~lclk;
  always #1 aclk = ~aclk;

  rr_merge4 dut (.lclk, .lrst, .in_valid, .in_evt, .link_en, .cdc_drop,
                 .aclk, .arst, .out_valid, .out_evt, .out_src);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge aclk) if (!arst) begin
    if (measure && out_valid) busy++;
    if (out_valid) begin
      checks++;
      if (q[out_src].size() == 0) begin failures++; $display("unexpected event from %0d", out_src); end
      else begin
        automatic event_t e = q[out_src].pop_front();
        if (e !== out_evt) begin failures++; $display("src %0d got %h exp %h", out_src, out_evt, e); end
      end
    end
  end
  always @(posedge lclk) if (!lrst) drops += $countones(cdc_drop);

  task automatic run(input int cycles, input int rate_pct, input logic [3:0] en);
    for (int n = 0; n < cycles; n++) begin
      @(negedge lclk);
      for (int i = 0; i < 4; i++) begin
        in_valid[i] = ($urandom_range(1, 100) <= rate_pct);
        seq[i]++;
        in_evt[i] = {8'(i), seq[i], 40'($urandom)};
        if (in_valid[i] && en[i]) q[i].push_back(in_evt[i]);
      end
    end
    @(negedge lclk) in_valid = '0;
    repeat (20) @(posedge lclk);
  endtask

  initial begin
    for (int i = 0; i < 4; i++) seq[i] = 0;
    repeat (4) @(posedge lclk);
    lrst = 0; arst = 0;
    repeat (4) @(posedge lclk);
    run(500, 40, 4'hF);
    // full rate on all four links: no loss, output saturated
    fork
      run(1000, 100, 4'hF);
      begin repeat (100) @(posedge lclk); measure = 1; repeat (800) @(posedge lclk); measure = 0; end
    join
    checks++;
    if (busy < 4 * 800 - 8) begin failures++; $display("output busy %0d of %0d clocks", busy, 3200); end
    // mask links 1 and 3
    link_en = 4'b0101;
    repeat (4) @(posedge lclk);
    run(500, 70, 4'b0101);
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (q[i].size() != 0) begin failures++; $display("link %0d: %0d events missing", i, q[i].size()); end
    end
    checks++;
    if (drops != 0) begin failures++; $display("%0d CDC drops", drops); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
