// tb_pl_registers: checks the AXI4-Lite register file.
// Reset values (LINK_EN = 0xFFFF, THRESHOLD = 128, TIMEOUT = 320000), write
// and read-back with byte strobes, the configuration outputs, the status
// counters (counting several events per clock) and clear-on-write, then a
// random run: random writes with random byte strobes to the four
// configuration registers, random event bursts and random counter clears,
// all compared with a model of the register map after every step.
// The reset values 128 and 1 ms come from the paper; the register map
// is this design's.
module tb_pl_registers;
  import ctpx1_pkg::*;

  logic clk = 0, rst = 1;
  logic [7:0] awaddr = 0, araddr = 0;
  logic awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 1, arvalid = 0, arready, rvalid, rready = 1;
  logic [31:0] wdata = 0, rdata;
  logic [3:0] wstrb = 4'hF;
  logic [1:0] bresp, rresp;
  logic mode, dest, ddr_rd_en, ddr_clear, toa_clear;
  logic [15:0] link_en, threshold;
  logic [31:0] timeout;
  logic [31:0] ddr_fill = 32'h1234;
  logic [3:0] ev_drop = 0, ev_in = 0, ev_tc = 0, ev_tt = 0;
  int checks = 0, failures = 0;

  always #1 clk = ~clk;

  pl_registers dut (.clk, .rst, .s_awaddr(awaddr), .s_awvalid(awvalid), .s_awready(awready),
    .s_wdata(wdata), .s_wstrb(wstrb), .s_wvalid(wvalid), .s_wready(wready), .s_bresp(bresp),
    .s_bvalid(bvalid), .s_bready(bready), .s_araddr(araddr), .s_arvalid(arvalid), .s_arready(arready),
    .s_rdata(rdata), .s_rresp(rresp), .s_rvalid(rvalid), .s_rready(rready),
    .mode, .dest, .ddr_rd_en, .ddr_clear, .toa_clear, .link_en, .threshold, .timeout,
    .ddr_fill, .ev_drop, .ev_in, .ev_trig_count(ev_tc), .ev_trig_timeout(ev_tt));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input logic [7:0] a, input logic [31:0] d, input logic [3:0] s = 4'hF);
    @(negedge clk);
    awaddr = a; wdata = d; wstrb = s; awvalid = 1; wvalid = 1;
    @(posedge clk);
    while (!awready) @(posedge clk);
    @(negedge clk) begin awvalid = 0; wvalid = 0; end
    while (!bvalid) @(posedge clk);
    @(posedge clk);
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1;
    @(posedge clk);
    while (!arready) @(posedge clk);
    @(negedge clk) arvalid = 0;
    while (!rvalid) @(negedge clk);
    d = rdata;
    @(posedge clk);
  endtask

  task automatic expect_reg(input logic [7:0] a, input logic [31:0] e);
    logic [31:0] d;
    rd(a, d);
    checks++;
    if (d !== e) begin failures++; $display("reg %02h = %h expected %h", a, d, e); end
  endtask

  task automatic expect_sig(input logic [31:0] g, input logic [31:0] e, input string n);
    checks++;
    if (g !== e) begin failures++; $display("%s = %h expected %h", n, g, e); end
  endtask

  function automatic logic [31:0] merge(input logic [31:0] old, input logic [31:0] d,
                                       input logic [3:0] s, input logic [31:0] mask);
    logic [31:0] m = {{8{s[3]}}, {8{s[2]}}, {8{s[1]}}, {8{s[0]}}} & mask;
    return (old & ~m) | (d & m);
  endfunction

  // model: rw[0..3] = CTRL, LINK_EN, THRESHOLD, TIMEOUT; cnt[0..3] = counters 0x14..0x20
  task automatic random_run();
    logic [31:0] rw[4], cnt[4], d;
    logic [31:0] mask[4] = '{32'h1F, 32'hFFFF, 32'hFFFF, 32'hFFFF_FFFF};
    logic [3:0] s;
    int a, n;
    for (int i = 0; i < 4; i++) begin rd(8'(4 * i), rw[i]); rd(8'(8'h14 + 4 * i), cnt[i]); end
    for (int it = 0; it < 300; it++) begin
      case ($urandom_range(0, 2))
        0: begin
          a = $urandom_range(0, 3); d = $urandom; s = 4'($urandom);
          wr(8'(4 * a), d, s);
          rw[a] = merge(rw[a], d, s, mask[a]);
        end
        1: begin
          n = $urandom_range(1, 20);
          for (int k = 0; k < n; k++) begin
            @(negedge clk);
            ev_drop = 4'($urandom); ev_in = 4'($urandom); ev_tc = 4'($urandom); ev_tt = 4'($urandom);
            cnt[0] += $countones(ev_drop); cnt[1] += $countones(ev_in);
            cnt[2] += $countones(ev_tc);   cnt[3] += $countones(ev_tt);
          end
          @(negedge clk) begin ev_drop = 0; ev_in = 0; ev_tc = 0; ev_tt = 0; end
        end
        default: begin
          a = $urandom_range(0, 3);
          wr(8'(8'h14 + 4 * a), $urandom);
          cnt[a] = 0;
        end
      endcase
      a = $urandom_range(0, 3);
      expect_reg(8'(4 * a), rw[a]);
      expect_reg(8'(8'h14 + 4 * a), cnt[a]);
      expect_sig({27'd0, toa_clear, ddr_clear, ddr_rd_en, dest, mode}, rw[0], "ctrl outputs");
      expect_sig({16'd0, link_en}, rw[1], "link_en");
      expect_sig({16'd0, threshold}, rw[2], "threshold");
      expect_sig(timeout, rw[3], "timeout");
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    expect_reg(8'h00, 0);
    expect_reg(8'h04, 32'hFFFF);
    expect_reg(8'h08, 128);
    expect_reg(8'h0C, 320000);
    expect_reg(8'h10, 32'h1234);
    expect_sig(threshold, 128, "threshold"); expect_sig(timeout, 320000, "timeout");
    wr(8'h00, 32'h1B);   // mode, dest, clear, toa_clear; no read enable
    expect_sig({toa_clear, ddr_clear, ddr_rd_en, dest, mode}, 5'h1B, "ctrl");
    wr(8'h04, 32'h0000_A5A5);
    expect_sig(link_en, 16'hA5A5, "link_en");
    wr(8'h04, 32'h0000_3C00, 4'b0010);  // upper byte only
    expect_reg(8'h04, 32'h3CA5);
    wr(8'h08, 32'd16);
    wr(8'h0C, 32'd777);
    expect_reg(8'h08, 16);
    expect_reg(8'h0C, 777);
    expect_sig(timeout, 777, "timeout");
    // counters: 10 clocks of 3 drops, 4 events, 1 + 2 bursts each
    @(negedge clk) begin ev_drop = 4'b0111; ev_in = 4'hF; ev_tc = 4'b0001; ev_tt = 4'b0110; end
    repeat (10) @(negedge clk);
    begin ev_drop = 0; ev_in = 0; ev_tc = 0; ev_tt = 0; end
    expect_reg(8'h14, 30);
    expect_reg(8'h18, 40);
    expect_reg(8'h1C, 10);
    expect_reg(8'h20, 20);
    wr(8'h14, 0);
    expect_reg(8'h14, 0);
    expect_reg(8'h18, 40);
    expect_reg(8'h3C, 32'hDEAD_BEEF);
    checks++;
    if (bresp != 0 || rresp != 0) failures++;
    random_run();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
