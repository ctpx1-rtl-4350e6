// tb_toa_extend: checks the 16-to-32-bit ToA extension.
// Each event gets a true 32-bit time T; the reference counter shows T plus a
// random arrival delay below 2^16 ticks, including delays that cross a wrap of
// the low 16 bits. The event word carries only T[15:0]; the output must carry
// T[31:16] on top of the unchanged 64-bit word, one clock later.
// The 16- to 32-bit extension is the paper's; the method checked here
// is this design's.
module tb_toa_extend;
  import ctpx1_pkg::*;
  import tb_gwt_pkg::*;

  logic clk = 0, rst = 1;
  logic in_valid = 0, out_valid;
  logic [63:0] in_raw = '0;
  logic [31:0] toa_ref = '0;
  logic [79:0] out_evt;
  int checks = 0, failures = 0;
  logic [79:0] expq[$];

  always #5 clk = ~clk;

  toa_extend #(.TOA_LSB(TOA_LSB)) dut (.clk, .rst, .in_valid, .in_raw, .toa_ref, .out_valid, .out_evt);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst && out_valid) begin
    checks++;
    if (expq.size() == 0) failures++;
    else begin
      automatic logic [79:0] e = expq.pop_front();
      if (e !== out_evt) begin failures++; $display("got %h expected %h", out_evt, e); end
    end
  end

  initial begin
    logic [31:0] t, dly;
    logic [63:0] r;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      t = $urandom;
      case ($urandom_range(0, 3))
        0: dly = 0;
        1: dly = $urandom_range(0, 65535);
        2: begin t[15:0] = 16'hFFF0 + 16'($urandom_range(0, 15)); dly = $urandom_range(16, 400); end
        default: dly = $urandom_range(0, 100);
      endcase
      r = make_raw(t[15:0], {$urandom, 12'($urandom)});
      toa_ref  = t + dly;
      in_raw   = r;
      in_valid = ($urandom_range(0, 3) != 0);
      if (in_valid) expq.push_back({t[31:16], r});
    end
    @(negedge clk) in_valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (expq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
