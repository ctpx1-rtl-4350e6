// tb_toa_ref_counter: the reference counter must advance once every DIV
// clocks, hold zero while clear is high, and restart from zero after clear.
// The 40 MHz rate of the reference is this design's choice, matching
// the 25 ns coarse time bins.
module tb_toa_ref_counter;
  logic clk = 0, rst = 1, clear = 0;
  logic [31:0] count, count3;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  toa_ref_counter #(.DIV(2)) dut  (.clk, .rst, .clear, .count);
  toa_ref_counter #(.DIV(3)) dut3 (.clk, .rst, .clear, .count(count3));

  task automatic expect_eq(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("%s: %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int n = 1; n <= 600; n++) begin
      @(negedge clk);
      expect_eq(count, n / 2, "DIV=2");
      expect_eq(count3, n / 3, "DIV=3");
    end
    clear = 1;
    repeat (5) @(negedge clk);
    expect_eq(count, 0, "cleared");
    clear = 0;
    for (int n = 1; n <= 20; n++) begin
      @(negedge clk);
      expect_eq(count, n / 2, "after clear");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
