// tb_gwt_descrambler: self-checking test of the 64b/66b descrambler.
// A reference scrambler encodes random words; data, idle (control) and
// invalid-header blocks are mixed, with random gaps in blk_valid. Every data
// word must come back unchanged, in order, one clock after its block; idle
// blocks must produce nothing and invalid headers must raise hdr_err.
// The paper says only that the links are descrambled; the reference
// scrambler uses the Ethernet 64b/66b polynomial, as the RTL does.
module tb_gwt_descrambler;
  import ctpx1_pkg::*;
  import tb_gwt_pkg::*;

  logic clk = 0, rst = 1;
  logic blk_valid = 0;
  logic [65:0] blk = '0;
  logic evt_valid, hdr_err;
  logic [63:0] evt;
  int checks = 0, failures = 0;
  logic [63:0] expq[$];
  int exp_err = 0, got_err = 0;
  logic [57:0] st = '0;

  always #5 clk = ~clk;

  gwt_descrambler dut (.clk, .rst, .blk_valid, .blk, .evt_valid, .evt, .hdr_err);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst) begin
    if (evt_valid) begin
      checks++;
      if (expq.size() == 0) begin failures++; $display("unexpected word %h", evt); end
      else begin
        automatic logic [63:0] e = expq.pop_front();
        if (e !== evt) begin failures++; $display("word %h expected %h", evt, e); end
      end
    end
    if (hdr_err) got_err++;
  end

  initial begin
    logic [63:0] d;
    int kind;
    st = {$urandom, $urandom};   // transmitter starts in an unknown state
    repeat (3) @(posedge clk);
    rst <= 0;
    // 3 idle blocks let the descrambler lock (58 bits)
    for (int n = 0; n < 3003; n++) begin
      @(negedge clk);
      if ($urandom_range(0, 4) == 0) begin blk_valid = 0; continue; end
      d    = {$urandom, $urandom};
      kind = (n < 3) ? 1 : $urandom_range(0, 9);
      if (kind == 0) begin
        blk = scramble(d, 2'b00, st); exp_err++;
      end else if (kind <= 2) begin
        blk = scramble(d, SH_CTRL, st);
      end else begin
        blk = scramble(d, SH_DATA, st); expq.push_back(d);
      end
      blk_valid = 1;
    end
    @(negedge clk) blk_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d words missing", expq.size()); end
    checks++;
    if (got_err != exp_err) begin failures++; $display("hdr_err %0d expected %0d", got_err, exp_err); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
