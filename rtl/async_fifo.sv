// async_fifo: dual-clock first-word-fall-through FIFO (helper).
// Binary pointers count in each domain; their Gray-coded copies cross to the
// other domain through two flip-flops, so full and empty are conservative.
// DEPTH must be a power of two and at least 4. Writes when full and reads when
// empty are ignored. Each side has its own synchronous active-high reset.
// A generic building block: the paper names no FIFO types, so the
// Gray-code design and the two-flop synchronizers are this design's choice.
module async_fifo #(
  parameter int W     = 8,
  parameter int DEPTH = 16
) (
  input  logic         wclk,
  input  logic         wrst,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  output logic         full,
  input  logic         rclk,
  input  logic         rrst,
  input  logic         rd_en,
  output logic [W-1:0] rd_data,
  output logic         empty
);
  localparam int AW = $clog2(DEPTH);
  logic [W-1:0] mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rg_w1, rg_w2, wg_r1, wg_r2;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  assign full    = wgray == {~rg_w2[AW:AW-1], rg_w2[AW-2:0]};
  assign empty   = rgray == wg_r2;
  assign rd_data = mem[rbin[AW-1:0]];

  always_ff @(posedge wclk)
    if (wr_en && !full) mem[wbin[AW-1:0]] <= wr_data;

  always_ff @(posedge wclk) begin
    if (wrst) begin
      wbin <= '0; wgray <= '0; rg_w1 <= '0; rg_w2 <= '0;
    end else begin
      rg_w1 <= rgray;
      rg_w2 <= rg_w1;
      if (wr_en && !full) begin
        wbin  <= wbin + 1'b1;
        wgray <= bin2gray(wbin + 1'b1);
      end
    end
  end

  always_ff @(posedge rclk) begin
    if (rrst) begin
      rbin <= '0; rgray <= '0; wg_r1 <= '0; wg_r2 <= '0;
    end else begin
      wg_r1 <= wgray;
      wg_r2 <= wg_r1;
      if (rd_en && !empty) begin
        rbin  <= rbin + 1'b1;
        rgray <= bin2gray(rbin + 1'b1);
      end
    end
  end
endmodule
