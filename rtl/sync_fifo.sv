// sync_fifo: single-clock first-word-fall-through FIFO (helper).
// rd_data shows the oldest entry whenever empty is low; rd_en pops it.
// A write when full and a read when empty are ignored. DEPTH must be a power
// of two. count is the number of stored entries. Synchronous active-high reset
// clears the pointers only; the storage array needs no reset.
// A generic building block of this design, not described in the paper.
module sync_fifo #(
  parameter int W     = 8,
  parameter int DEPTH = 16
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   wr_en,
  input  logic [W-1:0]           wr_data,
  input  logic                   rd_en,
  output logic [W-1:0]           rd_data,
  output logic                   full,
  output logic                   empty,
  output logic [$clog2(DEPTH):0] count
);
  localparam int AW = $clog2(DEPTH);
  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wp, rp;

  assign count   = wp - rp;
  assign full    = count == (AW+1)'(DEPTH);
  assign empty   = count == '0;
  assign rd_data = mem[rp[AW-1:0]];

  always_ff @(posedge clk)
    if (wr_en && !full) mem[wp[AW-1:0]] <= wr_data;

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (wr_en && !full) wp <= wp + 1'b1;
      if (rd_en && !empty) rp <= rp + 1'b1;
    end
  end
endmodule
