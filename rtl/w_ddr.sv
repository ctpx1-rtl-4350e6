// w_ddr: writes the 512-bit event stream into DDR4 used as a ring buffer
// (Buffered Mode). Each accepted beat becomes one 512-bit memory word at
// address wr_ptr, and wr_ptr advances. The buffer is full when wr_ptr is
// 2^ADDR_W words ahead of rd_ptr (the reader's release pointer); the input
// is then held off. The six slot-valid (keep) bits are stored in the spare
// bits 485:480 of the word; TLAST is not stored. clear empties the ring.
// The paper names this block (W_DDR) and gives the 8 GB memory; the ring
// organisation and the simple write port (valid/ready, address, data, in
// words of 64 bytes) that stands in front of the memory controller are this
// design's. Default ADDR_W = 27: 2^27 words x 64 B = 8 GB.
module w_ddr
  import ctpx1_pkg::*;
#(
  parameter int ADDR_W = 27
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              clear,
  input  logic              s_valid,
  output logic              s_ready,
  input  beat_t             s_beat,
  output logic              mem_wvalid,
  input  logic              mem_wready,
  output logic [ADDR_W-1:0] mem_waddr,
  output logic [BUS_W-1:0]  mem_wdata,
  input  logic [ADDR_W:0]   rd_ptr,
  output logic [ADDR_W:0]   wr_ptr,
  output logic              full
);
  assign full       = (wr_ptr - rd_ptr) == {1'b1, {ADDR_W{1'b0}}};
  assign mem_wvalid = s_valid && !full && !clear;
  assign s_ready    = mem_wready && !full && !clear;
  assign mem_waddr  = wr_ptr[ADDR_W-1:0];
  always_comb begin
    mem_wdata = s_beat.data;
    mem_wdata[BUS_W-1:SPARE_LSB] = '0;
    mem_wdata[SPARE_LSB +: SLOTS] = s_beat.keep;
  end

  always_ff @(posedge clk) begin
    if (rst || clear) wr_ptr <= '0;
    else if (mem_wvalid && mem_wready) wr_ptr <= wr_ptr + 1'b1;
  end
endmodule
