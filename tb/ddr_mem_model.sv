// ddr_mem_model: behavioural stand-in for the DDR4 memory and its controller,
// for simulation only. A sparse array holds 512-bit words. The write port
// accepts a word when wready is high; wready and arready drop at random when
// STALL_PCT is non-zero. Read data returns in request order LATENCY clocks
// after the request. Uninitialised words read as zero.
// It stands in for the DDR4 memory controller and memory, which the
// camera takes from the FPGA vendor; latency and stall rate are free choices.
module ddr_mem_model #(
  parameter int ADDR_W    = 27,
  parameter int LATENCY   = 8,
  parameter int STALL_PCT = 0
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              wvalid,
  output logic              wready,
  input  logic [ADDR_W-1:0] waddr,
  input  logic [511:0]      wdata,
  input  logic              arvalid,
  output logic              arready,
  input  logic [ADDR_W-1:0] araddr,
  output logic              rvalid,
  output logic [511:0]      rdata
);
  logic [511:0] mem [logic [ADDR_W-1:0]];
  logic [511:0] pipe_d [LATENCY];
  logic         pipe_v [LATENCY];
  int           writes = 0;

  always @(negedge clk) begin
    wready  <= !rst && ($urandom_range(1, 100) > STALL_PCT);
    arready <= !rst && ($urandom_range(1, 100) > STALL_PCT);
  end

  always @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < LATENCY; i++) pipe_v[i] <= 1'b0;
    end else begin
      if (wvalid && wready) begin
        mem[waddr] = wdata;
        writes++;
      end
      for (int i = LATENCY - 1; i > 0; i--) begin
        pipe_v[i] <= pipe_v[i-1];
        pipe_d[i] <= pipe_d[i-1];
      end
      pipe_v[0] <= arvalid && arready;
      pipe_d[0] <= mem.exists(araddr) ? mem[araddr] : '0;
    end
  end

  assign rvalid = pipe_v[LATENCY-1];
  assign rdata  = pipe_d[LATENCY-1];
endmodule
