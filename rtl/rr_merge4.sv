// rr_merge4: the MCRRM "4-1 Merging" stage.
//
// Four event streams, each at most one 80-bit event per 80 MHz link clock,
// are written into four small dual-clock FIFOs. On the 320 MHz side a
// round-robin pointer pops one event per clock from the next non-empty FIFO
// after the one served last. Because the processing clock is four times the
// link clock, the merger serves all four links at full rate without loss:
// this is the paper's clock-boosting strategy. link_en[i] low (the GWT_en
// mask of the paper) stops link i from being written; it is a quasi-static
// setting re-timed into the link clock domain.
// The output has no back-pressure; the following buffer absorbs bursts.
// cdc_drop[i] pulses (link clock) if FIFO i was full; it cannot happen while
// aclk is at least four times lclk.
// Timing: about 4 aclk cycles from input to output.
module rr_merge4
  import ctpx1_pkg::*;
#(
  parameter int CDC_DEPTH = 16
) (
  input  logic                         lclk,
  input  logic                         lrst,
  input  logic [GRP_LINKS-1:0]         in_valid,
  input  event_t [GRP_LINKS-1:0]       in_evt,
  input  logic [GRP_LINKS-1:0]         link_en,
  output logic [GRP_LINKS-1:0]         cdc_drop,
  input  logic                         aclk,
  input  logic                         arst,
  output logic                         out_valid,
  output event_t                       out_evt,
  output logic [$clog2(GRP_LINKS)-1:0] out_src
);
  localparam int N  = GRP_LINKS;
  localparam int SW = $clog2(N);

  logic [N-1:0] en_s1, en_s2, full, empty, pop;
  event_t [N-1:0] rdata;
  logic [SW-1:0] last_src, pick;
  logic found;

  always_ff @(posedge lclk) begin
    if (lrst) begin
      en_s1 <= '0;
      en_s2 <= '0;
    end else begin
      en_s1 <= link_en;
      en_s2 <= en_s1;
    end
  end

  for (genvar i = 0; i < N; i++) begin : g_cdc
    async_fifo #(.W(EVT_W), .DEPTH(CDC_DEPTH)) u_fifo (
      .wclk(lclk), .wrst(lrst), .wr_en(in_valid[i] && en_s2[i]), .wr_data(in_evt[i]), .full(full[i]),
      .rclk(aclk), .rrst(arst), .rd_en(pop[i]), .rd_data(rdata[i]), .empty(empty[i]));
    assign cdc_drop[i] = in_valid[i] && en_s2[i] && full[i];
  end

  // Round-robin: first non-empty FIFO after the last one served.
  always_comb begin
    found = 1'b0;
    pick  = last_src;
    for (int k = 1; k <= N; k++) begin
      if (!found && !empty[SW'((int'(last_src) + k) % N)]) begin
        found = 1'b1;
        pick  = SW'((int'(last_src) + k) % N);
      end
    end
    pop = '0;
    if (found) pop[pick] = 1'b1;
  end

  always_ff @(posedge aclk) begin
    if (arst) begin
      last_src  <= SW'(N-1);
      out_valid <= 1'b0;
      out_evt   <= '0;
      out_src   <= '0;
    end else begin
      out_valid <= found;
      if (found) begin
        last_src <= pick;
        out_evt  <= rdata[pick];
        out_src  <= pick;
      end
    end
  end
endmodule
