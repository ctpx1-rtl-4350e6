// burst_ctrl: the MCRRM first-level buffer, flow-control FSM and AXI-Stream
// generator (the 320 MHz "AXI clock domain" of the MCRRM).
//
// Merged events are written into a FIFO. The FSM keeps "pending", the number
// of buffered events not yet given to a burst, and a timer that counts clocks
// while pending is non-zero. Two triggers start a transfer, as the paper
// describes: the counts trigger when pending reaches threshold (default 128),
// which sends exactly threshold events with TLAST on the last; and the
// latency trigger when the timer exceeds timeout (default 320000 clocks,
// 1 ms at 320 MHz), which flushes everything pending with TLAST on the last.
// A new burst may start on the last beat of the previous one, so a full-rate
// input (one event per clock) leaves the FSM without idle clocks.
// The input cannot be stalled (the links cannot be stopped): an event that
// finds the FIFO full is dropped and counted by a pulse on drop.
// trig_count / trig_timeout pulse when a burst starts by either trigger.
// The FIFO depth, the exact timer start/stop rule and the drop-on-full policy
// are this design's choices. threshold must be 1..FIFO_DEPTH.
// Interface: m_* is AXI-Stream (valid/ready/last) of 80-bit events.
module burst_ctrl
  import ctpx1_pkg::*;
#(
  parameter int          FIFO_DEPTH        = 1024
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        in_valid,
  input  event_t                      in_evt,
  input  logic [15:0]                 threshold,
  input  logic [31:0]                 timeout,
  output logic                        m_valid,
  input  logic                        m_ready,
  output event_t                      m_data,
  output logic                        m_last,
  output logic                        drop,
  output logic                        trig_count,
  output logic                        trig_timeout,
  output logic [$clog2(FIFO_DEPTH):0] level
);
  localparam int CW = $clog2(FIFO_DEPTH) + 1;

  typedef enum logic {S_IDLE, S_SEND} state_t;
  state_t state;

  logic          full, empty, wr, rd;
  logic [CW-1:0] pending, burst_left, len, thr;
  logic [31:0]   timer;
  logic          can_start, cnt_hit, tmo_hit, start;

  assign wr   = in_valid && !full;
  assign drop = in_valid && full;

  sync_fifo #(.W(EVT_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst, .wr_en(wr), .wr_data(in_evt), .rd_en(rd), .rd_data(m_data),
    .full, .empty, .count(level));

  assign m_valid = state == S_SEND;
  assign m_last  = burst_left == CW'(1);
  assign rd      = m_valid && m_ready;

  always_comb begin
    thr       = (threshold == '0) ? CW'(1) : CW'(threshold);
    can_start = (state == S_IDLE) || (rd && m_last);
    cnt_hit   = pending >= thr;
    tmo_hit   = pending != '0 && timer > timeout;
    start     = can_start && (cnt_hit || tmo_hit);
    len       = cnt_hit ? thr : pending;
  end

  assign trig_count   = start && cnt_hit;
  assign trig_timeout = start && !cnt_hit;

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= S_IDLE;
      pending    <= '0;
      burst_left <= '0;
      timer      <= '0;
    end else begin
      pending <= pending + CW'(wr) - (start ? len : '0);
      if (start || pending == '0) timer <= '0;
      else if (timer != '1)       timer <= timer + 1'b1;
      if (start) begin
        state      <= S_SEND;
        burst_left <= len;
      end else if (rd) begin
        burst_left <= burst_left - 1'b1;
        if (m_last) state <= S_IDLE;
      end
    end
  end

  // A burst only reads events that are already in the FIFO.
  always_ff @(posedge clk)
    if (!rst && rd) assert (!empty) else $error("burst_ctrl: read from empty FIFO");
endmodule
