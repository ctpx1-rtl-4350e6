// axis_rr_arbiter: N-to-1 AXI-Stream arbiter that switches only at packet
// boundaries (the "4-1 Arbiter" of the paper's second stage).
// When no packet is in flight the first valid input after the last one
// granted wins, in the same clock, and stays granted until its TLAST beat is
// accepted; the next grant can be made in the clock after, with no idle
// clock between packets. Round-robin order is this design's choice.
module axis_rr_arbiter
  import ctpx1_pkg::*;
#(
  parameter int N = 4
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [N-1:0]         s_valid,
  output logic [N-1:0]         s_ready,
  input  beat_t [N-1:0]        s_beat,
  output logic                 m_valid,
  input  logic                 m_ready,
  output beat_t                m_beat,
  output logic [$clog2(N)-1:0] m_src
);
  localparam int SW = $clog2(N);
  logic          locked, found;
  logic [SW-1:0] sel, last, g;

  always_comb begin
    found = 1'b0;
    g     = last;
    if (locked) begin
      g     = sel;
      found = 1'b1;
    end else begin
      for (int k = 1; k <= N; k++) begin
        if (!found && s_valid[SW'((int'(last) + k) % N)]) begin
          found = 1'b1;
          g     = SW'((int'(last) + k) % N);
        end
      end
    end
    m_valid = found && s_valid[g];
    m_beat  = s_beat[g];
    m_src   = g;
    s_ready = '0;
    s_ready[g] = found && m_ready;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      locked <= 1'b0;
      sel    <= '0;
      last   <= SW'(N-1);
    end else if (m_valid && m_ready) begin
      if (m_beat.last) begin
        locked <= 1'b0;
        last   <= g;
      end else begin
        locked <= 1'b1;
        sel    <= g;
      end
    end
  end
endmodule
