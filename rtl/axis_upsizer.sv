// axis_upsizer: 80-bit event stream to 512-bit beats.
// Events fill the six 80-bit slots of a beat in order (slot 0 first). A
// beat is sent when all six slots are filled or when the input event carries
// TLAST; a beat closed early has its unused slots zero and keep cleared, and
// carries TLAST. Packet boundaries are kept. Accepts one event per clock and
// produces one beat per six events, so it keeps up with a full-rate MCRRM.
// The slot packing is this design's choice; the widths are the paper's.
// Interfaces: s_* and m_* AXI-Stream. s_ready may depend on s_last.
module axis_upsizer
  import ctpx1_pkg::*;
(
  input  logic   clk,
  input  logic   rst,
  input  logic   s_valid,
  output logic   s_ready,
  input  event_t s_data,
  input  logic   s_last,
  output logic   m_valid,
  input  logic   m_ready,
  output beat_t  m_beat
);
  localparam int SI = $clog2(SLOTS);   // slot index width
  logic [BUS_W-1:0] acc;
  logic [SLOTS-1:0] acc_keep;
  logic [SI-1:0]    idx;
  logic             closes, ob_free, take;
  logic [BUS_W-1:0] acc_n;
  logic [SLOTS-1:0] keep_n;

  assign closes  = (idx == SI'(SLOTS-1)) || s_last;
  assign ob_free = !m_valid || m_ready;
  assign s_ready = !closes || ob_free;
  assign take    = s_valid && s_ready;

  always_comb begin
    acc_n  = acc;
    keep_n = acc_keep;
    acc_n[int'(idx)*SLOT_W +: SLOT_W] = s_data;
    keep_n[idx] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      acc      <= '0;
      acc_keep <= '0;
      idx      <= '0;
      m_valid  <= 1'b0;
      m_beat   <= '0;
    end else begin
      if (m_valid && m_ready) m_valid <= 1'b0;
      if (take) begin
        if (closes) begin
          m_valid  <= 1'b1;
          m_beat   <= '{data: acc_n, keep: keep_n, last: s_last};
          acc      <= '0;
          acc_keep <= '0;
          idx      <= '0;
        end else begin
          acc      <= acc_n;
          acc_keep <= keep_n;
          idx      <= idx + 1'b1;
        end
      end
    end
  end
endmodule
