// gwt_descrambler: 64b/66b descrambler for one Timepix4 GWT link.
//
// Each input block is a 2-bit sync header (blk[1:0], blk[0] first on the line)
// and a 64-bit scrambled payload (blk[65:2], blk[2] first). The payload is
// descrambled with the self-synchronising polynomial 1 + x^39 + x^58 of the
// IEEE 802.3 64b/66b code: out[i] = in[i] ^ in[i-39] ^ in[i-58], counting
// over the received bit stream. The scrambler state runs over every block,
// data or control, so the descrambler locks after 58 received bits.
// Data blocks (header SH_DATA) leave as 64-bit raw words; control blocks
// (idle fill) are dropped; headers 00 and 11 raise hdr_err for one cycle.
// The paper names this stage "64/66B Descrambler" and says it restores the
// 64-bit raw word; the polynomial, header coding and bit order follow the
// 802.3 code and are this design's reading of it.
// Timing: one block per clock (80 MHz link clock), one cycle latency.
module gwt_descrambler
  import ctpx1_pkg::*;
(
  input  logic             clk,
  input  logic             rst,
  input  logic             blk_valid,
  input  logic [BLK_W-1:0] blk,
  output logic             evt_valid,
  output logic [RAW_W-1:0] evt,
  output logic             hdr_err
);
  logic [57:0]      st, st_n;     // st[k] = received bit (k+1) positions ago
  logic [RAW_W-1:0] dout;

  always_comb begin
    st_n = st;
    for (int i = 0; i < RAW_W; i++) begin
      dout[i] = blk[2+i] ^ st_n[38] ^ st_n[57];
      st_n    = {st_n[56:0], blk[2+i]};
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st        <= '0;
      evt       <= '0;
      evt_valid <= 1'b0;
      hdr_err   <= 1'b0;
    end else begin
      evt_valid <= 1'b0;
      hdr_err   <= 1'b0;
      if (blk_valid) begin
        st        <= st_n;
        evt       <= dout;
        evt_valid <= blk[1:0] == SH_DATA;
        hdr_err   <= !(blk[1:0] inside {SH_DATA, SH_CTRL});
      end
    end
  end
endmodule
