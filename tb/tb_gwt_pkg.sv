// tb_gwt_pkg: testbench helpers that play the part of a Timepix4 GWT link.
// scramble() is the transmit side of the 64b/66b code (1 + x^39 + x^58),
// written independently of the descrambler: s[i] = d[i] ^ s[i-39] ^ s[i-58]
// over the transmitted scrambled bits. make_raw() builds a 64-bit event word
// with a given 16-bit ToA at bit TOA_LSB and a tag in the other bits.
// The scrambler follows the Ethernet 64b/66b code, and the event word
// layout (link number in bits 63:60) is a test convention, not the chip's format.
package tb_gwt_pkg;
  localparam int TOA_LSB = 28;

  function automatic logic [65:0] scramble(input logic [63:0] d, input logic [1:0] hdr,
                                           ref logic [57:0] st);
    logic [65:0] b;
    logic s;
    b[1:0] = hdr;
    for (int i = 0; i < 64; i++) begin
      s      = d[i] ^ st[38] ^ st[57];
      b[2+i] = s;
      st     = {st[56:0], s};
    end
    return b;
  endfunction

  // tag: 44 bits spread around the ToA field
  function automatic logic [63:0] make_raw(input logic [15:0] toa, input logic [43:0] tag);
    logic [63:0] r;
    r = {tag[43:24], 16'h0, tag[27:0]};
    r[TOA_LSB +: 16] = toa;
    r[63:44] = tag[43:24];
    r[27:0]  = tag[27:0];
    return r;
  endfunction
endpackage
