// ctpx1_pkg: widths, types and constants shared by the CTPX1 readout data path.
//
// A Timepix4 event leaves the chip as a 64-bit word on one of 16 GWT serial
// links. Each link delivers 66-bit blocks (2-bit sync header + 64 scrambled
// bits, 64b/66b line code). After descrambling and ToA extension an event is
// 80 bits wide: the upper 16 bits of a 32-bit ToA followed by the original
// 64-bit word. The second merge stage carries events on a 512-bit bus.
// The 512-bit beat holds up to six events, slot s in bits [80*s +: 80]; bits
// 511:480 are spare (zero on the bus; the DDR writer keeps the slot-valid
// bits there). This packing is this design's choice (the bus width, 512, and
// the event width, 80, are the paper's).
package ctpx1_pkg;
  localparam int RAW_W    = 64;    // raw Timepix4 word
  localparam int BLK_W    = 66;    // 64b/66b block
  localparam int EVT_W    = 80;    // event after ToA extension
  localparam int N_LINKS  = 16;    // GWT links of one Timepix4
  localparam int N_GROUPS = 4;     // MCRRMs, 4 links each
  localparam int GRP_LINKS = N_LINKS / N_GROUPS;
  localparam int BUS_W    = 512;   // second-stage bus
  localparam int SLOT_W   = EVT_W;
  localparam int SLOTS    = BUS_W / SLOT_W;        // 6
  localparam int SPARE_LSB = SLOTS * SLOT_W;       // 480

  // 64b/66b sync header, as blk[1:0] with blk[0] the first bit on the line:
  // "01" in line order is a data block, "10" a control (idle) block.
  localparam logic [1:0] SH_DATA = 2'b10;
  localparam logic [1:0] SH_CTRL = 2'b01;

  typedef logic [EVT_W-1:0] event_t;

  // One beat of the 512-bit stream. keep[s] marks slot s as holding an event.
  typedef struct packed {
    logic [BUS_W-1:0] data;
    logic [SLOTS-1:0] keep;
    logic             last;
  } beat_t;

  localparam int BEAT_W = $bits(beat_t);
endpackage
