// rr_addr_map: GRAINS physical allocation, in hardware.
//
// GRAINS lays out every graph structure (Offsets, Strings, Color Bitmap,
// Colors) uniformly over the SSD: consecutive pages of a structure rotate
// first over the channels, then over the dies of a channel, then over the
// planes of a die, and only then advance the page index inside the plane, so
// that planes of a die stay aligned to the same page offset (what a
// multi-plane read needs). Physical locations are therefore computed from a
// structure's base and this fixed stride instead of being looked up in a
// page-level L2P table; only the base (block-granular metadata) is stored.
//
// Interface: purely combinational. `base_page` is the structure's first
// global stripe page, `byte_addr` a byte address inside the structure. The
// outputs are the physical channel/die/plane/page and the byte offset inside
// the page. `byte_off` is simply the low address bits, and only the page
// index (not the in-page offset) feeds the rotation.
//
// Round-robin placement over channels, dies and planes follows the design;
// the rotation order (channel fastest, then die, then plane) is this
// implementation's choice.
module rr_addr_map
  import grains_pkg::*;
#(
  parameter int unsigned ADDR_W = 48    // byte address width inside a structure
) (
  input  logic [ADDR_W-1:0]     base_page,
  input  logic [ADDR_W-1:0]     byte_addr,
  output phys_addr_t            pa,
  output logic [BYTE_OFF_W-1:0] byte_off
);

  localparam int unsigned CH_W  = $clog2(NUM_CH);
  localparam int unsigned DIE_W = $clog2(DIES_PER_CH);

  logic [ADDR_W-1:0] g;   // global stripe page index

  always_comb begin
    g        = base_page + (byte_addr >> BYTE_OFF_W);
    byte_off = byte_addr[BYTE_OFF_W-1:0];
    pa.ch    = g[CH_W-1:0];
    pa.die   = g[CH_W +: DIE_W];
    pa.plane = g[CH_W + DIE_W +: PLANE_W];
    pa.page  = PAGE_ADDR_W'(g >> (CH_W + DIE_W + PLANE_W));
  end

endmodule
