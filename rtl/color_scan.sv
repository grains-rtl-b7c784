// color_scan: GRAINS ISP unit for Colors lookups.
//
// Unitigs in Strings are sorted by color, and a Color Bitmap with one bit per
// unitig marks color boundaries: a '1' is set on the last unitig of each
// color, so the color of unitig u is the number of ones at bitmap positions
// below u (the Color Index). Because the Strings stage delivers matched
// unitig IDs in page order, the index is found by one forward scan of the
// bitmap, which streams straight from flash without being buffered in DRAM.
//
// How it works: two 32-bit registers hold the current and the incoming
// bitmap chunk. For the unitig ID in the ID register, the unit either
// (a) finds it inside the current chunk and outputs Color Index + the ones of
//     the current chunk below it, or
// (b) retires the current chunk (adds its ones to the Color Index, moves the
//     incoming chunk up), or
// (c) for an ID behind the scan position, rewinds: it clears the index and
//     asks the bitmap source (`bm_rewind`) to restart from chunk 0.
// The adder then forms the Colors byte address colors_base + 4*index, which
// the Colors stage sends to the dies as an IFP selection.
//
// Interface: unitig IDs on `uid_valid`/`uid_ready`; bitmap chunks in order
// on `bm_valid`/`bm_ready` (bit i of chunk c is unitig 32c+i); results on
// `out_valid`/`out_ready` with `color_idx` and `color_addr`. `bm_rewind` is
// a one-cycle pulse (bm_ready is low during it); the chunk presented in the
// following cycle must be chunk 0.
// Timing: one cycle per unitig ID whose chunk is loaded, one cycle per
// bitmap chunk skipped.
//
// The two 32-bit registers, the Color Index counter, the adder and the
// in-order scan follow the design. Counting the ones of a whole chunk per
// cycle (instead of one bit per cycle), the rewind for out-of-order IDs and
// the end-of-color bit convention of the color-encoding figure are this
// implementation's choices (the text calls the marked unitig the start of a
// new color; the printed example marks the last unitig of each color).
module color_scan
  import grains_pkg::*;
#(
  parameter int unsigned AW = 48      // Colors byte address width
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [AW-1:0]       colors_base,   // byte address of Colors[0]
  // unitig IDs of matched k-mers
  input  logic                uid_valid,
  output logic                uid_ready,
  input  logic [UNITIG_W-1:0] uid,
  // Color Bitmap stream
  input  logic                bm_valid,
  output logic                bm_ready,
  input  logic [31:0]         bm_data,
  output logic                bm_rewind,
  // result
  output logic                out_valid,
  input  logic                out_ready,
  output logic [31:0]         color_idx,
  output logic [AW-1:0]       color_addr
);

  logic [31:0]         cur_q, nxt_q;        // current / incoming bitmap chunk
  logic                cur_v, nxt_v;
  logic [UNITIG_W-1:0] pos_q;               // unitig ID of cur_q bit 0
  logic [31:0]         cidx_q;              // Color Index: ones before pos_q

  wire        in_cur  = cur_v && (uid >= pos_q) && (uid - pos_q < 32);
  wire        behind  = (uid < pos_q);
  wire [4:0]  sub     = uid[4:0];
  wire [31:0] below   = cur_q & ((32'd1 << sub) - 32'd1);

  wire out_free = !out_valid || out_ready;
  wire hit      = uid_valid && in_cur && out_free;
  wire retire   = uid_valid && cur_v && !behind && !in_cur && nxt_v;
  wire rewind   = uid_valid && behind;

  assign uid_ready = hit;
  assign bm_ready  = !rewind && !bm_rewind && (!cur_v || !nxt_v || retire);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_q      <= '0;
      nxt_q      <= '0;
      cur_v      <= 1'b0;
      nxt_v      <= 1'b0;
      pos_q      <= '0;
      cidx_q     <= '0;
      bm_rewind  <= 1'b0;
      out_valid  <= 1'b0;
      color_idx  <= '0;
      color_addr <= '0;
    end else begin
      bm_rewind <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (hit) begin
        out_valid  <= 1'b1;
        color_idx  <= cidx_q + 32'($countones(below));
        color_addr <= colors_base + (AW'(cidx_q + 32'($countones(below))) << 2);
      end
      if (rewind) begin
        cur_v     <= 1'b0;
        nxt_v     <= 1'b0;
        pos_q     <= '0;
        cidx_q    <= '0;
        bm_rewind <= 1'b1;
      end else if (retire) begin
        cidx_q <= cidx_q + 32'($countones(cur_q));
        pos_q  <= pos_q + 32;
        cur_q  <= nxt_q;
        if (bm_valid) nxt_q <= bm_data;
        else          nxt_v <= 1'b0;
      end else if (bm_valid && bm_ready) begin
        if (!cur_v) begin
          cur_q <= bm_data;
          cur_v <= 1'b1;
        end else begin
          nxt_q <= bm_data;
          nxt_v <= 1'b1;
        end
      end
    end
  end

endmodule
