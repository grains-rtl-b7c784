// gst_table: GRAINS Scheduler Table (GST) of one NAND die.
//
// Strings lookups arrive in random order (the Offsets entries that point
// into Strings are unsorted). Instead of sorting them, GRAINS drops each
// access into the row of the die's GST that belongs to its Strings page, and
// later reads the rows back in page order. Accesses to the same page then
// come out together (one page read serves them all), and pages come out in
// ascending order.
//
// Row contents: up to SLOTS accesses (bit address in the page, k-mer, query
// ID, one-hot target plane), the OR of their plane bits (so the first access
// of a row can request one multi-plane read), and a "full" flag with a
// pointer to an extension row. A row that fills up chains further accesses
// into rows of an EXT_ROWS-deep extension table, allocated in order; when
// the extension table is exhausted, `ins_ready` drops (overflow back-pressure)
// until the next drain frees it.
//
// Interface:
//  * insert: `ins_valid`/`ins_ready`, `ins_row` (Strings page index inside
//    the plane, low ROW_W bits), `ins_entry`. One insert per cycle.
//  * drain: pulse `drn_start`; the table then walks rows 0..ROWS-1, one row
//    visit per cycle when empty, and presents each stored access on
//    `drn_valid`/`drn_ready` with its page row and the row's plane mask;
//    `drn_first` marks the first access of a row. `drn_busy` is high for the
//    whole walk. Drained rows are cleared.
//  * `ext_alloc` pulses when an extension row is taken.
// Inserting while a drain is running is not supported (asserted).
//
// Row layout, page-order read-out and the full flag with extension pointer
// follow the design, where the table lives in the SSD's internal DRAM; here
// it is a plain array. Row and slot counts are this implementation's choice.
module gst_table
  import grains_pkg::*;
#(
  parameter int unsigned ROWS     = 256,   // Strings pages per plane covered
  parameter int unsigned SLOTS    = 4,     // accesses per row
  parameter int unsigned EXT_ROWS = 64     // extension rows
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // insert
  input  logic                     ins_valid,
  output logic                     ins_ready,
  input  logic [$clog2(ROWS)-1:0]  ins_row,
  input  gst_entry_t               ins_entry,
  // drain
  input  logic                     drn_start,
  output logic                     drn_busy,
  output logic                     drn_valid,
  input  logic                     drn_ready,
  output logic [$clog2(ROWS)-1:0]  drn_row,
  output logic [PLANES-1:0]        drn_mask,
  output logic                     drn_first,
  output gst_entry_t               drn_entry,
  // status
  output logic                     empty,
  output logic                     ext_alloc
);

  localparam int unsigned TOT   = ROWS + EXT_ROWS;
  localparam int unsigned ROW_W = $clog2(ROWS);
  localparam int unsigned TW    = $clog2(TOT);
  localparam int unsigned SW    = $clog2(SLOTS + 1);
  localparam int unsigned XW    = $clog2(EXT_ROWS + 1);

  gst_entry_t         ent   [TOT][SLOTS];
  logic [SW-1:0]      cnt   [TOT];
  logic               nxt_v [TOT];     // "full" flag: chained to an extension row
  logic [TW-1:0]      nxt   [TOT];
  logic [TW-1:0]      tail  [ROWS];    // last row of each chain
  logic [PLANES-1:0]  pmask [ROWS];
  logic [XW-1:0]      ext_free;
  logic [31:0]        stored;

  // ---------------- insert ----------------
  logic [TW-1:0] t;
  logic          need_ext;
  always_comb begin
    t        = tail[ins_row];
    need_ext = (cnt[t] == SW'(SLOTS));
  end
  assign ins_ready = !drn_busy && (!need_ext || ext_free < XW'(EXT_ROWS));
  wire ins_fire = ins_valid && ins_ready;
  assign ext_alloc = ins_fire && need_ext;

  // ---------------- drain ----------------
  logic [ROW_W:0]     rp;      // row being visited (ROWS = finished)
  logic [TW-1:0]      cur;     // row of the chain being read
  logic [SW-1:0]      idx;

  wire [TW-1:0] rrow = TW'(rp[ROW_W-1:0]);   // visited row as a table index

  assign drn_busy  = (rp != (ROW_W+1)'(ROWS));
  assign drn_valid = drn_busy && (cnt[rrow] != '0);
  assign drn_row   = ROW_W'(rp);
  assign drn_mask  = pmask[ROW_W'(rp)];
  assign drn_first = (cur == TW'(rp[ROW_W-1:0])) && (idx == '0);
  assign drn_entry = ent[cur][idx[$clog2(SLOTS)-1:0]];
  assign empty     = (stored == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < TOT; r++) begin
        cnt[r]   <= '0;
        nxt_v[r] <= 1'b0;
        nxt[r]   <= '0;
      end
      for (int r = 0; r < ROWS; r++) begin
        tail[r]  <= TW'(r);
        pmask[r] <= '0;
      end
      ext_free <= '0;
      stored   <= '0;
      rp       <= (ROW_W+1)'(ROWS);
      cur      <= '0;
      idx      <= '0;
    end else begin
      if (ins_fire) begin
        stored <= stored + 1;
        pmask[ins_row] <= pmask[ins_row] | ins_entry.plane_oh;
        if (need_ext) begin
          automatic logic [TW-1:0] x = TW'(ROWS) + TW'(ext_free);
          ent[x][0]   <= ins_entry;
          cnt[x]      <= SW'(1);
          nxt_v[x]    <= 1'b0;
          nxt_v[t]    <= 1'b1;
          nxt[t]      <= x;
          tail[ins_row] <= x;
          ext_free    <= ext_free + 1'b1;
        end else begin
          ent[t][cnt[t][$clog2(SLOTS)-1:0]] <= ins_entry;
          cnt[t] <= cnt[t] + 1'b1;
        end
      end

      if (drn_start && !drn_busy) begin
        rp  <= '0;
        cur <= '0;
        idx <= '0;
      end else if (drn_busy) begin
        if (cnt[rrow] == '0) begin
          rp  <= rp + 1'b1;
          cur <= TW'(rp + 1'b1);
          idx <= '0;
          if (rp == (ROW_W+1)'(ROWS - 1)) ext_free <= '0;
        end else if (drn_ready) begin
          stored <= stored - 1;
          if (idx != cnt[cur] - 1'b1) begin
            idx <= idx + 1'b1;
          end else if (nxt_v[cur]) begin
            cur <= nxt[cur];
            idx <= '0;
          end else begin
            // row done: clear it and move on
            cnt[rrow]   <= '0;
            nxt_v[rrow] <= 1'b0;
            tail[ROW_W'(rp)]  <= TW'(rp[ROW_W-1:0]);
            pmask[ROW_W'(rp)] <= '0;
            rp  <= rp + 1'b1;
            cur <= TW'(rp + 1'b1);
            idx <= '0;
            if (rp == (ROW_W+1)'(ROWS - 1)) ext_free <= '0;
          end
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(ins_valid && drn_busy));

endmodule
