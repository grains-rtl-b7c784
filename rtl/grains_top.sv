// grains_top: logic of a GRAINS-enabled SSD (in-storage and in-flash query
// engine for de Bruijn genome graphs), with its SSD-controller part and one
// IFP processing element per NAND die.
//
// What it does: for every query k-mer of a host batch it finds whether the
// k-mer is in the graph and, if so, the color (metadata ID) of its unitig,
// while whole flash pages never leave the dies. A batch runs in three stages,
// sequenced by grains_fsm:
//  1. OFFSETS: compacted k-mers from the host (already sorted by their Offsets
//     index) are rebuilt (kmer_decompact), their Offsets entries are located
//     by the round-robin mapping (rr_addr_map) and selected in the dies
//     (IFP select). Each returned entry, a Strings base position, is turned
//     into a Strings page and bit address and parked in that die's GST.
//  2. STRINGS: the GSTs are drained in page order; per channel a
//     light_scheduler issues compare commands round-robin over its dies. Each
//     die compares the k-mer against the window in its page buffer and
//     returns hit/miss and the unitig ID. Misses are reported right away,
//     hits go to the unitig-ID buffer.
//  3. COLORS: color_scan turns each unitig ID into a Color Index using the
//     Color Bitmap stream, and the Colors entry is selected in the dies.
// All dies are reached through one flash_channel_ctrl per channel.
//
// Ports: host side (decoded GRNS_Start/GRNS_Steps, the compacted batch
// stream, the result stream), structure bases (the block-granular GRAINS
// mapping metadata), the Color Bitmap stream (read through the regular flash
// read path), one page-read and page-buffer port per die (the NAND array, its
// page buffers and ECC_LITE are outside this logic), and event counters.
//
// Layout conventions of this implementation: Offsets and Colors entries are
// 32 bits; an Offsets entry is the Strings base position (in bases) of the
// window to search; Strings starts at a stripe boundary and fits ROWS pages
// per plane (one GST row per page); the unitig ID is stored in the column
// word before each window; the result port has no back-pressure.
//
// Overflow: the GST rows and the unitig-ID buffer are only emptied by later
// stages of the same batch, so a stage that waited for room would deadlock.
// Instead, an Offsets result whose die GST is full (extension rows used up),
// or a hit that finds the unitig-ID buffer full, is reported at once with
// `res_retry` set, and the host resends that k-mer in a later batch.
module grains_top
  import grains_pkg::*;
  import grains_phase_pkg::*;
#(
  parameter int unsigned GST_ROWS    = 256,
  parameter int unsigned GST_SLOTS   = 4,
  parameter int unsigned GST_EXT     = 64,
  parameter int unsigned UID_DEPTH   = 1024,  // unitig-ID buffer entries
  parameter int unsigned CMD_BEATS   = 16,
  parameter int unsigned RSP_BEATS   = 6
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // host commands (decoded vendor NVMe commands) and firmware handshake
  input  logic                   cmd_start,       // GRNS_Start
  input  logic                   cmd_step,        // GRNS_Steps: batch ready
  input  logic                   cmd_last,        // with cmd_step: last batch
  input  logic                   prep_done,       // FTL metadata swap finished
  output logic                   scc_mode,
  output logic                   batch_done,
  output phase_e                 phase,
  // GRAINS mapping metadata: structure bases in global stripe pages
  input  logic [47:0]            offsets_base,
  input  logic [47:0]            strings_base,    // multiple of NUM_DIES*PLANES
  input  logic [47:0]            colors_base,
  // compacted query batch
  input  logic                   q_valid,
  output logic                   q_ready,
  input  cq_word_t               q_word,
  input  logic                   q_last,          // last word of the batch
  // results
  output logic                   res_valid,
  output logic [QID_W-1:0]       res_qid,
  output logic                   res_match,
  output logic [UNITIG_W-1:0]    res_unitig,
  output logic [ENTRY_BITS-1:0]  res_color,
  output logic                   res_retry,       // not processed (overflow): resend
  // Color Bitmap stream
  input  logic                   bm_valid,
  output logic                   bm_ready,
  input  logic [31:0]            bm_data,
  output logic                   bm_rewind,
  // NAND dies (index = channel * DIES_PER_CH + die)
  output logic                   nd_rd    [NUM_DIES],
  output logic [PAGE_ADDR_W-1:0] nd_page  [NUM_DIES],
  output logic [PLANES-1:0]      nd_mask  [NUM_DIES],
  input  logic                   nd_done  [NUM_DIES],
  output logic                   pb_rd    [NUM_DIES],
  output logic [PLANE_W-1:0]     pb_plane [NUM_DIES],
  output logic [COL_W-1:0]       pb_col   [NUM_DIES],
  input  logic [WORD_BITS-1:0]   pb_data  [NUM_DIES],
  // event counters
  output logic [31:0]            cnt_stall,       // channel request stalled on a busy die
  output logic [31:0]            cnt_reuse,       // command served from a loaded page buffer
  output logic [31:0]            cnt_multiplane,  // page reads covering several planes
  output logic [31:0]            cnt_ext,         // GST rows chained to an extension row
  output logic [31:0]            cnt_rewind,      // Color Bitmap scan restarts
  output logic [31:0]            cnt_miss,        // k-mers not found
  output logic [31:0]            cnt_ovf,         // k-mers rejected by a full GST or ID buffer
  output logic [31:0]            cnt_hit          // k-mers found and colored
);

  localparam int unsigned CH_W   = $clog2(NUM_CH);
  localparam int unsigned DIE_W  = $clog2(DIES_PER_CH);
  localparam int unsigned TAG_W  = QID_W + KMER_BITS;
  localparam int unsigned ROW_W  = $clog2(GST_ROWS);
  localparam int unsigned STRIPE = NUM_DIES * PLANES;

  // ------------------------------------------------------------------
  // control
  // ------------------------------------------------------------------
  logic off_done, str_done, col_done, drain_start;

  grains_fsm u_fsm (
    .clk, .rst_n, .cmd_start, .cmd_step, .cmd_last, .prep_done,
    .off_done, .str_done, .col_done,
    .phase, .scc_mode, .drain_start, .batch_done
  );

  // ------------------------------------------------------------------
  // channel controllers and dies
  // ------------------------------------------------------------------
  logic                ch_req_valid [NUM_CH];
  logic                ch_req_ready [NUM_CH];
  logic [DIE_W-1:0]    ch_req_die   [NUM_CH];
  die_cmd_t            ch_req_cmd   [NUM_CH];
  logic [TAG_W-1:0]    ch_req_tag   [NUM_CH];
  logic                ch_rsp_valid [NUM_CH];
  logic                ch_rsp_ready [NUM_CH];
  logic [DIE_W-1:0]    ch_rsp_die   [NUM_CH];
  die_rsp_t            ch_rsp_data  [NUM_CH];
  logic [TAG_W-1:0]    ch_rsp_tag   [NUM_CH];
  logic [DIES_PER_CH-1:0] ch_die_free [NUM_CH];
  logic [NUM_CH-1:0]   ch_stall, ch_idle;
  logic [NUM_DIES-1:0] pe_reuse;

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    logic [DIES_PER_CH-1:0] pe_cmd_valid, pe_cmd_ready, pe_rsp_valid, pe_rsp_ack;
    die_cmd_t               pe_cmd;
    die_rsp_t               pe_rsp [DIES_PER_CH];

    flash_channel_ctrl #(
      .DIES(DIES_PER_CH), .TAG_W(TAG_W), .CMD_BEATS(CMD_BEATS), .RSP_BEATS(RSP_BEATS)
    ) u_fc (
      .clk, .rst_n,
      .req_valid(ch_req_valid[c]), .req_ready(ch_req_ready[c]), .req_die(ch_req_die[c]),
      .req_cmd(ch_req_cmd[c]), .req_tag(ch_req_tag[c]),
      .rsp_valid(ch_rsp_valid[c]), .rsp_ready(ch_rsp_ready[c]), .rsp_die(ch_rsp_die[c]),
      .rsp_data(ch_rsp_data[c]), .rsp_tag(ch_rsp_tag[c]),
      .pe_cmd_valid, .pe_cmd, .pe_cmd_ready, .pe_rsp_valid, .pe_rsp, .pe_rsp_ack,
      .die_free(ch_die_free[c]), .stall(ch_stall[c]), .idle(ch_idle[c])
    );

    for (genvar d = 0; d < DIES_PER_CH; d++) begin : g_die
      localparam int unsigned G = c * DIES_PER_CH + d;
      ifp_pe u_pe (
        .clk, .rst_n,
        .cmd_valid(pe_cmd_valid[d]), .cmd(pe_cmd), .cmd_ready(pe_cmd_ready[d]),
        .rsp_valid(pe_rsp_valid[d]), .rsp(pe_rsp[d]), .rsp_ack(pe_rsp_ack[d]),
        .nd_rd(nd_rd[G]), .nd_page(nd_page[G]), .nd_mask(nd_mask[G]), .nd_done(nd_done[G]),
        .pb_rd(pb_rd[G]), .pb_plane(pb_plane[G]), .pb_col(pb_col[G]), .pb_data(pb_data[G]),
        .page_reuse(pe_reuse[G])
      );
    end
  end

  // ------------------------------------------------------------------
  // stage 1: Offsets
  // ------------------------------------------------------------------
  logic                 dk_valid, dk_ready, dk_in_ready;
  logic [KMER_BITS-1:0] dk_kmer;
  logic [QID_W-1:0]     dk_qid;
  logic [OIDX_W-1:0]    dk_oidx;
  logic                 in_done_q;     // last word of the batch accepted

  wire off_phase = (phase == PH_OFFSETS);

  kmer_decompact u_dk (
    .clk, .rst_n,
    .in_valid(q_valid && off_phase && !in_done_q), .in_ready(dk_in_ready), .in_word(q_word),
    .out_valid(dk_valid), .out_ready(dk_ready),
    .out_kmer(dk_kmer), .out_qid(dk_qid), .out_oidx(dk_oidx)
  );
  assign q_ready = dk_in_ready && off_phase && !in_done_q;

  phys_addr_t           off_pa;
  logic [BYTE_OFF_W-1:0] off_byte;
  rr_addr_map u_map_off (
    .base_page(offsets_base), .byte_addr(48'(dk_oidx) << 2), .pa(off_pa), .byte_off(off_byte)
  );

  // ------------------------------------------------------------------
  // stage 3 source: Colors request (defined below, used by the request mux)
  // ------------------------------------------------------------------
  logic                 cs_out_valid, cs_out_ready;
  logic [31:0]          cs_color_idx;
  logic [47:0]          cs_color_addr;
  logic [QID_W-1:0]     cs_qid_q;
  logic [UNITIG_W-1:0]  cs_uid_q;
  phys_addr_t           col_pa;
  logic [BYTE_OFF_W-1:0] col_byte;
  rr_addr_map u_map_col (
    .base_page(colors_base), .byte_addr(cs_color_addr), .pa(col_pa), .byte_off(col_byte)
  );

  // ------------------------------------------------------------------
  // stage 2 source: GSTs and schedulers
  // ------------------------------------------------------------------
  logic              gst_ins_valid [NUM_DIES];
  logic              gst_ins_ready [NUM_DIES];
  logic [ROW_W-1:0]  gst_ins_row;
  gst_entry_t        gst_ins_entry;
  logic [NUM_DIES-1:0] gst_busy, gst_empty, gst_ext;

  logic              sc_req_valid [NUM_CH];
  logic [DIE_W-1:0]  sc_req_die   [NUM_CH];
  die_cmd_t          sc_req_cmd   [NUM_CH];
  logic [QID_W-1:0]  sc_req_tag   [NUM_CH];

  wire str_phase = (phase == PH_STRINGS);
  wire col_phase = (phase == PH_COLORS);
  wire [PAGE_ADDR_W-1:0] strings_plane_base = PAGE_ADDR_W'(strings_base / STRIPE);

  for (genvar c = 0; c < NUM_CH; c++) begin : g_sched
    logic [DIES_PER_CH-1:0] drn_valid, drn_ready, drn_first;
    logic [ROW_W-1:0]       drn_row   [DIES_PER_CH];
    logic [PLANES-1:0]      drn_mask  [DIES_PER_CH];
    gst_entry_t             drn_entry [DIES_PER_CH];

    for (genvar d = 0; d < DIES_PER_CH; d++) begin : g_gst
      localparam int unsigned G = c * DIES_PER_CH + d;
      gst_table #(.ROWS(GST_ROWS), .SLOTS(GST_SLOTS), .EXT_ROWS(GST_EXT)) u_gst (
        .clk, .rst_n,
        .ins_valid(gst_ins_valid[G]), .ins_ready(gst_ins_ready[G]),
        .ins_row(gst_ins_row), .ins_entry(gst_ins_entry),
        .drn_start(drain_start), .drn_busy(gst_busy[G]),
        .drn_valid(drn_valid[d]), .drn_ready(drn_ready[d]), .drn_row(drn_row[d]),
        .drn_mask(drn_mask[d]), .drn_first(drn_first[d]), .drn_entry(drn_entry[d]),
        .empty(gst_empty[G]), .ext_alloc(gst_ext[G])
      );
    end

    light_scheduler #(.DIES(DIES_PER_CH), .ROWS(GST_ROWS)) u_sched (
      .clk, .rst_n, .strings_page_base(strings_plane_base),
      .drn_valid(drn_valid & {DIES_PER_CH{str_phase}}), .drn_ready, .drn_row, .drn_mask,
      .drn_first, .drn_entry,
      .die_free(ch_die_free[c]),
      .req_valid(sc_req_valid[c]), .req_ready(ch_req_ready[c] && str_phase),
      .req_die(sc_req_die[c]), .req_cmd(sc_req_cmd[c]), .req_tag(sc_req_tag[c])
    );
  end

  // ------------------------------------------------------------------
  // request mux into the channel controllers
  // ------------------------------------------------------------------
  die_cmd_t off_cmd, col_cmd;
  always_comb begin
    off_cmd            = '0;
    off_cmd.op         = OP_SELECT;
    off_cmd.page       = off_pa.page;
    off_cmd.plane      = off_pa.plane;
    off_cmd.bit_off    = {off_byte, 3'b000};
    col_cmd            = '0;
    col_cmd.op         = OP_SELECT;
    col_cmd.page       = col_pa.page;
    col_cmd.plane      = col_pa.plane;
    col_cmd.bit_off    = {col_byte, 3'b000};
    for (int c = 0; c < NUM_CH; c++) begin
      ch_req_valid[c] = 1'b0;
      ch_req_die[c]   = '0;
      ch_req_cmd[c]   = '0;
      ch_req_tag[c]   = '0;
      if (off_phase && dk_valid && off_pa.ch == CH_W'(c)) begin
        ch_req_valid[c] = 1'b1;
        ch_req_die[c]   = off_pa.die;
        ch_req_cmd[c]   = off_cmd;
        ch_req_tag[c]   = {dk_qid, dk_kmer};
      end else if (str_phase) begin
        ch_req_valid[c] = sc_req_valid[c];
        ch_req_die[c]   = sc_req_die[c];
        ch_req_cmd[c]   = sc_req_cmd[c];
        ch_req_tag[c]   = {sc_req_tag[c], KMER_BITS'(0)};
      end else if (col_phase && cs_out_valid && col_pa.ch == CH_W'(c)) begin
        ch_req_valid[c] = 1'b1;
        ch_req_die[c]   = col_pa.die;
        ch_req_cmd[c]   = col_cmd;
        ch_req_tag[c]   = {cs_qid_q, KMER_BITS'(cs_uid_q)};
      end
    end
  end
  assign dk_ready     = off_phase && ch_req_ready[off_pa.ch];
  assign cs_out_ready = col_phase && ch_req_ready[col_pa.ch];

  // ------------------------------------------------------------------
  // response arbiter: one channel result per cycle, round-robin
  // ------------------------------------------------------------------
  logic [CH_W-1:0] rsp_rr, rsp_sel;
  logic            rsp_any, rsp_take;
  always_comb begin
    rsp_any = 1'b0;
    rsp_sel = '0;
    for (int i = 0; i < NUM_CH; i++) begin
      automatic logic [CH_W-1:0] c = CH_W'((int'(rsp_rr) + i) % NUM_CH);
      if (!rsp_any && ch_rsp_valid[c]) begin
        rsp_any = 1'b1;
        rsp_sel = c;
      end
    end
  end

  die_rsp_t         r_data;
  logic [QID_W-1:0] r_qid;
  logic [KMER_BITS-1:0] r_kmer;
  assign r_data = ch_rsp_data[rsp_sel];
  assign {r_qid, r_kmer} = ch_rsp_tag[rsp_sel];

  // Offsets result -> GST insert
  phys_addr_t            str_pa;
  logic [BYTE_OFF_W-1:0] str_byte;
  logic [$clog2(NUM_DIES)-1:0] str_gdie;
  rr_addr_map u_map_str (
    .base_page(strings_base), .byte_addr(48'(r_data.data >> 2)), .pa(str_pa), .byte_off(str_byte)
  );
  assign str_gdie = {str_pa.ch, str_pa.die};

  always_comb begin
    gst_ins_row            = ROW_W'(str_pa.page - strings_plane_base);
    gst_ins_entry.bit_off  = {str_byte, r_data.data[1:0], 1'b0};
    gst_ins_entry.kmer     = r_kmer;
    gst_ins_entry.qid      = r_qid;
    gst_ins_entry.plane_oh = PLANES'(1) << str_pa.plane;
    for (int g = 0; g < NUM_DIES; g++)
      gst_ins_valid[g] = off_phase && rsp_any && (int'(str_gdie) == g);
  end

  // unitig-ID buffer (internal-DRAM region holding the hits of a batch)
  localparam int unsigned UW = $clog2(UID_DEPTH);
  logic [QID_W+UNITIG_W-1:0] uid_mem [UID_DEPTH];
  logic [UW:0]               uid_wp, uid_rp;
  wire uid_full  = (uid_wp - uid_rp) == (UW+1)'(UID_DEPTH);
  wire uid_empty = (uid_wp == uid_rp);

  always_comb begin
    // every result is taken at once: overflows are rejected, not held
    rsp_take = rsp_any;
    for (int c = 0; c < NUM_CH; c++) ch_rsp_ready[c] = rsp_take && (rsp_sel == CH_W'(c));
  end

  // ------------------------------------------------------------------
  // stage 3: Colors
  // ------------------------------------------------------------------
  logic cs_uid_ready;
  wire [QID_W+UNITIG_W-1:0] uid_head = uid_mem[uid_rp[UW-1:0]];

  color_scan #(.AW(48)) u_cs (
    .clk, .rst_n, .colors_base(48'd0),
    .uid_valid(col_phase && !uid_empty), .uid_ready(cs_uid_ready), .uid(uid_head[UNITIG_W-1:0]),
    .bm_valid, .bm_ready, .bm_data, .bm_rewind,
    .out_valid(cs_out_valid), .out_ready(cs_out_ready),
    .color_idx(cs_color_idx), .color_addr(cs_color_addr)
  );

  // ------------------------------------------------------------------
  // sequential: buffers, results, done flags, counters
  // ------------------------------------------------------------------
  logic drain_seen;
  wire  all_idle = (ch_idle == '1);

  assign off_done = off_phase && in_done_q && all_idle && !dk_valid && !rsp_any;
  assign str_done = str_phase && drain_seen && (gst_busy == '0) && all_idle && !rsp_any;
  assign col_done = col_phase && uid_empty && !cs_out_valid && all_idle && !rsp_any;

  function automatic int unsigned multi_reads();
    multi_reads = 0;
    for (int g = 0; g < NUM_DIES; g++)
      if (nd_rd[g] && $countones(nd_mask[g]) > 1) multi_reads++;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_done_q      <= 1'b0;
      drain_seen     <= 1'b0;
      rsp_rr         <= '0;
      uid_wp         <= '0;
      uid_rp         <= '0;
      cs_qid_q       <= '0;
      cs_uid_q       <= '0;
      res_valid      <= 1'b0;
      res_retry      <= 1'b0;
      res_qid        <= '0;
      res_match      <= 1'b0;
      res_unitig     <= '0;
      res_color      <= '0;
      cnt_stall      <= '0;
      cnt_reuse      <= '0;
      cnt_multiplane <= '0;
      cnt_ext        <= '0;
      cnt_rewind     <= '0;
      cnt_miss       <= '0;
      cnt_ovf        <= '0;
      cnt_hit        <= '0;
    end else begin
      res_valid <= 1'b0;
      res_retry <= 1'b0;
      if (q_valid && q_ready && q_last) in_done_q <= 1'b1;
      if (batch_done)                   in_done_q <= 1'b0;
      if (drain_start)                  drain_seen <= 1'b1;
      if (batch_done)                   drain_seen <= 1'b0;

      if (rsp_take) begin
        rsp_rr <= CH_W'((int'(rsp_sel) + 1) % NUM_CH);
        if (off_phase && !gst_ins_ready[str_gdie]) begin
          // the die's GST is full: reject the k-mer
          res_valid  <= 1'b1;
          res_qid    <= r_qid;
          res_match  <= 1'b0;
          res_retry  <= 1'b1;
          res_unitig <= '0;
          res_color  <= '0;
          cnt_ovf    <= cnt_ovf + 1;
        end else if (str_phase && r_data.match && uid_full) begin
          // no room for the unitig ID: reject the k-mer
          res_valid  <= 1'b1;
          res_qid    <= r_qid;
          res_match  <= 1'b0;
          res_retry  <= 1'b1;
          res_unitig <= '0;
          res_color  <= '0;
          cnt_ovf    <= cnt_ovf + 1;
        end else if (str_phase) begin
          if (r_data.match) begin
            uid_mem[uid_wp[UW-1:0]] <= {r_qid, r_data.data};
            uid_wp <= uid_wp + 1'b1;
          end else begin
            res_valid  <= 1'b1;
            res_qid    <= r_qid;
            res_match  <= 1'b0;
            res_unitig <= '0;
            res_color  <= '0;
            cnt_miss   <= cnt_miss + 1;
          end
        end else if (col_phase) begin
          res_valid  <= 1'b1;
          res_qid    <= r_qid;
          res_match  <= 1'b1;
          res_unitig <= UNITIG_W'(r_kmer);
          res_color  <= r_data.data;
          cnt_hit    <= cnt_hit + 1;
        end
      end

      if (cs_uid_ready) begin
        uid_rp   <= uid_rp + 1'b1;
        cs_qid_q <= uid_head[QID_W+UNITIG_W-1:UNITIG_W];
        cs_uid_q <= uid_head[UNITIG_W-1:0];
      end

      cnt_stall      <= cnt_stall + 32'($countones(ch_stall));
      cnt_reuse      <= cnt_reuse + 32'($countones(pe_reuse));
      cnt_multiplane <= cnt_multiplane + 32'(multi_reads());
      cnt_ext        <= cnt_ext + 32'($countones(gst_ext));
      cnt_rewind     <= cnt_rewind + 32'(bm_rewind);
    end
  end

  // the stages never share a cycle on the result port
  assert property (@(posedge clk) disable iff (!rst_n)
                   rsp_take |-> (phase inside {PH_OFFSETS, PH_STRINGS, PH_COLORS}));

endmodule
