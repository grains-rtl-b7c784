// tb_grains_top: end-to-end test of the GRAINS query engine at its full
// size (16 channels x 8 dies, 4 planes, 4 KiB pages, default parameters),
// with one behavioural NAND die per die port.
//
// Test data (built in the simulated flash array before the run):
//  * Strings: 64 pages of the Strings structure (structure pages 0..31 and
//    128..159, so pages 128 apart share a die and page index but sit in
//    different planes), each holding 24 windows of random bases with the
//    unitig ID in the column word before the window;
//  * Offsets: entry i = Strings base position of the window of query i;
//  * Color Bitmap: one bit per unitig, streamed by a source model that
//    restarts on bm_rewind; Colors: one random 32-bit entry per color.
// Three batches are sent, as the host would, in compacted form:
//  0) 600 queries (70% taken from windows, 30% random) spread over all
//     Strings pages, so rows hold several accesses (coalescing, extension
//     rows, multi-plane reads);
//  1) 300 queries that all hit windows of one Strings page, more than one
//     GST can hold, so the excess is rejected with res_retry;
//  2) the rejected queries again plus 100 new ones, marked as the last batch.
// Checks: every query gets exactly one result; for processed queries the
// match flag, unitig ID and color equal a reference computed from the flash
// contents (first matching position in the window, bit count of the bitmap,
// Colors entry); the number rejected in batch 1 equals the queries beyond one
// GST's capacity (SLOTS x (EXT_ROWS + 1)); during batch 0's Strings stage
// there is exactly one page sense per non-empty GST row (coalescing); the
// FSM returns to conventional mode. Each mechanism (channel stall, page
// buffer reuse, multi-plane read, extension row, bitmap rewind, miss, hit,
// overflow) must have happened at least once, and the hit/miss counters must
// match the results.
module tb_grains_top;
  import grains_pkg::*;
  import grains_phase_pkg::*;

  localparam int STRIPE  = NUM_DIES * PLANES;
  localparam int SPP     = 24;                      // windows per Strings page
  localparam int NPG     = 64;                      // Strings pages used
  localparam int NU      = NPG * SPP;               // unitigs
  localparam int NCHUNK  = (NU + 31) / 32;
  localparam int NPOS    = K - M + 1;
  localparam int SLOTS   = 4, EXT = 64;             // GST defaults
  localparam longint OFF_BASE = 0;
  localparam longint STR_BASE = 2 * STRIPE;
  localparam longint COL_BASE = STR_BASE + 256 * STRIPE;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge, so the asynchronous reset fires
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ---------------- DUT ----------------
  logic cmd_start = 0, cmd_step = 0, cmd_last = 0, prep_done = 0;
  logic scc_mode, batch_done;
  phase_e phase;
  logic q_valid = 0, q_ready, q_last = 0;
  cq_word_t q_word = '0;
  logic res_valid, res_match, res_retry;
  logic [QID_W-1:0] res_qid;
  logic [UNITIG_W-1:0] res_unitig;
  logic [ENTRY_BITS-1:0] res_color;
  logic bm_valid, bm_ready, bm_rewind;
  logic [31:0] bm_data;
  logic nd_rd [NUM_DIES], nd_done [NUM_DIES], pb_rd [NUM_DIES];
  logic [PAGE_ADDR_W-1:0] nd_page [NUM_DIES];
  logic [PLANES-1:0] nd_mask [NUM_DIES];
  logic [PLANE_W-1:0] pb_plane [NUM_DIES];
  logic [COL_W-1:0] pb_col [NUM_DIES];
  logic [WORD_BITS-1:0] pb_data [NUM_DIES];
  logic [31:0] cnt_stall, cnt_reuse, cnt_multiplane, cnt_ext, cnt_rewind, cnt_miss, cnt_ovf, cnt_hit;

  grains_top dut (
    .clk, .rst_n, .cmd_start, .cmd_step, .cmd_last, .prep_done, .scc_mode, .batch_done, .phase,
    .offsets_base(48'(OFF_BASE)), .strings_base(48'(STR_BASE)), .colors_base(48'(COL_BASE)),
    .q_valid, .q_ready, .q_word, .q_last,
    .res_valid, .res_qid, .res_match, .res_unitig, .res_color, .res_retry,
    .bm_valid, .bm_ready, .bm_data, .bm_rewind,
    .nd_rd, .nd_page, .nd_mask, .nd_done, .pb_rd, .pb_plane, .pb_col, .pb_data,
    .cnt_stall, .cnt_reuse, .cnt_multiplane, .cnt_ext, .cnt_rewind, .cnt_miss, .cnt_ovf, .cnt_hit
  );

  for (genvar g = 0; g < NUM_DIES; g++) begin : g_die
    nand_die_model #(.DIE(g), .T_R(20)) u_die (
      .clk, .nd_rd(nd_rd[g]), .nd_page(nd_page[g]), .nd_mask(nd_mask[g]), .nd_done(nd_done[g]),
      .pb_rd(pb_rd[g]), .pb_plane(pb_plane[g]), .pb_col(pb_col[g]), .pb_data(pb_data[g])
    );
  end

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endfunction

  // ---------------- structure placement (round-robin mapping) ----------------
  typedef struct { int die; int plane; int page; int col; int bit_in_word; } loc_t;
  function automatic loc_t locate(longint base, longint bit_addr);
    loc_t l;
    longint g;
    g = base + bit_addr / (PAGE_BYTES * 8);
    l.die   = int'(g % NUM_CH) * DIES_PER_CH + int'((g / NUM_CH) % DIES_PER_CH);
    l.plane = int'((g / NUM_DIES) % PLANES);
    l.page  = int'(g / STRIPE);
    l.col   = int'((bit_addr % (PAGE_BYTES * 8)) / 32);
    l.bit_in_word = int'(bit_addr % 32);
    return l;
  endfunction
  function automatic void put_word(longint base, longint byte_addr, logic [31:0] v);
    loc_t l = locate(base, byte_addr * 8);
    flash_store_pkg::poke(l.die, l.plane, l.page, l.col, v);
  endfunction
  function automatic logic [31:0] get_word(longint base, longint byte_addr);
    loc_t l = locate(base, byte_addr * 8);
    return flash_store_pkg::peek(l.die, l.plane, l.page, l.col);
  endfunction
  function automatic logic [63:0] get_bits(longint base, longint bit_addr, int n);
    loc_t l = locate(base, bit_addr);
    return flash_store_pkg::peek_bits(l.die, l.plane, l.page, l.col * 32 + l.bit_in_word, n);
  endfunction

  // ---------------- graph data ----------------
  int unsigned win_pos [NU];       // Strings base position of unitig u's window
  logic [31:0] bitmap [NCHUNK];
  int unsigned color_of [NU];

  function automatic int strings_page(int i);   // i-th used Strings page
    return (i < 32) ? i : 128 + (i - 32);
  endfunction

  // ---------------- queries and expected results ----------------
  typedef struct { logic [KMER_BITS-1:0] kmer; int oidx; bit match; int uid; logic [31:0] color; } q_t;
  q_t qs [$];
  int got [int];

  function automatic q_t make_query(int u, bit hit);
    q_t q;
    longint b;
    q.oidx = qs.size();
    b = 2 * longint'(win_pos[u]);
    if (hit) q.kmer = KMER_BITS'(get_bits(STR_BASE, b + 2 * $urandom_range(0, NPOS - 1), KMER_BITS));
    else     q.kmer = {$urandom, $urandom};
    // reference: first matching position in the window
    q.match = 0;
    for (int p = 0; p < NPOS && !q.match; p++)
      if (KMER_BITS'(get_bits(STR_BASE, b + 2 * p, KMER_BITS)) == q.kmer) q.match = 1;
    q.uid   = q.match ? int'(get_word(STR_BASE, (b / 32 - 1) * 4)) : 0;
    q.color = q.match ? get_word(COL_BASE, 4 * longint'(color_of[q.uid])) : '0;
    put_word(OFF_BASE, 4 * longint'(q.oidx), win_pos[u]);
    return q;
  endfunction

  // ---------------- Color Bitmap source ----------------
  int bm_ptr = 0;
  assign bm_valid = rst_n && bm_ptr < NCHUNK;
  assign bm_data  = (bm_ptr < NCHUNK) ? bitmap[bm_ptr] : '0;
  always @(posedge clk) begin
    if (bm_rewind) bm_ptr <= 0;
    else if (bm_valid && bm_ready) bm_ptr <= bm_ptr + 1;
  end

  // ---------------- result monitor ----------------
  int n_res = 0, n_retry = 0, n_hit = 0, n_miss = 0;
  int retry_q [$];
  always @(posedge clk) if (rst_n && res_valid) begin
    int q;
    q = int'(res_qid);
    n_res++;
    check(q < qs.size(), $sformatf("result for unknown query %0d", q));
    if (q < qs.size()) begin
      check(!got.exists(q), $sformatf("second result for query %0d", q));
      got[q] = 1;
      if (res_retry) begin
        n_retry++;
        retry_q.push_back(q);
      end else begin
        if (res_match) n_hit++; else n_miss++;
        check(res_match == qs[q].match, $sformatf("query %0d match %0d exp %0d", q, res_match, qs[q].match));
        if (qs[q].match && res_match)
          check(int'(res_unitig) == qs[q].uid && res_color == qs[q].color,
                $sformatf("query %0d unitig %0d/%0d color %h/%h", q, res_unitig, qs[q].uid,
                          res_color, qs[q].color));
      end
    end
  end

  // page senses while the Strings stage runs
  int str_senses = 0;
  always @(posedge clk) if (rst_n && phase == PH_STRINGS)
    for (int g = 0; g < NUM_DIES; g++) if (nd_rd[g]) str_senses++;

  // ---------------- host ----------------
  task automatic send_batch(int first, int last_q, bit is_last);
    cq_word_t words [$];
    logic [2*M-1:0] cur_mini;
    bit have_mini;
    have_mini = 0;
    for (int i = first; i <= last_q; i++) begin
      int pre;
      logic [2*M-1:0] mini;
      cq_word_t w;
      pre  = $urandom_range(0, K - M);
      mini = (2*M)'(qs[i].kmer >> (2 * pre));
      if (!have_mini || mini != cur_mini) begin
        w = '0; w.hdr = 1; w.minimizer = mini;
        words.push_back(w);
        cur_mini = mini; have_mini = 1;
      end
      w = '0;
      w.pre_len = POS_W'(pre);
      w.diff = (2*(K-M))'((qs[i].kmer & ((KMER_BITS'(1) << (2 * pre)) - 1)) |
                          ((qs[i].kmer >> (2 * (pre + M))) << (2 * pre)));
      w.qid  = QID_W'(i);
      w.oidx = OIDX_W'(qs[i].oidx);
      words.push_back(w);
    end
    @(negedge clk);
    cmd_step = 1; cmd_last = is_last;
    @(negedge clk);
    cmd_step = 0; cmd_last = 0;
    foreach (words[j]) begin
      q_valid = 1; q_word = words[j]; q_last = (j == words.size() - 1);
      @(posedge clk);
      while (!q_ready) @(posedge clk);
      @(negedge clk);
    end
    q_valid = 0; q_last = 0;
    @(posedge clk);
    while (!batch_done) @(posedge clk);
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog: phase %s, %0d results", phase.name(), n_res);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nb0, nb1, rows0, exp_rej;
    // Strings windows
    for (int i = 0; i < NPG; i++)
      for (int s = 0; s < SPP; s++) begin
        int u, w, b0;
        longint pg_bits;
        u  = i * SPP + s;
        w  = 1 + 40 * s;
        b0 = $urandom_range(0, 15);
        pg_bits = longint'(strings_page(i)) * PAGE_BYTES * 8;
        win_pos[u] = int'((pg_bits + 32 * (w + 1) + 2 * b0) / 2);
        put_word(STR_BASE, (pg_bits / 8) + 4 * w, u);
        for (int j = 1; j <= 4; j++) put_word(STR_BASE, (pg_bits / 8) + 4 * (w + j), $urandom);
      end
    // Color Bitmap ('1' on the last unitig of a color) and Colors
    begin
      int c;
      c = 0;
      for (int u = 0; u < NCHUNK * 32; u++) begin
        bit one;
        one = (u < NU) && ($urandom_range(0, 5) == 0);
        bitmap[u / 32][u % 32] = one;
        if (u < NU) begin
          color_of[u] = c;
          if (one) c++;
        end
      end
      for (int i = 0; i <= c; i++) put_word(COL_BASE, 4 * i, $urandom);
    end
    // batch 0: spread, batch 1: one page, more than a GST holds
    for (int n = 0; n < 600; n++) qs.push_back(make_query($urandom_range(0, NU - 1), $urandom_range(0, 9) < 7));
    nb0 = qs.size();
    for (int n = 0; n < 300; n++) qs.push_back(make_query(5 * SPP + $urandom_range(0, SPP - 1), 1));
    nb1 = qs.size();
    exp_rej = 300 - SLOTS * (EXT + 1);
    // non-empty GST rows of batch 0: distinct (die, row) of its windows
    begin
      bit seen [int];
      for (int i = 0; i < nb0; i++) begin
        loc_t l;
        l = locate(STR_BASE, 2 * longint'(get_word(OFF_BASE, 4 * i)));
        seen[l.die * 1024 + l.page] = 1;
      end
      rows0 = seen.num();
    end

    repeat (5) @(posedge clk);
    rst_n = 1;
    @(negedge clk); cmd_start = 1;
    @(negedge clk); cmd_start = 0;
    repeat (10) @(negedge clk);
    prep_done = 1;
    @(negedge clk); prep_done = 0;

    send_batch(0, nb0 - 1, 0);
    check(str_senses == rows0, $sformatf("batch 0: %0d page senses for %0d GST rows", str_senses, rows0));
    send_batch(nb0, nb1 - 1, 0);
    repeat (3) @(posedge clk);
    check(n_retry == exp_rej, $sformatf("batch 1: %0d rejected, expected %0d", n_retry, exp_rej));
    // batch 2: resend the rejected ones as new queries, plus new queries
    begin
      int r0;
      r0 = qs.size();
      foreach (retry_q[i]) begin
        q_t q;
        q = qs[retry_q[i]];
        q.oidx = qs.size();
        put_word(OFF_BASE, 4 * longint'(q.oidx), get_word(OFF_BASE, 4 * longint'(qs[retry_q[i]].oidx)));
        qs.push_back(q);
      end
      for (int n = 0; n < 100; n++) qs.push_back(make_query($urandom_range(0, NU - 1), $urandom_range(0, 1)));
      send_batch(r0, qs.size() - 1, 1);
    end
    repeat (5) @(posedge clk);
    check(n_res == qs.size(), $sformatf("%0d results for %0d queries", n_res, qs.size()));
    check(n_retry == exp_rej, "no rejects in the last batch");
    check(phase == PH_CONV && !scc_mode, "back in conventional mode");
    check(int'(cnt_hit) == n_hit && int'(cnt_miss) == n_miss && int'(cnt_ovf) == n_retry,
          $sformatf("counters hit %0d/%0d miss %0d/%0d ovf %0d/%0d", cnt_hit, n_hit, cnt_miss, n_miss,
                    cnt_ovf, n_retry));
    check(cnt_stall > 0, "no channel stall");
    check(cnt_reuse > 0, "no page buffer reuse (coalescing)");
    check(cnt_multiplane > 0, "no multi-plane read");
    check(cnt_ext > 0, "no GST extension row");
    check(cnt_rewind > 0, "no bitmap rewind");
    check(cnt_miss > 0, "no miss");
    check(cnt_hit > 0, "no hit");
    check(cnt_ovf > 0, "no overflow");
    $display("cycles=%0t results=%0d hits=%0d misses=%0d retries=%0d", $time / 10, n_res, n_hit, n_miss, n_retry);
    $display("stall=%0d reuse=%0d multiplane=%0d ext=%0d rewind=%0d ovf=%0d", cnt_stall, cnt_reuse,
             cnt_multiplane, cnt_ext, cnt_rewind, cnt_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
