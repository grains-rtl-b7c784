// tb_gst_table: checks the per-die scheduler table (small instance: 16 rows,
// 2 slots, 4 extension rows) over several insert/drain rounds. Inserts go to
// random rows, skewed so some rows chain into extension rows and the
// extension table runs out. A reference model of per-row queues predicts
// ins_ready (overflow back-pressure) and ext_alloc for every insert. The drain
// must return every stored access once, rows in ascending order, accesses of
// a row in insertion order, with the row's OR-ed plane mask and drn_first on
// the first one. With drn_ready held high the walk must take one cycle per
// empty row plus one per access.
module tb_gst_table;
  import grains_pkg::*;
  localparam int ROWS = 16, SLOTS = 2, EXT = 4;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge, so the asynchronous reset fires
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ins_valid = 0, ins_ready, drn_start = 0, drn_busy, drn_valid, drn_ready = 0;
  logic drn_first, empty, ext_alloc;
  logic [3:0] ins_row = '0, drn_row;
  gst_entry_t ins_entry = '0, drn_entry;
  logic [PLANES-1:0] drn_mask;

  gst_table #(.ROWS(ROWS), .SLOTS(SLOTS), .EXT_ROWS(EXT)) dut (.*);

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  gst_entry_t q [ROWS][$];
  int n_overflow = 0, n_ext = 0;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 8; round++) begin
      int ext_used, n_ins, total, cyc, nonempty;
      bit full_ready;
      ext_used = 0; total = 0;
      full_ready = (round % 2 == 0);
      n_ins = $urandom_range(5, 40);
      for (int i = 0; i < n_ins; i++) begin
        gst_entry_t e;
        int r;
        bit need_ext, exp_ready;
        r = ($urandom_range(0, 2) == 0) ? $urandom_range(0, ROWS - 1) : $urandom_range(0, 2);
        e.bit_off = BIT_OFF_W'($urandom);
        e.kmer = {$urandom, $urandom};
        e.qid = QID_W'(round * 1000 + i);
        e.plane_oh = PLANES'(1) << $urandom_range(0, PLANES - 1);
        need_ext = q[r].size() > 0 && q[r].size() % SLOTS == 0;
        exp_ready = !need_ext || ext_used < EXT;
        @(negedge clk);
        ins_valid = 1; ins_row = 4'(r); ins_entry = e;
        #1;
        check(ins_ready == exp_ready, $sformatf("ins_ready=%0d exp %0d (row %0d size %0d ext %0d)",
                                                ins_ready, exp_ready, r, q[r].size(), ext_used));
        check(ext_alloc == (exp_ready && need_ext), "ext_alloc");
        if (ins_ready) begin
          q[r].push_back(e);
          total++;
          if (need_ext) begin ext_used++; n_ext++; end
        end else n_overflow++;
        @(negedge clk);
        ins_valid = 0;
      end
      check(empty == (total == 0), "empty flag before drain");
      // drain
      @(negedge clk);
      drn_start = 1;
      @(negedge clk);
      drn_start = 0;
      cyc = 0;
      nonempty = 0;
      for (int r = 0; r < ROWS; r++) if (q[r].size() > 0) nonempty++;
      begin
        int last_row;
        logic [PLANES-1:0] m;
        last_row = -1;
        m = '0;
        while (drn_busy) begin
          drn_ready = full_ready ? 1'b1 : 1'($urandom_range(0, 1));
          #1;
          if (drn_valid && drn_ready) begin
            int r;
            gst_entry_t e;
            r = int'(drn_row);
            check(r >= last_row, $sformatf("row order %0d after %0d", r, last_row));
            check(q[r].size() > 0, $sformatf("access from empty row %0d", r));
            if (q[r].size() > 0) begin
              if (r != last_row) begin
                m = '0;
                foreach (q[r][j]) m |= q[r][j].plane_oh;
              end
              check(drn_first == (r != last_row), "drn_first");
              check(drn_mask == m, $sformatf("plane mask %b exp %b", drn_mask, m));
              e = q[r].pop_front();
              check(drn_entry == e, $sformatf("entry of row %0d", r));
            end
            last_row = r;
          end
          @(negedge clk);
          cyc++;
        end
      end
      drn_ready = 0;
      for (int r = 0; r < ROWS; r++) check(q[r].size() == 0, $sformatf("row %0d not drained", r));
      check(empty, "empty after drain");
      if (full_ready) begin
        // one cycle per access plus one per empty row
        check(cyc == ROWS - nonempty + total,
              $sformatf("drain took %0d cycles for %0d accesses in %0d rows", cyc, total, nonempty));
      end
    end
    check(n_overflow > 0, "overflow back-pressure never seen");
    check(n_ext > 0, "extension rows never used");
    $display("overflows=%0d ext_allocs=%0d", n_overflow, n_ext);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
