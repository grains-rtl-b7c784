// tb_ifp_pe: checks one in-flash processing element against a behavioural
// NAND die. A random mix of SELECT and COMPARE commands goes to random
// planes and a small set of pages (so page-buffer reuse happens), some with
// multi-plane masks. The testbench keeps its own copy of which page each
// plane buffer holds and checks, per command: the result (entry, or
// match/position/unitig ID from a bit-level reference search), whether a
// page sense happened or the buffer was reused, and the latency
// (at least T_R cycles when a sense was needed, under 40 cycles otherwise).
module tb_ifp_pe;
  import grains_pkg::*;
  localparam int T_R = 20;
  localparam int NPOS = K - M + 1;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge, so the asynchronous reset fires
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid = 0, cmd_ready, rsp_valid, rsp_ack = 0;
  die_cmd_t cmd = '0;
  die_rsp_t rsp;
  logic nd_rd, nd_done, pb_rd, page_reuse;
  logic [PAGE_ADDR_W-1:0] nd_page;
  logic [PLANES-1:0] nd_mask;
  logic [PLANE_W-1:0] pb_plane;
  logic [COL_W-1:0] pb_col;
  logic [WORD_BITS-1:0] pb_data;

  ifp_pe dut (.*);
  nand_die_model #(.DIE(0), .T_R(T_R)) u_die (.*);

  int reuse_seen = 0;
  always_ff @(posedge clk) if (page_reuse) reuse_seen <= reuse_seen + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endfunction

  int unsigned tb_loaded [PLANES];
  bit          tb_valid  [PLANES];
  int n_reuse = 0, n_sense = 0, n_hit = 0, n_miss = 0, n_sel = 0;

  initial begin
    for (int p = 0; p < PLANES; p++) begin tb_valid[p] = 0; tb_loaded[p] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int n = 0; n < 400; n++) begin
      die_cmd_t c;
      bit expect_sense;
      int lat, reads0, reuse0, exp_pos;
      logic exp_match;
      logic [31:0] exp_data;
      c = '0;
      c.op = ifp_op_e'($urandom_range(0, 1));
      c.page = PAGE_ADDR_W'($urandom_range(0, 3));
      c.plane = PLANE_W'($urandom_range(0, PLANES - 1));
      c.plane_mask = ($urandom_range(0, 3) == 0) ? PLANES'($urandom) : '0;
      if (c.op == OP_SELECT) begin
        c.bit_off = BIT_OFF_W'($urandom_range(0, PAGE_BYTES - 4) * 8);
        exp_data = flash_store_pkg::peek_bits(0, c.plane, c.page, c.bit_off, 32);
        exp_match = 0; exp_pos = 0;
      end else begin
        int b;
        b = 32 * $urandom_range(1, PAGE_WORDS - 5) + 2 * $urandom_range(0, 15);
        c.bit_off = BIT_OFF_W'(b);
        c.kmer = {$urandom, $urandom};
        if ($urandom_range(0, 2) != 0)
          flash_store_pkg::poke_bits(0, c.plane, c.page, b + 2 * $urandom_range(0, NPOS - 1),
                                     KMER_BITS, 64'(c.kmer));
        exp_match = 0; exp_pos = 0;
        for (int q = 0; q < NPOS && !exp_match; q++)
          if (flash_store_pkg::peek_bits(0, c.plane, c.page, b + 2 * q, KMER_BITS) == 64'(c.kmer)) begin
            exp_match = 1; exp_pos = q;
          end
        exp_data = exp_match ? flash_store_pkg::peek(0, c.plane, c.page, b / 32 - 1) : '0;
      end
      expect_sense = !(tb_valid[c.plane] && tb_loaded[c.plane] == int'(c.page));
      if (expect_sense)
        for (int p = 0; p < PLANES; p++)
          if (c.plane_mask[p] || p == int'(c.plane)) begin tb_valid[p] = 1; tb_loaded[p] = c.page; end
      reads0 = u_die.reads;
      reuse0 = reuse_seen;
      @(negedge clk);
      check(cmd_ready, "cmd_ready while idle");
      cmd_valid = 1; cmd = c;
      @(negedge clk);
      cmd_valid = 0;
      lat = 1;
      while (!rsp_valid && lat < 1000) begin @(negedge clk); lat++; end
      check(rsp.data === exp_data && rsp.match === exp_match &&
            (!exp_match || int'(rsp.pos) == exp_pos),
            $sformatf("result op=%0d got m=%0d p=%0d d=%h exp m=%0d p=%0d d=%h",
                      c.op, rsp.match, rsp.pos, rsp.data, exp_match, exp_pos, exp_data));
      check((u_die.reads - reads0) == (expect_sense ? 1 : 0), "page sense count");
      check((reuse_seen - reuse0) == (expect_sense ? 0 : 1), "page_reuse pulse");
      if (expect_sense) check(lat > T_R, $sformatf("latency %0d with sense", lat));
      else check(lat < 40, $sformatf("latency %0d without sense", lat));
      if (expect_sense) n_sense++; else n_reuse++;
      if (c.op == OP_SELECT) n_sel++; else if (exp_match) n_hit++; else n_miss++;
      repeat ($urandom_range(0, 2)) @(negedge clk);
      rsp_ack = 1;
      @(negedge clk);
      rsp_ack = 0;
    end
    check(n_reuse > 0 && n_sense > 0 && n_hit > 0 && n_miss > 0 && n_sel > 0, "coverage");
    $display("senses=%0d reuses=%0d selects=%0d hits=%0d misses=%0d", n_sense, n_reuse, n_sel, n_hit, n_miss);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
