// tb_ifp_compare: checks the on-die k-mer comparison unit. For random window
// addresses it plants the query k-mer at a random candidate position (or
// uses a random k-mer that is absent), and compares match/position with a
// bit-level reference search. It also checks the cycle count:
// WIN_WORDS+4 cycles from start to done for a hit at position 0, plus one
// per further position tried.
module tb_ifp_compare;
  import grains_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge, so the asynchronous reset fires
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int NPOS = K - M + 1;
  localparam int WIN_WORDS = (2 * (2 * K - M) + WORD_BITS - 2 + WORD_BITS - 1) / WORD_BITS;

  logic [WORD_BITS-1:0] page [PAGE_WORDS];
  logic start = 0, busy, pb_rd, done, match;
  logic [BIT_OFF_W-1:0] bit_off = '0;
  logic [KMER_BITS-1:0] kmer = '0;
  logic [COL_W-1:0] pb_col;
  logic [WORD_BITS-1:0] pb_data;
  logic [POS_W-1:0] pos;

  ifp_compare dut (.*);

  always_ff @(posedge clk) if (pb_rd) pb_data <= page[pb_col];

  function automatic logic get_bit(int b);
    return page[b / 32][b % 32];
  endfunction
  function automatic void set_bit(int b, logic v);
    page[b / 32][b % 32] = v;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < PAGE_WORDS; i++) page[i] = $urandom;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int n = 0; n < 300; n++) begin
      int b, p, lat, exp_pos;
      logic exp_match;
      logic [KMER_BITS-1:0] km;
      b = 2 * $urandom_range(0, (PAGE_BYTES * 8 - 4 * WORD_BITS) / 2);
      km = {$urandom, $urandom};
      if (n % 3 != 2) begin
        p = $urandom_range(0, NPOS - 1);
        for (int i = 0; i < KMER_BITS; i++) set_bit(b + 2 * p + i, km[i]);
      end
      // reference search
      exp_match = 0; exp_pos = 0;
      for (int q = 0; q < NPOS && !exp_match; q++) begin
        logic eq;
        eq = 1;
        for (int i = 0; i < KMER_BITS; i++) if (get_bit(b + 2 * q + i) != km[i]) eq = 0;
        if (eq) begin exp_match = 1; exp_pos = q; end
      end
      @(negedge clk);
      start = 1; bit_off = BIT_OFF_W'(b); kmer = km;
      @(negedge clk);
      start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (match !== exp_match || (exp_match && int'(pos) != exp_pos)) begin
        failures++;
        $display("FAIL b=%0d match=%0d/%0d pos=%0d/%0d", b, match, exp_match, pos, exp_pos);
      end
      checks++;
      if (lat != WIN_WORDS + 4 + (exp_match ? exp_pos : NPOS - 1)) begin
        failures++;
        $display("FAIL latency %0d (match=%0d pos=%0d)", lat, exp_match, exp_pos);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
