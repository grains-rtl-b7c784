// tb_kmer_decompact: checks k-mer re-assembly from a compacted batch. The
// testbench draws random k-mers grouped by minimizer position, compacts them
// itself (header word with the minimizer, then per k-mer the prefix and
// suffix bases and the prefix length), streams the words with random output
// back-pressure and checks that every k-mer, query ID and Offsets index comes
// back unchanged and in order, and that headers produce no output. One word
// is consumed per cycle when the output is ready.
module tb_kmer_decompact;
  import grains_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge, so the asynchronous reset fires
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  cq_word_t in_word = '0;
  logic [KMER_BITS-1:0] out_kmer;
  logic [QID_W-1:0] out_qid;
  logic [OIDX_W-1:0] out_oidx;

  kmer_decompact dut (.*);

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

  typedef struct { logic [KMER_BITS-1:0] k; int q; longint o; } exp_t;
  exp_t exp_q [$];
  cq_word_t words [$];
  int n_out = 0;

  always @(negedge clk) out_ready = 1'($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    exp_t e;
    e = exp_q.pop_front();
    check(out_kmer == e.k && int'(out_qid) == e.q && longint'(out_oidx) == e.o,
          $sformatf("k-mer %h exp %h qid %0d exp %0d", out_kmer, e.k, out_qid, e.q));
    n_out++;
  end

  initial begin
    int qid, busy_cycles;
    qid = 0;
    // build the compacted stream
    for (int g = 0; g < 60; g++) begin
      logic [2*M-1:0] mini;
      cq_word_t h;
      mini = {$urandom, $urandom};
      h = '0; h.hdr = 1; h.minimizer = mini;
      words.push_back(h);
      for (int j = 0; j < $urandom_range(1, 8); j++) begin
        int pre;
        logic [KMER_BITS-1:0] km;
        logic [2*(K-M)-1:0] pre_b, suf_b;
        cq_word_t w;
        exp_t e;
        pre = $urandom_range(0, K - M);
        pre_b = {$urandom};
        suf_b = {$urandom};
        // k-mer = pre bases, then the minimizer, then K-M-pre suffix bases
        km = '0;
        for (int b = 0; b < K; b++) begin
          logic [1:0] base;
          if (b < pre) base = pre_b[2*b +: 2];
          else if (b < pre + M) base = mini[2*(b-pre) +: 2];
          else base = suf_b[2*(b-pre-M) +: 2];
          km[2*b +: 2] = base;
        end
        w = '0;
        w.pre_len = POS_W'(pre);
        for (int b = 0; b < pre; b++) w.diff[2*b +: 2] = km[2*b +: 2];
        for (int b = pre + M; b < K; b++) w.diff[2*(b-M) +: 2] = km[2*b +: 2];
        w.qid = QID_W'(qid);
        w.oidx = OIDX_W'({$urandom, $urandom});
        e.k = km; e.q = qid; e.o = longint'(w.oidx);
        exp_q.push_back(e);
        words.push_back(w);
        qid++;
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    busy_cycles = 0;
    foreach (words[i]) begin
      @(negedge clk);
      in_valid = 1; in_word = words[i];
      #1;
      while (!in_ready) begin
        check(!in_word.hdr, "header must never wait");
        @(negedge clk); #1;
      end
      check(in_word.hdr ? !out_valid : out_valid, "output only for k-mer words");
    end
    @(negedge clk);
    in_valid = 0;
    repeat (5) @(posedge clk);
    check(exp_q.size() == 0 && n_out == qid, $sformatf("outputs %0d of %0d", n_out, qid));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
