// kmer_decompact: rebuilds full query k-mers from a compacted GRAINS batch.
//
// The host sorts the k-mers of a batch by their Sizes/Offsets index, so
// consecutive k-mers share a minimizer. It therefore sends the minimizer once
// (a header word) and, for each k-mer, only the K-M bases around it: the
// bases before the minimizer (prefix, `pre_len` of them) and those after it
// (suffix). This unit keeps the last header's minimizer in a register and
// re-assembles kmer = prefix . minimizer . suffix for every k-mer word.
//
// Interface: compacted words on `in_valid`/`in_ready` (cq_word_t); full
// k-mers with their query ID and Offsets index on `out_valid`/`out_ready`.
// Header words are consumed without output. The query ID and Offsets index
// pass through unchanged; only the k-mer is rebuilt.
// Timing: combinational from input to output (one word per cycle), with the
// minimizer register updated on each accepted header.
//
// Sending the minimizer once plus per-k-mer differences follows the design;
// the exact word format (prefix length field, prefix-then-suffix packing) is
// this implementation's choice.
module kmer_decompact
  import grains_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  cq_word_t             in_word,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [KMER_BITS-1:0] out_kmer,
  output logic [QID_W-1:0]     out_qid,
  output logic [OIDX_W-1:0]    out_oidx
);

  localparam int unsigned DB = 2 * (K - M);   // difference bits

  logic [2*M-1:0] mini_q;

  logic [KMER_BITS-1:0] pre_bits, suf_bits, mini_bits;
  always_comb begin
    pre_bits  = KMER_BITS'(in_word.diff) & ((KMER_BITS'(1) << (2 * in_word.pre_len)) - 1'b1);
    suf_bits  = KMER_BITS'(in_word.diff >> (2 * in_word.pre_len)) << (2 * (int'(in_word.pre_len) + M));
    mini_bits = KMER_BITS'(mini_q) << (2 * in_word.pre_len);
    out_kmer  = pre_bits | mini_bits | suf_bits;
  end

  assign out_valid = in_valid && !in_word.hdr;
  assign in_ready  = in_word.hdr || out_ready;
  assign out_qid   = in_word.qid;
  assign out_oidx  = in_word.oidx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                             mini_q <= '0;
    else if (in_valid && in_word.hdr)       mini_q <= in_word.minimizer;
  end

  // the prefix length can never exceed the K-M difference bases
  assert property (@(posedge clk) disable iff (!rst_n)
                   (in_valid && !in_word.hdr) |-> (int'(in_word.pre_len) <= K - M));

  initial assert (DB < KMER_BITS);

endmodule
