// ifp_compare: on-die comparison unit of a GRAINS IFP processing element.
//
// Checks whether a query k-mer occurs in the Strings window that an Offsets
// entry points to. A minimizer-indexed window holds K-M+1 candidate k-mer
// start positions, i.e. 2K-M bases, starting at a bit address in the page.
//
// How it works: the unit reads the WIN_WORDS column words that cover the
// window from the page buffer into a shift register, aligns the register to
// the bit address with one shift, then compares the low 2K bits with the
// k-mer, shifting the register by one base (2 bits) per cycle until a match
// or until all K-M+1 positions have been tried. The shift register plus one
// 2K-bit equality comparator is the whole datapath.
//
// Interface: pulse `start` with `bit_off` (even) and `kmer`. Page buffer port
// as in ifp_select (read data one cycle after `pb_rd`). `done` pulses once
// with `match` and `pos` (candidate position 0..K-M of the hit).
// Timing: WIN_WORDS+1 cycles to load, 1 to align, then one cycle per
// position tried: `done` is high WIN_WORDS+4+p cycles after `start` for a hit
// at position p, and WIN_WORDS+4+(K-M) cycles after it for a miss (8+p and
// 19 at the defaults).
//
// The shift-register-and-comparator structure and the k-m+1 window follow
// the design; the 2-bit base packing, the word-serial load and the
// one-base-per-cycle search are this implementation's choices.
module ifp_compare
  import grains_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [BIT_OFF_W-1:0]  bit_off,
  input  logic [KMER_BITS-1:0]  kmer,
  output logic                  busy,
  // page buffer column port
  output logic                  pb_rd,
  output logic [COL_W-1:0]      pb_col,
  input  logic [WORD_BITS-1:0]  pb_data,
  // result
  output logic                  done,
  output logic                  match,
  output logic [POS_W-1:0]      pos
);

  localparam int unsigned NPOS      = K - M + 1;
  localparam int unsigned WIN_BITS  = 2 * (2 * K - M);
  localparam int unsigned WIN_WORDS = (WIN_BITS + WORD_BITS - 2 + WORD_BITS - 1) / WORD_BITS;
  localparam int unsigned SR_BITS   = WIN_WORDS * WORD_BITS;

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_ALIGN, S_CMP} state_e;
  state_e                        state;
  logic [SR_BITS-1:0]            sr;          // window shift register
  logic [KMER_BITS-1:0]          kmer_q;
  logic [COL_W-1:0]              col_q;
  logic [$clog2(WORD_BITS)-1:0]  sub_q;
  logic [$clog2(WIN_WORDS+1):0]  rd_cnt;      // column reads issued
  logic [$clog2(WIN_WORDS+1):0]  wr_cnt;      // column words captured
  logic [POS_W-1:0]              p_q;

  wire issue = (state == S_LOAD) && (int'(rd_cnt) < WIN_WORDS);

  assign pb_rd  = issue;
  assign pb_col = col_q + COL_W'(rd_cnt);
  assign busy   = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      sr     <= '0;
      kmer_q <= '0;
      col_q  <= '0;
      sub_q  <= '0;
      rd_cnt <= '0;
      wr_cnt <= '0;
      p_q    <= '0;
      done   <= 1'b0;
      match  <= 1'b0;
      pos    <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          col_q  <= bit_off[BIT_OFF_W-1:$clog2(WORD_BITS)];
          sub_q  <= bit_off[$clog2(WORD_BITS)-1:0];
          kmer_q <= kmer;
          rd_cnt <= '0;
          wr_cnt <= '0;
          p_q    <= '0;
          state  <= S_LOAD;
        end
        S_LOAD: begin
          if (issue) rd_cnt <= rd_cnt + 1'b1;
          // data of the read issued last cycle: shift it in at the top
          if (rd_cnt != 0) begin
            sr     <= {pb_data, sr[SR_BITS-1:WORD_BITS]};
            wr_cnt <= wr_cnt + 1'b1;
            if (int'(wr_cnt) == WIN_WORDS - 1) state <= S_ALIGN;
          end
        end
        S_ALIGN: begin
          sr    <= sr >> sub_q;
          state <= S_CMP;
        end
        S_CMP: begin
          if (sr[KMER_BITS-1:0] == kmer_q) begin
            match <= 1'b1;
            pos   <= p_q;
            done  <= 1'b1;
            state <= S_IDLE;
          end else if (p_q == POS_W'(NPOS - 1)) begin
            match <= 1'b0;
            pos   <= '0;
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            sr  <= sr >> 2;
            p_q <= p_q + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
