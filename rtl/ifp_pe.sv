// ifp_pe: GRAINS in-flash processing element, one per NAND die.
//
// The flash controller delivers a command with a small parameter (a byte
// offset, or a bit address plus a k-mer) over the channel bus; the PE keeps
// it in its parameter register, has the die sense the page into the page
// buffer, works on the page buffer and leaves only a small result for the
// controller to read back, so a full page never crosses the channel.
//
//  * OP_SELECT  : ifp_select returns the 32-bit entry at the byte offset
//                 (Offsets and Colors lookups).
//  * OP_COMPARE : ifp_compare searches the k-mer in the Strings window at the
//                 bit address; on a hit, ifp_select then fetches the 32-bit
//                 unitig ID stored in the column word just before the word
//                 holding the window's first base.
//
// Page reads: if the target plane's page buffer already holds the requested
// page (left there by the previous command), the sense step is skipped,
// which is how accesses coalesced into one GST row share a single page read.
// Otherwise one multi-plane read loads every plane in `plane_mask` plus the
// target plane at the same page index.
//
// Interface: `cmd_valid`/`cmd_ready` take a command (ready only when idle).
// `rsp_valid` stays high with `rsp` until the controller pulses `rsp_ack`.
// Die side: `nd_rd` requests a page read (`nd_page`, `nd_mask`) and the die
// answers with a one-cycle `nd_done` after its read latency; the page buffer
// column port `pb_*` returns data one cycle after `pb_rd`.
// Timing: SELECT takes tR + 4 cycles, COMPARE tR + up to 23 cycles (tR only
// when the page is not already buffered).
//
// The flow (page read, corrected page buffer, select or compare, read back
// only the result) follows the design. ECC_LITE sits between the page buffer
// and this PE in the die and is not part of this module; `pb_data` is taken
// as already corrected. Where the unitig ID comes from and the page-reuse
// check are this implementation's choices.
module ifp_pe
  import grains_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  // channel side
  input  logic                   cmd_valid,
  input  die_cmd_t               cmd,
  output logic                   cmd_ready,
  output logic                   rsp_valid,
  output die_rsp_t               rsp,
  input  logic                   rsp_ack,
  // die side: page read
  output logic                   nd_rd,
  output logic [PAGE_ADDR_W-1:0] nd_page,
  output logic [PLANES-1:0]      nd_mask,
  input  logic                   nd_done,
  // die side: page buffer column port (after ECC_LITE)
  output logic                   pb_rd,
  output logic [PLANE_W-1:0]     pb_plane,
  output logic [COL_W-1:0]       pb_col,
  input  logic [WORD_BITS-1:0]   pb_data,
  // event: a command was served from an already loaded page buffer
  output logic                   page_reuse
);

  typedef enum logic [2:0] {S_IDLE, S_SENSE, S_EXEC, S_UID, S_RESP} state_e;
  state_e   state;
  die_cmd_t par_q;                                   // on-die parameter register
  logic [PLANES-1:0]      loaded_v;
  logic [PAGE_ADDR_W-1:0] loaded_pg [PLANES];
  logic                   exec_go, uid_go;

  // selection / comparison units
  logic                  sel_start, sel_busy, sel_done, sel_rd;
  logic [BYTE_OFF_W-1:0] sel_off;
  logic [COL_W-1:0]      sel_col;
  logic [ENTRY_BITS-1:0] sel_data;
  logic                  cmp_start, cmp_busy, cmp_done, cmp_rd, cmp_match;
  logic [COL_W-1:0]      cmp_col;
  logic [POS_W-1:0]      cmp_pos;

  ifp_select u_sel (
    .clk, .rst_n, .start(sel_start), .byte_off(sel_off), .busy(sel_busy),
    .pb_rd(sel_rd), .pb_col(sel_col), .pb_data,
    .done(sel_done), .data(sel_data)
  );

  ifp_compare u_cmp (
    .clk, .rst_n, .start(cmp_start), .bit_off(par_q.bit_off), .kmer(par_q.kmer),
    .busy(cmp_busy), .pb_rd(cmp_rd), .pb_col(cmp_col), .pb_data,
    .done(cmp_done), .match(cmp_match), .pos(cmp_pos)
  );

  wire hit = loaded_v[cmd.plane] && (loaded_pg[cmd.plane] == cmd.page);

  assign cmd_ready  = (state == S_IDLE);
  assign rsp_valid  = (state == S_RESP);
  assign nd_page    = par_q.page;
  assign nd_mask    = par_q.plane_mask | (PLANES'(1) << par_q.plane);
  assign pb_plane   = par_q.plane;
  assign pb_rd      = sel_rd | cmp_rd;
  assign pb_col     = sel_rd ? sel_col : cmp_col;

  assign sel_start  = (exec_go && par_q.op == OP_SELECT) || uid_go;
  assign sel_off    = uid_go ? {par_q.bit_off[BIT_OFF_W-1:$clog2(WORD_BITS)] - COL_W'(1),
                                $clog2(WORD_BITS/8)'(0)}
                             : par_q.bit_off[BIT_OFF_W-1:3];
  assign cmp_start  = exec_go && par_q.op == OP_COMPARE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      par_q      <= '0;
      loaded_v   <= '0;
      for (int p = 0; p < PLANES; p++) loaded_pg[p] <= '0;
      rsp        <= '0;
      nd_rd      <= 1'b0;
      exec_go    <= 1'b0;
      uid_go     <= 1'b0;
      page_reuse <= 1'b0;
    end else begin
      nd_rd      <= 1'b0;
      exec_go    <= 1'b0;
      uid_go     <= 1'b0;
      page_reuse <= 1'b0;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          par_q <= cmd;
          if (hit) begin
            page_reuse <= 1'b1;
            exec_go    <= 1'b1;
            state      <= S_EXEC;
          end else begin
            nd_rd <= 1'b1;
            state <= S_SENSE;
          end
        end
        S_SENSE: if (nd_done) begin
          for (int p = 0; p < PLANES; p++)
            if (nd_mask[p]) begin
              loaded_v[p]  <= 1'b1;
              loaded_pg[p] <= par_q.page;
            end
          exec_go <= 1'b1;
          state   <= S_EXEC;
        end
        S_EXEC: begin
          if (sel_done && par_q.op == OP_SELECT) begin
            rsp   <= '{match: 1'b0, pos: '0, data: sel_data};
            state <= S_RESP;
          end else if (cmp_done) begin
            rsp <= '{match: cmp_match, pos: cmp_pos, data: '0};
            if (cmp_match) begin
              uid_go <= 1'b1;
              state  <= S_UID;
            end else begin
              state <= S_RESP;
            end
          end
        end
        S_UID: if (sel_done) begin
          rsp.data <= sel_data;
          state    <= S_RESP;
        end
        S_RESP: if (rsp_ack) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // the selection and comparison units share the page buffer port
  assert property (@(posedge clk) disable iff (!rst_n) !(sel_busy && cmp_busy));

endmodule
