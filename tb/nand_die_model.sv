// nand_die_model: behavioural model of one NAND flash die as seen by its
// GRAINS IFP processing element (not synthesizable logic: a stand-in for the
// flash array, sense amplifiers, page buffers and on-die ECC).
//
// A page read (`nd_rd`, `nd_page`, `nd_mask`) senses the page into the page
// buffer of every plane in the mask at once (multi-plane read) and answers
// with a one-cycle `nd_done` T_R cycles later. The page buffer column port
// returns the addressed 32-bit word of the selected plane's buffer one cycle
// after `pb_rd`. Data come from flash_store_pkg and are returned already
// error-corrected. `reads` counts page senses for the testbench.
module nand_die_model
  import grains_pkg::*;
#(
  parameter int unsigned DIE = 0,     // global die index
  parameter int unsigned T_R = 20     // page read latency in cycles
) (
  input  logic                   clk,
  input  logic                   nd_rd,
  input  logic [PAGE_ADDR_W-1:0] nd_page,
  input  logic [PLANES-1:0]      nd_mask,
  output logic                   nd_done,
  input  logic                   pb_rd,
  input  logic [PLANE_W-1:0]     pb_plane,
  input  logic [COL_W-1:0]       pb_col,
  output logic [WORD_BITS-1:0]   pb_data
);
  int unsigned buf_page [PLANES];
  int unsigned cnt = 0;
  int unsigned reads = 0;
  logic [PAGE_ADDR_W-1:0] pend_page;
  logic [PLANES-1:0]      pend_mask;

  initial begin
    nd_done = 1'b0;
    pb_data = '0;
    for (int p = 0; p < PLANES; p++) buf_page[p] = 0;
  end

  always @(posedge clk) begin
    nd_done <= 1'b0;
    if (nd_rd) begin
      pend_page = nd_page;
      pend_mask = nd_mask;
      cnt = T_R;
      reads++;
    end else if (cnt > 0) begin
      cnt--;
      if (cnt == 0) begin
        for (int p = 0; p < PLANES; p++) if (pend_mask[p]) buf_page[p] = pend_page;
        nd_done <= 1'b1;
      end
    end
    if (pb_rd) pb_data <= flash_store_pkg::peek(DIE, pb_plane, buf_page[pb_plane], pb_col);
  end
endmodule
