// light_scheduler: GRAINS lightweight Strings scheduler, one per channel.
//
// Instead of sorting the random Strings accesses, the scheduler reads the
// per-die GSTs (gst_table) back row by row: each GST hands out its accesses
// in page order, accesses of one page back to back. The scheduler turns each
// into an IFP compare command (page = Strings base page + GST row, plane
// from the access's one-hot bitmap, bit address and k-mer as parameters) and
// rotates over the dies of its channel round-robin, so every die of the
// channel is kept busy. The first access of a row carries the row's plane
// mask, so one multi-plane read loads all planes the row needs; the later
// accesses of the row find their page already in the page buffer.
//
// Interface: one drain port per die (from gst_table), `die_free` from the
// channel controller (die idle, nothing pending), and one request port to
// the channel controller (the query ID travels as the tag).
// Timing: at most one command per cycle; a die is only picked while free, so
// one busy die never blocks the others.
//
// Round-robin issue over dies and planes from the GSTs follows the design;
// picking only free dies is this implementation's choice.
module light_scheduler
  import grains_pkg::*;
#(
  parameter int unsigned DIES = DIES_PER_CH,
  parameter int unsigned ROWS = 256
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [PAGE_ADDR_W-1:0]    strings_page_base,
  // GST drain ports, one per die of the channel
  input  logic [DIES-1:0]           drn_valid,
  output logic [DIES-1:0]           drn_ready,
  input  logic [$clog2(ROWS)-1:0]   drn_row   [DIES],
  input  logic [PLANES-1:0]         drn_mask  [DIES],
  input  logic [DIES-1:0]           drn_first,
  input  gst_entry_t                drn_entry [DIES],
  // channel controller
  input  logic [DIES-1:0]           die_free,
  output logic                      req_valid,
  input  logic                      req_ready,
  output logic [$clog2(DIES)-1:0]   req_die,
  output die_cmd_t                  req_cmd,
  output logic [QID_W-1:0]          req_tag
);

  localparam int unsigned DW = $clog2(DIES);
  logic [DW-1:0] rr_q;

  // one-hot plane bitmap -> plane index
  function automatic logic [PLANE_W-1:0] oh2idx(logic [PLANES-1:0] oh);
    oh2idx = '0;
    for (int p = 0; p < PLANES; p++) if (oh[p]) oh2idx = PLANE_W'(p);
  endfunction

  always_comb begin
    req_valid = 1'b0;
    req_die   = '0;
    for (int i = 0; i < DIES; i++) begin
      automatic logic [DW-1:0] d = DW'((int'(rr_q) + i) % DIES);
      if (!req_valid && drn_valid[d] && die_free[d]) begin
        req_valid = 1'b1;
        req_die   = d;
      end
    end
    req_cmd.op         = OP_COMPARE;
    req_cmd.page       = strings_page_base + PAGE_ADDR_W'(drn_row[req_die]);
    req_cmd.plane      = oh2idx(drn_entry[req_die].plane_oh);
    req_cmd.plane_mask = drn_first[req_die] ? drn_mask[req_die] : '0;
    req_cmd.bit_off    = drn_entry[req_die].bit_off;
    req_cmd.kmer       = drn_entry[req_die].kmer;
    req_tag            = drn_entry[req_die].qid;
  end

  // kept apart from the request logic: req_ready depends on req_valid
  always_comb begin
    drn_ready          = '0;
    drn_ready[req_die] = req_valid && req_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      rr_q <= '0;
    else if (req_valid && req_ready) rr_q <= DW'((int'(req_die) + 1) % DIES);
  end

endmodule
