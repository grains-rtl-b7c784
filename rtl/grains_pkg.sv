// grains_pkg: types and constants shared by the GRAINS in-storage / in-flash
// query engine.
//
// The SSD geometry (16 channels, 8 dies per channel, 4 planes per die, 4 KiB
// pages) is the evaluated configuration of the design. The k-mer length K,
// the minimizer length M, the 32-bit page-buffer column word and all entry
// widths are choices of this implementation (the common SSHash/Fulgor setting
// K=31, M=20 is used).
//
// Strings encoding: 2 bits per base (A=0, C=1, G=2, T=3). Base i of a window
// sits at bits [2i+1:2i]; page bit b lives in column word b/32, bit b%32.
package grains_pkg;

  // ---------------- SSD geometry ----------------
  parameter int unsigned NUM_CH       = 16;
  parameter int unsigned DIES_PER_CH  = 8;
  parameter int unsigned PLANES       = 4;
  parameter int unsigned PAGE_BYTES   = 4096;
  parameter int unsigned NUM_DIES     = NUM_CH * DIES_PER_CH;

  parameter int unsigned WORD_BITS    = 32;                      // page-buffer column word
  parameter int unsigned PAGE_WORDS   = PAGE_BYTES * 8 / WORD_BITS;
  parameter int unsigned COL_W        = $clog2(PAGE_WORDS);      // column (word) address
  parameter int unsigned BYTE_OFF_W   = $clog2(PAGE_BYTES);      // byte offset in page
  parameter int unsigned BIT_OFF_W    = $clog2(PAGE_BYTES * 8);  // bit offset in page
  parameter int unsigned PLANE_W      = $clog2(PLANES);
  parameter int unsigned PAGE_ADDR_W  = 24;                      // page index inside a plane

  // ---------------- k-mers ----------------
  parameter int unsigned K            = 31;
  parameter int unsigned M            = 20;
  parameter int unsigned KMER_BITS    = 2 * K;
  parameter int unsigned POS_W        = $clog2(K - M + 2);       // candidate window position

  // ---------------- entries ----------------
  parameter int unsigned ENTRY_BITS   = 32;   // one Offsets or Colors entry
  parameter int unsigned QID_W        = 24;   // query (k-mer) identifier
  parameter int unsigned UNITIG_W     = 32;

  parameter int unsigned OIDX_W       = 40;   // index into Offsets

  // One word of a compacted query batch from the host. A header word
  // (hdr=1) carries the minimizer shared by the following k-mers; a k-mer
  // word carries its prefix length and the K-M bases around the minimizer
  // (prefix bases first, then suffix bases), its query ID and Offsets index.
  typedef struct packed {
    logic                     hdr;
    logic [2*M-1:0]           minimizer;
    logic [POS_W-1:0]         pre_len;
    logic [2*(K-M)-1:0]       diff;
    logic [QID_W-1:0]         qid;
    logic [OIDX_W-1:0]        oidx;
  } cq_word_t;

  // IFP operations issued by the flash controller to an on-die PE
  typedef enum logic [0:0] {
    OP_SELECT  = 1'b0,   // return the 32-bit entry at a byte offset
    OP_COMPARE = 1'b1    // compare a k-mer against a Strings window
  } ifp_op_e;

  // Command delivered to one die together with the page read
  typedef struct packed {
    ifp_op_e                op;
    logic [PAGE_ADDR_W-1:0] page;        // page index inside the plane
    logic [PLANE_W-1:0]     plane;       // plane holding the target
    logic [PLANES-1:0]      plane_mask;  // planes to load by one multi-plane read
    logic [BIT_OFF_W-1:0]   bit_off;     // SELECT: byte offset << 3; COMPARE: bit address
    logic [KMER_BITS-1:0]   kmer;        // COMPARE only
  } die_cmd_t;

  // Result read back from one die
  typedef struct packed {
    logic                   match;       // COMPARE: k-mer found in the window
    logic [POS_W-1:0]       pos;         // COMPARE: base position of the hit
    logic [ENTRY_BITS-1:0]  data;        // SELECT: entry; COMPARE: unitig ID
  } die_rsp_t;

  // Physical location produced by the round-robin mapping
  typedef struct packed {
    logic [$clog2(NUM_CH)-1:0]      ch;
    logic [$clog2(DIES_PER_CH)-1:0] die;
    logic [PLANE_W-1:0]             plane;
    logic [PAGE_ADDR_W-1:0]         page;
  } phys_addr_t;

  // One access held in a GST row
  typedef struct packed {
    logic [BIT_OFF_W-1:0]   bit_off;     // bit address within the page
    logic [KMER_BITS-1:0]   kmer;        // query k-mer
    logic [QID_W-1:0]       qid;         // query identifier
    logic [PLANES-1:0]      plane_oh;    // one-hot target plane
  } gst_entry_t;

endpackage
