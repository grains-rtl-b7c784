// flash_channel_ctrl: per-channel hardware flash controller, GRAINS flavour.
//
// All dies of a channel share one command/data bus, which one die at a time
// may use, while the dies themselves work in parallel. The controller moves
// two kinds of traffic over that bus:
//  * a command plus its small IFP parameter (offset or k-mer) to a die,
//    taking CMD_BEATS bus cycles, delivered alongside the page read;
//  * the small result of a die (an entry, or match flag and unitig ID), taking
//    RSP_BEATS bus cycles, instead of a whole page.
// Reading back results has priority over sending new commands (it frees a
// die); among dies with results waiting the choice rotates round-robin. A
// request whose die is still busy waits at the head of the request port: the
// `stall` output is high in each such cycle.
//
// Interface: requests (`req_*`, valid/ready, carrying an opaque tag that is
// returned with the result) and responses (`rsp_*`, valid/ready). Die side:
// one command bus `pe_cmd` with a per-die valid, per-die ready, and per-die
// result with acknowledge.
// Timing: a request is accepted in the cycle the bus is free and its die is
// idle; the die's command valid rises CMD_BEATS cycles later. Reading a
// result occupies the bus for RSP_BEATS cycles, after which it is presented
// on the response port.
//
// Shared bus and one-die-at-a-time use follow the SSD organisation the design
// builds on; the beat counts (bus cycles per transfer) and the priority
// scheme are this implementation's choices.
module flash_channel_ctrl
  import grains_pkg::*;
#(
  parameter int unsigned DIES      = DIES_PER_CH,
  parameter int unsigned TAG_W     = 8,
  parameter int unsigned CMD_BEATS = 16,   // cmd + address + parameter bytes
  parameter int unsigned RSP_BEATS = 6     // result bytes
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // request from the ISP stages
  input  logic                     req_valid,
  output logic                     req_ready,
  input  logic [$clog2(DIES)-1:0]  req_die,
  input  die_cmd_t                 req_cmd,
  input  logic [TAG_W-1:0]         req_tag,
  // result to the ISP stages
  output logic                     rsp_valid,
  input  logic                     rsp_ready,
  output logic [$clog2(DIES)-1:0]  rsp_die,
  output die_rsp_t                 rsp_data,
  output logic [TAG_W-1:0]         rsp_tag,
  // channel bus to the dies' PEs
  output logic [DIES-1:0]          pe_cmd_valid,
  output die_cmd_t                 pe_cmd,
  input  logic [DIES-1:0]          pe_cmd_ready,
  input  logic [DIES-1:0]          pe_rsp_valid,
  input  die_rsp_t                 pe_rsp [DIES],
  output logic [DIES-1:0]          pe_rsp_ack,
  // status
  output logic [DIES-1:0]          die_free,   // die idle, no result pending
  output logic                     stall,
  output logic                     idle
);

  localparam int unsigned DW = $clog2(DIES);
  localparam int unsigned BW = $clog2((CMD_BEATS > RSP_BEATS ? CMD_BEATS : RSP_BEATS) + 1);

  typedef enum logic [1:0] {B_IDLE, B_CMD, B_RSP} bus_e;
  bus_e               bus;
  logic [BW-1:0]      beats;
  logic [DW-1:0]      cur_die;
  logic [DW-1:0]      rr_ptr;
  logic [TAG_W-1:0]   tags [DIES];
  logic [DIES-1:0]    outstanding;

  // round-robin pick among dies with a result waiting
  logic               any_rsp;
  logic [DW-1:0]      pick;
  always_comb begin
    any_rsp = 1'b0;
    pick    = '0;
    for (int i = 0; i < DIES; i++) begin
      automatic logic [DW-1:0] d = DW'((int'(rr_ptr) + i) % DIES);
      if (!any_rsp && pe_rsp_valid[d] && outstanding[d]) begin
        any_rsp = 1'b1;
        pick    = d;
      end
    end
  end

  wire out_free  = !rsp_valid || rsp_ready;
  wire start_rsp = (bus == B_IDLE) && any_rsp && out_free;
  wire start_cmd = (bus == B_IDLE) && !start_rsp && req_valid && pe_cmd_ready[req_die]
                   && !outstanding[req_die];

  assign req_ready = start_cmd;
  assign die_free  = pe_cmd_ready & ~outstanding;
  assign stall     = (bus == B_IDLE) && req_valid && !start_cmd && !start_rsp;
  assign idle      = (bus == B_IDLE) && (outstanding == '0) && !rsp_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bus          <= B_IDLE;
      beats        <= '0;
      cur_die      <= '0;
      rr_ptr       <= '0;
      outstanding  <= '0;
      pe_cmd_valid <= '0;
      pe_cmd       <= '0;
      pe_rsp_ack   <= '0;
      rsp_valid    <= 1'b0;
      rsp_die      <= '0;
      rsp_data     <= '0;
      rsp_tag      <= '0;
      for (int i = 0; i < DIES; i++) tags[i] <= '0;
    end else begin
      pe_cmd_valid <= '0;
      pe_rsp_ack   <= '0;
      if (rsp_valid && rsp_ready) rsp_valid <= 1'b0;
      unique case (bus)
        B_IDLE: begin
          if (start_rsp) begin
            bus     <= B_RSP;
            cur_die <= pick;
            beats   <= BW'(RSP_BEATS);
          end else if (start_cmd) begin
            bus           <= B_CMD;
            cur_die       <= req_die;
            pe_cmd        <= req_cmd;
            tags[req_die] <= req_tag;
            beats         <= BW'(CMD_BEATS);
          end
        end
        B_CMD: begin
          beats <= beats - 1'b1;
          if (beats == 1) begin
            pe_cmd_valid[cur_die] <= 1'b1;
            outstanding[cur_die]  <= 1'b1;
            bus                   <= B_IDLE;
          end
        end
        B_RSP: begin
          beats <= beats - 1'b1;
          if (beats == 1) begin
            pe_rsp_ack[cur_die]  <= 1'b1;
            outstanding[cur_die] <= 1'b0;
            rsp_valid            <= 1'b1;
            rsp_die              <= cur_die;
            rsp_data             <= pe_rsp[cur_die];
            rsp_tag              <= tags[cur_die];
            rr_ptr               <= DW'((int'(cur_die) + 1) % DIES);
            bus                  <= B_IDLE;
          end
        end
        default: bus <= B_IDLE;
      endcase
    end
  end

  // a command is only sent to an idle die, and a die never has two in flight
  assert property (@(posedge clk) disable iff (!rst_n)
                   start_cmd |-> !outstanding[req_die]);

endmodule
