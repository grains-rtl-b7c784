// ifp_select: on-die selection unit of a GRAINS IFP processing element.
//
// Instead of streaming a whole 4 KiB page over the channel, the die isolates
// the one entry the controller asked for. Given a byte offset into the page
// buffer, the unit drives the page buffer's column address (the existing
// column-decoder path) and extracts the ENTRY_BITS-wide entry that starts at
// that byte. An entry that straddles two column words takes a second column
// read; the two words are joined and shifted into place.
//
// Interface: pulse `start` with `byte_off` while `busy` is low. The page
// buffer port is synchronous: `pb_rd` with `pb_col` at cycle t returns the
// word on `pb_data` at cycle t+1. `done` pulses for one cycle with `data`.
// Timing: 2 cycles from start to done for an entry inside one word, 3 when
// it straddles two words.
//
// The function (select a targeted window by reusing column select logic)
// follows the design; the word width, the byte granularity of offsets and
// the two-read straddling scheme are this implementation's choices.
module ifp_select
  import grains_pkg::*;
#(
  parameter int unsigned EW = ENTRY_BITS   // entry width in bits (<= WORD_BITS)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [BYTE_OFF_W-1:0] byte_off,
  output logic                  busy,
  // page buffer column port
  output logic                  pb_rd,
  output logic [COL_W-1:0]      pb_col,
  input  logic [WORD_BITS-1:0]  pb_data,
  // result
  output logic                  done,
  output logic [EW-1:0]         data
);

  localparam int unsigned WB = WORD_BITS / 8;   // bytes per column word

  typedef enum logic [1:0] {S_IDLE, S_LO, S_HI} state_e;
  state_e                 state;
  logic [COL_W-1:0]       col_q;
  logic [$clog2(WB)-1:0]  sub_q;      // byte inside the first word
  logic                   two_q;      // entry straddles two words
  logic [WORD_BITS-1:0]   lo_q;

  logic [2*WORD_BITS-1:0] joined;

  always_comb begin
    pb_rd  = 1'b0;
    pb_col = col_q;
    if (start && state == S_IDLE) begin
      pb_rd  = 1'b1;
      pb_col = byte_off[BYTE_OFF_W-1:$clog2(WB)];
    end else if (state == S_LO && two_q) begin
      pb_rd  = 1'b1;
      pb_col = col_q + COL_W'(1);
    end
  end

  assign busy = (state != S_IDLE);

  always_comb begin
    if (state == S_HI) joined = {pb_data, lo_q};
    else               joined = {{WORD_BITS{1'b0}}, pb_data};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      col_q <= '0;
      sub_q <= '0;
      two_q <= 1'b0;
      lo_q  <= '0;
      done  <= 1'b0;
      data  <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          col_q <= byte_off[BYTE_OFF_W-1:$clog2(WB)];
          sub_q <= byte_off[$clog2(WB)-1:0];
          two_q <= (int'(byte_off[$clog2(WB)-1:0]) * 8 + EW) > WORD_BITS;
          state <= S_LO;
        end
        S_LO: begin
          if (two_q) begin
            lo_q  <= pb_data;
            state <= S_HI;
          end else begin
            data  <= EW'(joined >> (sub_q * 8));
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        S_HI: begin
          data  <= EW'(joined >> (sub_q * 8));
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
