// grains_fsm: the GRAINS control FSM on the SSD controller.
//
// Drives the in-storage execution once the host has switched the SSD into
// GRAINS mode. The host's three vendor commands arrive here decoded:
//  * GRNS_Start (`cmd_start`): leave conventional operation; the FTL firmware
//    flushes the page-level L2P table and loads the small GRAINS metadata,
//    and reports `prep_done`.
//  * GRNS_Steps (`cmd_step`): a query batch is in the SSD; `cmd_last` marks
//    the last batch, after which the SSD returns to conventional operation.
//    A step that arrives while a batch is still running is remembered (one
//    deep), so the host can prepare the next batch meanwhile.
//  * GRNS_Write is handled by FTL firmware and never reaches this FSM.
// Each batch then runs through three stages in order:
//   OFFSETS (select Offsets entries, fill the GSTs) -> STRINGS (drain the
//   GSTs, compare k-mers in the dies) -> COLORS (scan the Color Bitmap, select
//   Colors entries), each ending when its stage reports done.
//
// Interface: command and done inputs as above; `phase` tells the datapath
// which stage owns the channels, `drain_start` pulses on entry to STRINGS,
// `batch_done` pulses when a batch's last result has left, `scc_mode` is high
// from GRNS_Start until the last batch is finished.
// Timing: one cycle per transition; no stage is skipped.
//
// The commands and the staged flow follow the design; the one-deep step
// memory and the prep handshake are this implementation's choices.
module grains_fsm (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       cmd_start,
  input  logic       cmd_step,
  input  logic       cmd_last,
  input  logic       prep_done,
  input  logic       off_done,
  input  logic       str_done,
  input  logic       col_done,
  output grains_phase_pkg::phase_e phase,
  output logic       scc_mode,
  output logic       drain_start,
  output logic       batch_done
);
  import grains_phase_pkg::*;

  logic step_pend, last_pend;   // remembered GRNS_Steps
  logic last_q;                 // the running batch is the last one

  assign scc_mode = (phase != PH_CONV);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase       <= PH_CONV;
      step_pend   <= 1'b0;
      last_pend   <= 1'b0;
      last_q      <= 1'b0;
      drain_start <= 1'b0;
      batch_done  <= 1'b0;
    end else begin
      drain_start <= 1'b0;
      batch_done  <= 1'b0;
      if (cmd_step && phase != PH_CONV) begin
        step_pend <= 1'b1;
        last_pend <= cmd_last;
      end
      unique case (phase)
        PH_CONV: if (cmd_start) phase <= PH_PREP;
        PH_PREP: if (prep_done) phase <= PH_WAIT;
        PH_WAIT: if (step_pend || cmd_step) begin
          phase     <= PH_OFFSETS;
          last_q    <= step_pend ? last_pend : cmd_last;
          step_pend <= 1'b0;
        end
        PH_OFFSETS: if (off_done) begin
          phase       <= PH_STRINGS;
          drain_start <= 1'b1;
        end
        PH_STRINGS: if (str_done) phase <= PH_COLORS;
        PH_COLORS: if (col_done) begin
          batch_done <= 1'b1;
          phase      <= last_q ? PH_CONV : PH_WAIT;
        end
        default: phase <= PH_CONV;
      endcase
    end
  end

endmodule
