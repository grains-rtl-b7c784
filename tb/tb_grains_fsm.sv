// tb_grains_fsm: checks the GRAINS control FSM. It walks the FSM through
// GRNS_Start, the preparation handshake and several batches, and checks
// the phase after every event against the expected sequence CONV -> PREP ->
// WAIT -> OFFSETS -> STRINGS -> COLORS -> WAIT ... -> CONV, one cycle per
// transition. It also checks the single-cycle drain_start and batch_done
// pulses, scc_mode, that a GRNS_Steps arriving mid-batch is remembered and
// starts the next batch one cycle after the current one ends, and that stage-done inputs in the wrong
// phase are ignored.
module tb_grains_fsm;
  import grains_phase_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge, so the asynchronous reset fires
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_start = 0, cmd_step = 0, cmd_last = 0, prep_done = 0;
  logic off_done = 0, str_done = 0, col_done = 0;
  phase_e phase;
  logic scc_mode, drain_start, batch_done;

  grains_fsm dut (.*);

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (phase %s)", what, phase.name());
    end
  endfunction

  int n_drain = 0, n_bdone = 0;
  always @(posedge clk) begin
    if (drain_start) n_drain <= n_drain + 1;
    if (batch_done) n_bdone <= n_bdone + 1;
  end

  // pulse one input for one cycle, then check the phase one cycle later
  task automatic pulse(ref logic sig, input phase_e exp, input string what);
    @(negedge clk); sig = 1;
    @(negedge clk); sig = 0;
    check(phase == exp, what);
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(phase == PH_CONV && !scc_mode, "reset state");
    pulse(off_done, PH_CONV, "done ignored in CONV");
    pulse(cmd_step, PH_CONV, "step ignored in CONV");
    pulse(cmd_start, PH_PREP, "GRNS_Start");
    check(scc_mode, "scc_mode after start");
    pulse(prep_done, PH_WAIT, "preparation done");
    repeat (5) @(negedge clk);
    check(phase == PH_WAIT, "waits for a batch");
    for (int b = 0; b < 4; b++) begin
      if (b < 2) pulse(cmd_step, PH_OFFSETS, "GRNS_Steps");
      else check(phase == PH_OFFSETS, "batch already running");
      pulse(col_done, PH_OFFSETS, "colors done ignored in OFFSETS");
      pulse(off_done, PH_STRINGS, "offsets done");
      check(drain_start, "drain_start on entry to STRINGS");
      @(negedge clk);
      check(!drain_start && n_drain == b + 1, "drain_start is a single pulse");
      if (b == 1) begin
        // the host sends the next batch while this one still runs
        @(negedge clk); cmd_step = 1; cmd_last = 0;
        @(negedge clk); cmd_step = 0;
      end
      if (b == 2) begin
        @(negedge clk); cmd_step = 1; cmd_last = 1;
        @(negedge clk); cmd_step = 0; cmd_last = 0;
      end
      pulse(str_done, PH_COLORS, "strings done");
      pulse(col_done, (b == 3) ? PH_CONV : PH_WAIT, "colors done ends the batch");
      check(batch_done, "batch_done at the end of the batch");
      @(negedge clk);
      check(!batch_done && n_bdone == b + 1, "batch_done is a single pulse");
      if (b == 1 || b == 2) check(phase == PH_OFFSETS, "remembered step starts the next batch");
      if (b == 0) check(phase == PH_WAIT, "no step pending: wait");
    end
    check(!scc_mode, "back to conventional mode after the last batch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
