// tb_flash_channel_ctrl: checks the per-channel flash controller with eight
// stand-in dies that answer each command after a random busy time with a
// result computed from the command. Requests go to random dies (so some wait
// on a busy die and stall the port) and the response port back-pressures
// randomly. Checks: every request comes back exactly once with its own tag
// and the result of its own command; a die's command valid is high exactly
// CMD_BEATS cycles after the request is accepted (the die samples it on the
// following edge); reading a result back takes RSP_BEATS bus cycles and the
// result is presented with the die's acknowledge; no die has two commands in
// flight; the stall output was seen.
module tb_flash_channel_ctrl;
  import grains_pkg::*;
  localparam int DIES = 8, TAG_W = 12, CMD_BEATS = 16, RSP_BEATS = 6, NREQ = 600;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge, so the asynchronous reset fires
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic req_valid = 0, req_ready, rsp_valid, rsp_ready = 0, stall, idle;
  logic [2:0] req_die = '0, rsp_die;
  die_cmd_t req_cmd = '0, pe_cmd;
  die_rsp_t rsp_data;
  logic [TAG_W-1:0] req_tag = '0, rsp_tag;
  logic [DIES-1:0] pe_cmd_valid, pe_cmd_ready, pe_rsp_valid, pe_rsp_ack, die_free;
  die_rsp_t pe_rsp [DIES];

  flash_channel_ctrl #(.DIES(DIES), .TAG_W(TAG_W), .CMD_BEATS(CMD_BEATS),
                       .RSP_BEATS(RSP_BEATS)) dut (.*);

  function automatic die_rsp_t answer(die_cmd_t c);
    die_rsp_t r;
    r.match = c.kmer[0];
    r.pos   = POS_W'(c.page);
    r.data  = c.kmer[31:0] ^ {8'h0, c.page};
    return r;
  endfunction

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endfunction

  // stand-in dies
  int     busy [DIES];
  longint acc_cyc [NREQ];
  int     n_stall = 0;
  always @(posedge clk) begin
    if (!rst_n) begin
      for (int d = 0; d < DIES; d++) begin
        busy[d] = 0; pe_cmd_ready[d] <= 1; pe_rsp_valid[d] <= 0; pe_rsp[d] <= '0;
      end
    end else begin
      if (stall) n_stall++;
      for (int d = 0; d < DIES; d++) begin
        if (pe_cmd_valid[d]) begin
          check(pe_cmd_ready[d] && !pe_rsp_valid[d], "command to a busy die");
          check(cyc == acc_cyc[pe_cmd.kmer[63:32]] + CMD_BEATS + 1,
                $sformatf("command delivery at %0d, accepted %0d", cyc, acc_cyc[pe_cmd.kmer[63:32]]));
          pe_cmd_ready[d] <= 0;
          busy[d] = $urandom_range(5, 80);
          pe_rsp[d] <= answer(pe_cmd);
        end else if (busy[d] > 0) begin
          busy[d]--;
          if (busy[d] == 0) pe_rsp_valid[d] <= 1;
        end
        if (pe_rsp_ack[d]) begin
          check(pe_rsp_valid[d], "ack without result");
          pe_rsp_valid[d] <= 0; pe_cmd_ready[d] <= 1;
        end
      end
    end
  end

  // response read timing: the bus spends RSP_BEATS cycles reading a result
  int rsp_beats_seen = 0;
  always @(posedge clk) if (rst_n) begin
    if (|pe_rsp_ack) check(rsp_beats_seen == RSP_BEATS,
                           $sformatf("result read took %0d bus cycles", rsp_beats_seen));
    if (dut.bus == 2'd2) rsp_beats_seen <= rsp_beats_seen + 1;
    else rsp_beats_seen <= 0;
  end
  die_cmd_t sent [NREQ];
  bit       got  [NREQ];
  int       n_rsp = 0;
  always @(posedge clk) begin
    if (rst_n && rsp_valid && rsp_ready) begin
      int t;
      t = int'(rsp_tag);
      check(t < NREQ && !got[t], $sformatf("unexpected/duplicate tag %0d", t));
      if (t < NREQ) begin
        got[t] = 1;
        check(rsp_data == answer(sent[t]), $sformatf("result of tag %0d", t));
        check(rsp_die == sent[t].plane_mask[2:0], $sformatf("die of tag %0d", t));
      end
      n_rsp++;
    end
  end
  // a result is presented in the same cycle the die is acknowledged
  always @(posedge clk) if (rst_n && |pe_rsp_ack) check(rsp_valid, "result presented with ack");

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) rsp_ready <= ($urandom_range(0, 3) != 0);

  initial begin
    for (int i = 0; i < NREQ; i++) got[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NREQ; i++) begin
      die_cmd_t c;
      c = '0;
      c.page = PAGE_ADDR_W'($urandom);
      c.kmer = {32'(i), $urandom};
      c.plane_mask = PLANES'(i < 200 ? $urandom_range(0, 1) : $urandom_range(0, DIES - 1));
      sent[i] = c;
      @(negedge clk);
      req_valid = 1; req_cmd = c; req_die = 3'(c.plane_mask); req_tag = TAG_W'(i);
      #1;
      while (!req_ready) begin @(negedge clk); #1; end
      acc_cyc[i] = cyc;   // the value sampled at the accepting clock edge
      @(negedge clk);
      req_valid = 0;
    end
    while (n_rsp < NREQ) @(posedge clk);
    repeat (5) @(posedge clk);
    check(idle, "idle at end");
    check(n_stall > 0, "stall never seen");
    for (int i = 0; i < NREQ; i++) check(got[i], $sformatf("tag %0d lost", i));
    $display("stall cycles=%0d", n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
