// tb_light_scheduler: checks the per-channel light scheduler with eight
// stand-in GST drain queues, random die-free flags and a randomly ready
// channel controller. Every cycle it checks against a reference: a request
// is made exactly when some die has an access and is free; the die is the
// first eligible one at or after the round-robin pointer (which moves past
// each granted die); the command carries the die's access (COMPARE, page =
// Strings base + row, plane from the one-hot, plane mask only on a row's
// first access, query ID as tag); and only the granted die's access is
// popped. All accesses must be issued.
module tb_light_scheduler;
  import grains_pkg::*;
  localparam int DIES = 8, ROWS = 256;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge, so the asynchronous reset fires
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [PAGE_ADDR_W-1:0] strings_page_base = 24'h1234;
  logic [DIES-1:0] drn_valid, drn_ready, drn_first, die_free;
  logic [7:0] drn_row [DIES];
  logic [PLANES-1:0] drn_mask [DIES];
  gst_entry_t drn_entry [DIES];
  logic req_valid, req_ready;
  logic [2:0] req_die;
  die_cmd_t req_cmd;
  logic [QID_W-1:0] req_tag;

  light_scheduler #(.DIES(DIES), .ROWS(ROWS)) dut (.*);

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endfunction

  typedef struct { int row; bit first; logic [PLANES-1:0] mask; gst_entry_t e; } acc_t;
  acc_t q [DIES][$];
  int total = 0, issued = 0, rr = 0;

  // drive the drain ports from the queue heads (called after every change)
  task automatic show_heads();
    for (int d = 0; d < DIES; d++) begin
      drn_valid[d] = q[d].size() > 0;
      drn_row[d]   = drn_valid[d] ? 8'(q[d][0].row) : '0;
      drn_first[d] = drn_valid[d] ? q[d][0].first : 1'b0;
      drn_mask[d]  = drn_valid[d] ? q[d][0].mask : '0;
      drn_entry[d] = drn_valid[d] ? q[d][0].e : '0;
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    die_free = '0; req_ready = 0;
    for (int d = 0; d < DIES; d++) begin
      int row, nr;
      row = 0;
      nr = $urandom_range(3, 12);
      for (int r = 0; r < nr; r++) begin
        int na;
        logic [PLANES-1:0] m;
        acc_t a;
        row += $urandom_range(1, 20);
        na = $urandom_range(1, 4);
        m = '0;
        for (int j = 0; j < na; j++) begin
          a.row = row; a.first = (j == 0);
          a.e.bit_off = BIT_OFF_W'($urandom); a.e.kmer = {$urandom, $urandom};
          a.e.qid = QID_W'(total); a.e.plane_oh = PLANES'(1) << $urandom_range(0, 3);
          m |= a.e.plane_oh;
          q[d].push_back(a);
          total++;
        end
        for (int j = q[d].size() - na; j < q[d].size(); j++) q[d][j].mask = m;
      end
    end
    q[3].delete();   // one die with nothing to do
    total = 0;
    foreach (q[d]) total += q[d].size();
    show_heads();
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (issued < total) begin
      int exp_die;
      @(negedge clk);
      die_free = DIES'($urandom);
      req_ready = 1'($urandom_range(0, 1));
      #1;
      exp_die = -1;
      for (int i = 0; i < DIES && exp_die < 0; i++) begin
        int d;
        d = (rr + i) % DIES;
        if (q[d].size() > 0 && die_free[d]) exp_die = d;
      end
      check(req_valid == (exp_die >= 0), "req_valid");
      if (req_valid && exp_die >= 0) begin
        acc_t a;
        a = q[exp_die][0];
        check(int'(req_die) == exp_die, $sformatf("picked die %0d exp %0d", req_die, exp_die));
        check(req_cmd.op == OP_COMPARE && req_cmd.page == strings_page_base + PAGE_ADDR_W'(a.row) &&
              (PLANES'(1) << req_cmd.plane) == a.e.plane_oh &&
              req_cmd.plane_mask == (a.first ? a.mask : '0) &&
              req_cmd.bit_off == a.e.bit_off && req_cmd.kmer == a.e.kmer && req_tag == a.e.qid,
              $sformatf("command for qid %0d", a.e.qid));
        check(drn_ready == (req_ready ? DIES'(1) << exp_die : '0), "drn_ready");
        if (req_ready) begin
          @(posedge clk);
          #1;   // pop after the clock edge has been sampled
          void'(q[exp_die].pop_front());
          show_heads();
          issued++;
          rr = (exp_die + 1) % DIES;
        end
      end else check(drn_ready == '0, "drn_ready without request");
    end
    check(issued == total, "all accesses issued");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
