// tb_color_scan: checks the Color Index scan against a bit-count reference.
// A random 64-chunk Color Bitmap streams from a source model that restarts
// at chunk 0 on bm_rewind. Unitig IDs come in ascending runs with occasional
// steps backwards. For each ID the color index must equal the number of ones
// at bitmap positions below it and the address must be colors_base + 4*index.
// Each step back to an earlier bitmap chunk must cause exactly one rewind
// (a step back inside the chunk being scanned needs none). For an ascending run
// with no back-pressure the scan must finish within one cycle per ID plus one
// per bitmap chunk (plus a few cycles of pipeline fill).
module tb_color_scan;
  import grains_pkg::*;
  localparam int NCH = 64;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge, so the asynchronous reset fires
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [47:0] colors_base = 48'h0000_4000_0000;
  logic uid_valid = 0, uid_ready, bm_valid, bm_ready, bm_rewind, out_valid, out_ready = 1;
  logic [31:0] uid = '0, bm_data, color_idx;
  logic [47:0] color_addr;

  color_scan dut (.*);

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endfunction

  logic [31:0] bm [NCH];
  int ptr = 0, n_rewind = 0;
  assign bm_valid = rst_n && ptr < NCH;
  assign bm_data  = (ptr < NCH) ? bm[ptr] : '0;
  always @(posedge clk) begin
    if (!rst_n) ptr <= 0;
    else if (bm_rewind) begin ptr <= 0; n_rewind <= n_rewind + 1; end
    else if (bm_valid && bm_ready) ptr <= ptr + 1;
  end

  function automatic int ref_color(int u);
    int c = 0;
    for (int i = 0; i < u; i++) c += bm[i / 32][i % 32];
    return c;
  endfunction

  int exp_q [$];
  int n_out = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int e;
    e = exp_q.pop_front();
    check(int'(color_idx) == e && color_addr == colors_base + 48'(e) * 4,
          $sformatf("color %0d exp %0d addr %h", color_idx, e, color_addr));
    n_out <= n_out + 1;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(int u);
    @(negedge clk);
    uid_valid = 1; uid = u;
    exp_q.push_back(ref_color(u));
    #1;
    while (!uid_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    uid_valid = 0;
  endtask

  initial begin
    int back, prev, nu;
    longint cyc0;
    for (int c = 0; c < NCH; c++) bm[c] = $urandom & $urandom;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1) one ascending run, no back-pressure: timing
    cyc0 = $time / 10; nu = 0;
    for (int u = $urandom_range(0, 20); u < NCH * 32; u += $urandom_range(1, 90)) begin
      send(u); nu++; prev = u;
    end
    while (n_out < nu) @(posedge clk);
    check($time / 10 - cyc0 <= longint'(2 * nu + NCH + 4),
          $sformatf("ascending scan took %0d cycles for %0d IDs", $time / 10 - cyc0, nu));
    check(n_rewind == 0, "rewind in an ascending run");
    // 2) random runs with steps back and back-pressure
    fork
      forever begin @(negedge clk); out_ready = 1'($urandom_range(0, 3) != 0); end
    join_none
    back = 0;    // prev still holds the last ID of run 1
    for (int n = 0; n < 300; n++) begin
      int u;
      u = ($urandom_range(0, 9) == 0) ? $urandom_range(0, NCH * 32 - 1)
                                      : prev + $urandom_range(0, 40);
      if (u >= NCH * 32) u = $urandom_range(0, NCH * 32 - 1);
      if (u / 32 < prev / 32) back++;
      send(u);
      prev = u;
    end
    while (exp_q.size() > 0) @(posedge clk);
    repeat (3) @(posedge clk);
    check(n_rewind == back, $sformatf("rewinds %0d exp %0d", n_rewind, back));
    $display("rewinds=%0d", n_rewind);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
