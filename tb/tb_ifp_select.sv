// tb_ifp_select: checks the on-die selection unit against a byte-level
// reference of a random page: the entry returned for random byte offsets
// (aligned and straddling two column words) and the 2- or 3-cycle latency.
module tb_ifp_select;
  import grains_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge, so the asynchronous reset fires
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [WORD_BITS-1:0] page [PAGE_WORDS];
  logic start = 0, busy, pb_rd, done;
  logic [BYTE_OFF_W-1:0] byte_off = '0;
  logic [COL_W-1:0] pb_col;
  logic [WORD_BITS-1:0] pb_data;
  logic [ENTRY_BITS-1:0] data;

  ifp_select dut (.*);

  always_ff @(posedge clk) if (pb_rd) pb_data <= page[pb_col];

  function automatic logic [7:0] byte_at(int b);
    return page[b / 4][8 * (b % 4) +: 8];
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < PAGE_WORDS; i++) page[i] = $urandom;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int n = 0; n < 400; n++) begin
      int off, lat;
      logic [31:0] exp;
      off = (n < 8) ? n : $urandom_range(0, PAGE_BYTES - 4);
      exp = {byte_at(off + 3), byte_at(off + 2), byte_at(off + 1), byte_at(off)};
      @(negedge clk);
      start = 1; byte_off = BYTE_OFF_W'(off);
      @(negedge clk);
      start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (data !== exp) begin
        failures++;
        $display("FAIL off=%0d got %h exp %h", off, data, exp);
      end
      checks++;
      if (lat != ((off % 4 == 0) ? 2 : 3)) begin
        failures++;
        $display("FAIL latency off=%0d lat=%0d", off, lat);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
