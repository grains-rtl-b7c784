// tb_rr_addr_map: checks the round-robin placement of structure pages.
// For random structure bases and byte addresses, the channel, die, plane,
// page and byte offset are compared with an arithmetic reference (channel
// fastest, then die, then plane, then page index). It also checks that 16
// consecutive pages of a structure land on 16 different channels and 128
// consecutive pages on 128 different dies.
module tb_rr_addr_map;
  import grains_pkg::*;
  int checks = 0, failures = 0;
  logic [47:0] base_page, byte_addr;
  phys_addr_t pa;
  logic [BYTE_OFF_W-1:0] byte_off;

  rr_addr_map dut (.*);

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      longint unsigned g;
      base_page = 48'($urandom_range(0, 1 << 20));
      byte_addr = {16'($urandom_range(0, 3)), $urandom};
      #1;
      g = longint'(base_page) + longint'(byte_addr) / PAGE_BYTES;
      check(int'(pa.ch) == g % NUM_CH && int'(pa.die) == (g / NUM_CH) % DIES_PER_CH &&
            int'(pa.plane) == (g / NUM_DIES) % PLANES && longint'(pa.page) == g / (NUM_DIES * PLANES) &&
            int'(byte_off) == byte_addr % PAGE_BYTES,
            $sformatf("base=%0d addr=%0d -> ch%0d die%0d pl%0d pg%0d off%0d", base_page, byte_addr,
                      pa.ch, pa.die, pa.plane, pa.page, byte_off));
    end
    // spreading over channels and dies
    for (int r = 0; r < 20; r++) begin
      bit seen_ch [NUM_CH];
      bit seen_die [NUM_DIES];
      int nch, ndie;
      foreach (seen_ch[i]) seen_ch[i] = 0;
      foreach (seen_die[i]) seen_die[i] = 0;
      base_page = 48'($urandom_range(0, 1 << 20));
      for (int p = 0; p < NUM_DIES; p++) begin
        byte_addr = 48'(p) * PAGE_BYTES + 48'($urandom_range(0, PAGE_BYTES - 1));
        #1;
        if (p < NUM_CH) seen_ch[pa.ch] = 1;
        seen_die[int'(pa.ch) * DIES_PER_CH + int'(pa.die)] = 1;
      end
      nch = 0; ndie = 0;
      foreach (seen_ch[i]) nch += seen_ch[i];
      foreach (seen_die[i]) ndie += seen_die[i];
      check(nch == NUM_CH && ndie == NUM_DIES, $sformatf("spread ch=%0d dies=%0d", nch, ndie));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
