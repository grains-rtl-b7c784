// flash_store_pkg: contents of the simulated NAND flash array, shared by all
// nand_die_model instances of a testbench.
//
// A sparse array keyed by {die, plane, page, column word}. Words never
// written read back as a fixed scramble of their address, so an unplanned
// read still returns deterministic data. Testbenches plant Offsets entries,
// Strings windows, unitig IDs and Colors entries with poke().
package flash_store_pkg;

  logic [31:0] store [longint unsigned];

  function automatic longint unsigned key(int unsigned die, int unsigned plane,
                                          int unsigned page, int unsigned col);
    return (longint'(die) << 48) | (longint'(plane) << 40) | (longint'(page) << 16) | longint'(col);
  endfunction

  function automatic logic [31:0] scramble(longint unsigned k);
    logic [63:0] x;
    x = k ^ 64'h9E37_79B9_7F4A_7C15;
    x = x ^ (x >> 29);
    x = x * 64'hBF58_476D_1CE4_E5B9;
    x = x ^ (x >> 32);
    return x[31:0];
  endfunction

  function automatic logic [31:0] peek(int unsigned die, int unsigned plane,
                                       int unsigned page, int unsigned col);
    longint unsigned k = key(die, plane, page, col);
    if (store.exists(k)) return store[k];
    return scramble(k);
  endfunction

  function automatic void poke(int unsigned die, int unsigned plane,
                               int unsigned page, int unsigned col, logic [31:0] v);
    store[key(die, plane, page, col)] = v;
  endfunction

  // bit-level access: page bit b is bit b%32 of column word b/32
  function automatic logic [63:0] peek_bits(int unsigned die, int unsigned plane,
                                            int unsigned page, int unsigned b, int n);
    logic [63:0] v = '0;
    for (int i = 0; i < n; i++) begin
      logic [31:0] w = peek(die, plane, page, (b + i) / 32);
      v[i] = w[(b + i) % 32];
    end
    return v;
  endfunction

  function automatic void poke_bits(int unsigned die, int unsigned plane,
                                    int unsigned page, int unsigned b, int n, logic [63:0] v);
    for (int i = 0; i < n; i++) begin
      logic [31:0] w = peek(die, plane, page, (b + i) / 32);
      w[(b + i) % 32] = v[i];
      poke(die, plane, page, (b + i) / 32, w);
    end
  endfunction

endpackage
