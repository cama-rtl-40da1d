// cama_tb_pkg -- helpers shared by the CAMA testbenches.
//
//  * tz_code16: a 16-bit Two-Zeros prefix code (10-bit prefix holding two
//    '0's, 45 prefixes; 6-bit one-zero suffix), enough for 256 symbols.
//    Symbols i and j share a prefix when i/6 == j/6.
//  * oz_code32: a 32-bit One-Zero prefix code, bits [31:16] the prefix with
//    one '0' at i/16 and bits [15:0] the suffix with one '0' at i%16.
//  * rrcb_cell: where a connection s -> d of a 256-state partition sits in a
//    local switch in RCB mode (column, row), found by scanning every cell of
//    the switch with the switch's documented wiring.
// The encoder holds the inverted codes (search lines = ~code).
package cama_tb_pkg;

  function automatic logic [15:0] tz_code16(input int i);
    int n;
    logic [15:0] c;
    n = 0;
    c = '1;
    for (int z1 = 0; z1 < 10; z1++)
      for (int z2 = z1 + 1; z2 < 10; z2++) begin
        if (n == i / 6) begin c[6 + z1] = 1'b0; c[6 + z2] = 1'b0; end
        n++;
      end
    c[i % 6] = 1'b0;
    return c;
  endfunction

  function automatic logic [31:0] oz_code32(input int i);
    logic [31:0] c;
    c = '1;
    c[16 + i / 16] = 1'b0;
    c[i % 16] = 1'b0;
    return c;
  endfunction

  // source and destination of cell (row r, column c) of a switch in RCB mode
  function automatic void rrcb_cell_map(input int c, input int r, output int src, output int dst);
    int k, x, base;
    if (c < 43)      begin k = 0; x = c;      base = 21;  end
    else if (c < 86) begin k = 1; x = c - 43; base = 107; end
    else             begin k = 2; x = c - 86; base = 193; end
    src = (base + r) % 256;
    if (r < 43 + x) dst = (k == 0) ? 42 + x : (k == 1) ? 128 + x : 214 + x;
    else            dst = (k == 0) ? 85 + x : (k == 1) ? 171 + x : x;
  endfunction

  function automatic bit rrcb_cell(input int s, input int d, output int col, output int row);
    int src, dst;
    for (int c = 0; c < 128; c++)
      for (int r = 0; r < 128; r++) begin
        rrcb_cell_map(c, r, src, dst);
        if (src == s && dst == d) begin col = c; row = r; return 1'b1; end
      end
    col = 0; row = 0;
    return 1'b0;
  endfunction

endpackage
