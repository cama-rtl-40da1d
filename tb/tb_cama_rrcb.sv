// tb_cama_rrcb -- self-checking test of the 128x128 reconfigurable crossbar.
//
// 1. Band coverage, found by probing the switch as a black box: column by
//    column all cells are set, one source at a time is driven, and the
//    destinations that rise are recorded.  Every destination d must be
//    reachable from each source d-20 .. d+21 (mod 256) and from d-21 except
//    for the 42 destinations of the upper segments of column-bank 2, the
//    diagonal band of width 43 that the RCB mode stores.
// 2. Random contents and random active states in RCB mode against a
//    cell-by-cell model: cell (row r, column c) connects source
//    (base + r) mod 256 of the column's bank (base 21 / 107 / 193 for
//    columns 0-42 / 43-85 / 86-127) to the lower-segment destination when
//    r < 43 + x and to the upper-segment one otherwise.
// 3. The same in FCB mode against the plain crossbar nv[c] = OR_r cfg & act[r].
// 4. The 16 states sent to the global switch in both modes.
module tb_cama_rrcb;
  import cama_pkg::*;
  logic clk = 0, rst_n = 0;
  logic fcb; logic [255:0] act_in, nv_out; logic we; logic [6:0] wcol;
  logic [127:0] wdata; logic [15:0] gout;
  int checks = 0, failures = 0;

  cama_rrcb dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [127:0] cfg_m [128];
  logic reach [256][256];   // reach[s][d] found by probing

  task automatic wr(input int c, input logic [127:0] d);
    @(negedge clk); we = 1; wcol = 7'(c); wdata = d;
    @(negedge clk); we = 0;
    cfg_m[c] = d;
  endtask

  function automatic void cell_map(input int c, input int r, output int src, output int dst);
    int k, x, base;
    if (c < 43)      begin k = 0; x = c;      base = 21;  end
    else if (c < 86) begin k = 1; x = c - 43; base = 107; end
    else             begin k = 2; x = c - 86; base = 193; end
    src = (base + r) % 256;
    if (r < 43 + x) dst = (k == 0) ? 42 + x : (k == 1) ? 128 + x : 214 + x;
    else            dst = (k == 0) ? 85 + x : (k == 1) ? 171 + x : x;
  endfunction

  initial begin
    int src, dst;
    logic [255:0] exp;
    fcb = 0; act_in = 0; we = 0; wcol = 0; wdata = 0;
    for (int s = 0; s < 256; s++) for (int d = 0; d < 256; d++) reach[s][d] = 0;
    for (int c = 0; c < 128; c++) cfg_m[c] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1. probe
    for (int c = 0; c < 128; c++) begin
      if (c > 0) wr(c - 1, '0);
      wr(c, '1);
      for (int s = 0; s < 256; s++) begin
        act_in = '0; act_in[s] = 1'b1; #1;
        for (int d = 0; d < 256; d++) if (nv_out[d]) reach[s][d] = 1;
      end
    end
    wr(127, '0);
    for (int d = 0; d < 256; d++) begin
      for (int o = -21; o <= 21; o++) begin
        int s;
        s = (d + o + 256) % 256;
        if (o == -21 && d <= 41) continue;   // upper segments of bank 2
        checks++;
        if (!reach[s][d]) begin
          failures++;
          $display("FAIL band: no path %0d -> %0d", s, d);
        end
      end
    end

    // 2. random RCB
    for (int it = 0; it < 6; it++) begin
      for (int c = 0; c < 128; c++)
        wr(c, {$urandom, $urandom, $urandom, $urandom} & {$urandom, $urandom, $urandom, $urandom}
                & {$urandom, $urandom, $urandom, $urandom});
      for (int t = 0; t < 20; t++) begin
        fcb = 0;
        act_in = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom}
               & {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
        #1;
        exp = '0;
        for (int c = 0; c < 128; c++)
          for (int r = 0; r < 128; r++) begin
            cell_map(c, r, src, dst);
            if (cfg_m[c][r] && act_in[src]) exp[dst] = 1'b1;
          end
        checks++;
        if (nv_out !== exp) begin failures++; $display("FAIL RCB it %0d t %0d", it, t); end
        checks++;
        if (gout !== act_in[255:240]) begin failures++; $display("FAIL gout RCB"); end
        // 3. FCB
        fcb = 1; #1;
        exp = '0;
        for (int c = 0; c < 128; c++)
          for (int r = 0; r < 128; r++) if (cfg_m[c][r] && act_in[r]) exp[c] = 1'b1;
        checks++;
        if (nv_out !== exp) begin failures++; $display("FAIL FCB it %0d t %0d", it, t); end
        checks++;
        if (gout !== act_in[127:112]) begin failures++; $display("FAIL gout FCB"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
