// tb_cama_array -- self-checking test of an array of 2 tiles (4 partitions
// of 256 STEs, RCB mode) sharing a 64-port global switch, CAMA-E variant.
//
// A random NFA is generated with band-limited local transitions inside each
// partition and random global transitions from the 16 global-output STEs
// (240..255) of a partition to the 16 global-input STEs (240..255) of any
// partition, programmed into the local and global switches, and run on a
// random stream with stalls and bubbles.  The active states of every
// partition are compared with a reference NFA model for every symbol, and
// transitions that cross tiles must have happened.
module tb_cama_array;
  import cama_pkg::*;
  import cama_tb_pkg::*;
  localparam int NT = 2, NP = NT * 2, NS = NP * 256;

  logic clk = 0, rst_n = 0, clr = 0, step = 0, code_valid = 0;
  logic [31:0] code = '0;
  cfg_wr_t cfg;
  logic [NT-1:0][1:0][255:0] act;
  logic act_valid;
  int checks = 0, failures = 0, n_cross = 0;

  cama_array #(.N_TILES(NT), .PIPELINED(1'b0)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #50000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [255:0]  cls   [NS];
  logic          start [NS];
  logic [NS-1:0] succ  [NS];
  logic [NS-1:0] nv_m, cross_m;
  logic [127:0]  col   [NP][128];
  logic [63:0]   gcol  [64];

  task automatic cfg_write(input cfg_tgt_e t, input int tile, input logic sub, input int addr,
                           input logic [255:0] d);
    @(negedge clk);
    cfg = '0; cfg.we = 1; cfg.tgt = t; cfg.tile = 8'(tile); cfg.sub = sub; cfg.addr = 8'(addr); cfg.data = d;
    @(negedge clk);
    cfg.we = 0;
  endtask

  initial begin
    logic [255:0] sm [NP];
    cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    cross_m = '0;
    for (int p = 0; p < NP; p++) begin
      sm[p] = '0;
      for (int c = 0; c < 128; c++) col[p][c] = '0;
    end
    for (int j = 0; j < 64; j++) gcol[j] = '0;
    for (int s = 0; s < NS; s++) begin
      int p, l, y;
      logic [15:0] w;
      p = s / 256; l = s % 256;
      succ[s] = '0; cls[s] = '0;
      y = $urandom_range(0, 11);
      w = tz_code16(y); cls[s][y] = 1;
      if (l >= 240) begin w = '0; cls[s] = '1; end        // global STEs: wildcard
      cfg_write(CFG_CAM, p / 2, 1'(p % 2), l, {240'b0, w});
      start[s] = ($urandom_range(0, 15) == 0) && l < 200;
      sm[p][l] = start[s];
      for (int e = 0; e < $urandom_range(0, 2); e++) begin
        int d, cc, rr;
        d = (l + $urandom_range(0, 40) - 20 + 256) % 256;
        void'(rrcb_cell(l, d, cc, rr));
        col[p][cc][rr] = 1;
        succ[s][p * 256 + d] = 1;
      end
      // feed the global-output STEs from below
      if (l >= 225 && l < 240) begin
        int d, cc, rr;
        d = 240 + (l - 225);
        void'(rrcb_cell(l, d, cc, rr));
        col[p][cc][rr] = 1;
        succ[s][p * 256 + d] = 1;
      end
    end
    // random global connections (sparse)
    for (int ps = 0; ps < NP; ps++)
      for (int i = 0; i < 16; i++) begin
        int pd, j;
        pd = $urandom_range(0, NP - 1); j = $urandom_range(0, 15);
        gcol[pd * 16 + j][ps * 16 + i] = 1;
        succ[ps * 256 + 240 + i][pd * 256 + 240 + j] = 1;
        if (pd / 2 != ps / 2) cross_m[ps * 256 + 240 + i] = 1;
      end
    for (int p = 0; p < NP; p++) begin
      for (int c = 0; c < 128; c++) cfg_write(CFG_LSW, p / 2, 1'(p % 2), c, 256'(col[p][c]));
      cfg_write(CFG_SMASK, p / 2, 1'(p % 2), 0, sm[p]);
    end
    for (int j = 0; j < 64; j++) cfg_write(CFG_GSW, 0, 0, j, 256'(gcol[j]));

    nv_m = '0;
    for (int done = 0; done < 600; ) begin
      int sym;
      @(negedge clk);
      step = ($urandom_range(0, 9) != 0);
      code_valid = ($urandom_range(0, 7) != 0);
      sym = $urandom_range(0, 11);
      code = {16'hFFFF, ~tz_code16(sym)};
      #1;
      if (!step || !code_valid) continue;
      begin
        logic [NS-1:0] a, n;
        a = '0; n = '0;
        for (int s = 0; s < NS; s++) a[s] = (nv_m[s] | start[s]) & cls[s][sym];
        for (int s = 0; s < NS; s++) if (a[s]) n |= succ[s];
        if ((a & cross_m) != '0) n_cross++;
        checks++;
        if (act !== a) begin failures++; $display("FAIL act at symbol %0d", done); end
        checks++;
        if (!act_valid) begin failures++; $display("FAIL act_valid"); end
        nv_m = n;
      end
      done++;
    end
    $display("symbols with an active cross-tile STE: %0d", n_cross);
    checks++;
    if (n_cross == 0) begin failures++; $display("FAIL no cross-tile transition"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
