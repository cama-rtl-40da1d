// tb_cama_tile -- self-checking test of one tile in its three modes, for
// both pipeline variants side by side (CAMA-E and CAMA-T instances driven by
// the same inputs).
//
// For each mode a random homogeneous NFA is generated (symbol classes that
// fit one CAM entry: single symbols, suffix-compressed groups, negated
// classes, wildcards; random start states; random transitions: within the
// +-20 band in RCB mode, anywhere inside a 128-state half in the FCB modes),
// programmed into the tile, and run on a random symbol stream with random
// stall cycles (step low) and bubbles (code_valid low).  The global ports of
// each tile are looped back (gin[0] = gout[1], gin[1] = gout[0]) and the
// model adds the matching transitions.  The active states of every symbol
// are compared with a reference NFA model; for CAMA-T they must appear one
// step after the search, for CAMA-E in the search cycle.
module tb_cama_tile;
  import cama_pkg::*;
  import cama_tb_pkg::*;

  logic clk = 0, rst_n = 0, clr = 0, step = 0, code_valid = 0;
  logic [31:0] code = '0;
  cfg_wr_t cfg;
  logic [1:0][15:0] gin_e, gout_e, gin_t, gout_t;
  logic [1:0][255:0] act_e, act_t;
  logic av_e, av_t;
  mode_e mode_e_q, mode_t_q;
  int checks = 0, failures = 0;
  int n_active = 0, n_global = 0, n_stall = 0, n_bubble = 0;

  cama_tile #(.PIPELINED(1'b0)) dut_e (.clk, .rst_n, .clr, .step, .code_valid, .code,
    .gin(gin_e), .gout(gout_e), .act(act_e), .act_valid(av_e), .mode(mode_e_q), .cfg);
  cama_tile #(.PIPELINED(1'b1)) dut_t (.clk, .rst_n, .clr, .step, .code_valid, .code,
    .gin(gin_t), .gout(gout_t), .act(act_t), .act_valid(av_t), .mode(mode_t_q), .cfg);

  assign gin_e = {gout_e[0], gout_e[1]};
  assign gin_t = {gout_t[0], gout_t[1]};

  always #5 clk = ~clk;

  initial begin
    #50000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ------------------------------------------------------------ model
  logic [255:0] cls   [512];
  logic         start [512];
  logic [511:0] succ  [512];
  logic [511:0] nv_m;
  logic [127:0] col   [2][128];
  int           nst;

  task automatic cfg_write(input cfg_tgt_e t, input logic sub, input int addr, input logic [255:0] d);
    @(negedge clk);
    cfg = '0; cfg.we = 1; cfg.tgt = t; cfg.sub = sub; cfg.addr = 8'(addr); cfg.data = d;
    @(negedge clk);
    cfg.we = 0;
  endtask

  function automatic logic [511:0] model_act(input int sym);
    logic [511:0] a;
    a = '0;
    for (int s = 0; s < nst; s++) a[s] = (nv_m[s] | start[s]) & cls[s][sym];
    return a;
  endfunction

  function automatic logic [511:0] model_next(input logic [511:0] a);
    logic [511:0] n;
    n = '0;
    for (int s = 0; s < nst; s++) if (a[s]) n |= succ[s];
    return n;
  endfunction

  // build one random class; returns CAM words for sub-array 0 / 1 and neg
  task automatic make_class(input int s, input mode_e m, output logic [15:0] w0,
                            output logic [15:0] w1, output logic neg);
    int ty;
    logic [31:0] acc;
    cls[s] = '0; neg = 0; w1 = '1;
    ty = $urandom_range(0, 9);
    if (m != MODE_32) begin
      int g; g = $urandom_range(0, 2);
      acc = '1;
      if (ty == 9) begin acc = '0; cls[s] = '1; end               // wildcard
      else if (ty < 4) begin                                      // one symbol
        int y; y = $urandom_range(0, 17);
        acc[15:0] = tz_code16(y); cls[s][y] = 1;
      end else begin                                              // group subset
        for (int y = g * 6; y < g * 6 + 6; y++)
          if ($urandom_range(0, 1) == 1) begin acc[15:0] &= tz_code16(y); cls[s][y] = 1; end
        if (cls[s] == '0) begin acc[15:0] = tz_code16(g * 6); cls[s][g * 6] = 1; end
      end
      if (ty == 8 || ty == 3) begin neg = 1; cls[s] = ~cls[s]; end  // negation
      w0 = acc[15:0];
    end else begin
      acc = '1;
      if (ty == 9) begin acc = '0; cls[s] = '1; end
      else if (ty < 5) begin                       // same prefix, suffix subset
        int g; g = $urandom_range(0, 2);
        acc[31:16] = oz_code32(g * 16)[31:16];
        for (int u = 0; u < 16; u++)
          if ($urandom_range(0, 3) == 0) begin acc[15:0] &= oz_code32(u)[15:0]; cls[s][g*16+u] = 1; end
        if (cls[s] == '0) begin acc[15:0] = oz_code32(0)[15:0]; cls[s][g*16] = 1; end
      end else begin                               // same suffix, prefix subset
        int u; u = $urandom_range(0, 15);
        acc[15:0] = oz_code32(u)[15:0];
        for (int g = 0; g < 3; g++)
          if ($urandom_range(0, 1) == 1) begin acc[31:16] &= oz_code32(g*16)[31:16]; cls[s][g*16+u] = 1; end
        if (cls[s] == '0) begin acc[31:16] = oz_code32(0)[31:16]; cls[s][u] = 1; end
      end
      w0 = acc[15:0]; w1 = acc[31:16];
    end
  endtask

  task automatic program_nfa(input mode_e m);
    logic [15:0] w0, w1; logic neg;
    logic [255:0] sm [2];
    nst = (m == MODE_RCB16) ? 512 : 256;
    for (int h = 0; h < 2; h++) for (int c = 0; c < 128; c++) col[h][c] = '0;
    sm[0] = '0; sm[1] = '0;
    for (int s = 0; s < 512; s++) begin succ[s] = '0; start[s] = 0; cls[s] = '0; end
    cfg_write(CFG_MODE, 0, 0, 256'(m));
    for (int s = 0; s < nst; s++) begin
      int p, l;
      p = s / 256; l = s % 256;
      make_class(s, m, w0, w1, neg);
      if (m == MODE_RCB16) cfg_write(CFG_CAM, 1'(p), l, {239'b0, neg, w0});
      else begin
        cfg_write(CFG_CAM, 0, l, {239'b0, neg, w0});
        cfg_write(CFG_CAM, 1, l, {239'b0, 1'b0, w1});
      end
      start[s] = ($urandom_range(0, 11) == 0);
      sm[p][l] = start[s];
      for (int e = 0; e < $urandom_range(0, 3); e++) begin
        int d, cc, rr;
        if (m == MODE_RCB16) begin
          d = (l + $urandom_range(0, 40) - 20 + 256) % 256;
          if (!rrcb_cell(l, d, cc, rr)) begin failures++; $display("FAIL place %0d->%0d", l, d); end
          col[p][cc][rr] = 1;
          succ[s][p * 256 + d] = 1;
        end else begin
          d = (l / 128) * 128 + $urandom_range(0, 127);
          col[l / 128][d % 128][l % 128] = 1;
          succ[s][d] = 1;
        end
      end
    end
    // transitions through the looped-back global ports
    for (int i = 0; i < 16; i++) begin
      if (m == MODE_RCB16) begin
        succ[240 + i][256 + 240 + i] = 1;
        succ[256 + 240 + i][240 + i] = 1;
      end else begin
        succ[112 + i][240 + i] = 1;
        succ[240 + i][240 + i] = 1;
      end
    end
    for (int h = 0; h < 2; h++) for (int c = 0; c < 128; c++) cfg_write(CFG_LSW, 1'(h), c, 256'(col[h][c]));
    cfg_write(CFG_SMASK, 0, 0, sm[0]);
    cfg_write(CFG_SMASK, 1, 0, sm[1]);
  endtask

  function automatic logic [511:0] dut_act(input logic [1:0][255:0] a);
    return (nst == 512) ? {a[1], a[0]} : {256'b0, a[0]};
  endfunction

  task automatic run(input mode_e m, input int nsym);
    logic [511:0] exp_t; bit have_t;
    int done;
    have_t = 0; done = 0;
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    nv_m = '0;
    while (done < nsym || have_t) begin
      int sym;
      @(negedge clk);
      step = ($urandom_range(0, 9) != 0);
      code_valid = (done < nsym) && ($urandom_range(0, 7) != 0);
      sym = (m == MODE_32) ? $urandom_range(0, 47) : $urandom_range(0, 17);
      code = (m == MODE_32) ? ~oz_code32(sym) : {16'hFFFF, ~tz_code16(sym)};
      #1;
      if (!step) begin n_stall++; continue; end
      if (!code_valid) n_bubble++;
      // CAMA-T: active states of the previous search
      checks++;
      if (av_t !== have_t) begin failures++; $display("FAIL T act_valid"); end
      if (have_t) begin
        checks++;
        if (dut_act(act_t) !== exp_t) begin failures++; $display("FAIL T act mode %0d", m); end
        have_t = 0;
      end
      checks++;
      if (av_e !== code_valid) begin failures++; $display("FAIL E act_valid"); end
      if (code_valid) begin
        logic [511:0] a;
        a = model_act(sym);
        if (a[511:240] & ((nst == 512) ? {16'hFFFF, 240'b0, 16'hFFFF, 240'b0} : {256'b0, 16'hFFFF, 240'b0})) n_global++;
        if (a != '0) n_active++;
        checks++;
        if (dut_act(act_e) !== a) begin failures++; $display("FAIL E act mode %0d sym %0d", m, done); end
        nv_m = model_next(a);
        exp_t = a; have_t = 1;
        done++;
      end
    end
    step = 0; code_valid = 0;
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    program_nfa(MODE_RCB16); run(MODE_RCB16, 300);
    program_nfa(MODE_FCB16); run(MODE_FCB16, 300);
    program_nfa(MODE_32);    run(MODE_32, 300);
    $display("active symbols %0d, global-port activity %0d, stalls %0d, bubbles %0d",
             n_active, n_global, n_stall, n_bubble);
    checks++;
    if (n_active < 100 || n_global == 0 || n_stall == 0 || n_bubble == 0) begin
      failures++; $display("FAIL too little activity");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
