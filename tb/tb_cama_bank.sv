// tb_cama_bank -- end-to-end test of a reduced bank (2 arrays x 2 tiles),
// run for both pipeline variants (CAMA-E and CAMA-T) against one reference.
//
// The four tiles are set to different modes so that one stream exercises all
// of them: array 0 tile 0 16-bit RCB, array 0 tile 1 16-bit FCB, array 1
// tile 0 32-bit, array 1 tile 1 16-bit RCB with one search bit masked.  A
// random NFA is generated per partition (compressed, negated and wildcard
// classes, start states, local transitions, global transitions between the
// partitions of each array, a random report mask), programmed through the
// configuration port, and a random stream is fed through the input buffer
// in blocks, refilled only when the buffer raises its empty interrupt.
// Whenever the output buffer raises its full interrupt, the host reads all
// 64 entries and clears it; at the end it reads the rest.  Every report
// entry must equal, in order, the one the reference NFA produces.  Each
// mechanism (all three modes, global transitions, negation, start states,
// masked search bits, several reports of one symbol and the stall they
// cause, output-full and input-empty interrupts) must have happened.
module tb_cama_bank;
  import cama_pkg::*;
  import cama_tb_pkg::*;
  localparam int NA = 2, NT = 2, NP = NA * NT * 2, NS = NP * 256, NSYM = 700, ALPHA = 24;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    #2000000; failures++; $display("watchdog expired: sym_count %0d/%0d stall %0d/%0d out_count %0d", g_v[0].sym_count, g_v[1].sym_count, g_v[0].stall, g_v[1].stall, g_v[0].out_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ------------------------------------------------------------ the NFA
  mode_e         tmode [NA * NT];
  logic [15:0]   tmask [NA * NT];
  logic [15:0]   w0 [NS], w1 [NS];
  logic          ng [NS];
  logic [255:0]  cls [NS];
  logic          start [NS], rep [NS], isneg [NS];
  logic [NS-1:0] succ [NS];
  logic [NS-1:0] gsrc;                // sources of global transitions
  logic [127:0]  col [NP][128];
  logic [63:0]   gcol [NA][64];
  logic [7:0]    stream [NSYM];
  report_t       expq [$];
  int            n_m [3], n_global, n_neg, n_start, n_mask, n_multi;

  function automatic logic [31:0] code32(input int y);
    logic [15:0] hi;
    hi = '1; hi[y / 16] = 1'b0;
    return {hi, tz_code16(y)};
  endfunction

  function automatic bit ste_match(input int s, input int y, input int tile);
    logic [31:0] c;
    logic ml0, ml1;
    c = code32(y);
    ml0 = ((w0[s] & ~c[15:0] & ~tmask[tile]) == '0) ^ ng[s];
    ml1 = ((w1[s] & ~c[31:16]) == '0);
    return (tmode[tile] == MODE_32) ? (ml0 && ml1) : ml0;
  endfunction

  // place a transition inside a partition's switch(es)
  task automatic add_edge(input int p, input int l, input int d);
    int tile, cc, rr;
    tile = p / 2;
    succ[p * 256 + l][p * 256 + d] = 1;
    if (tmode[tile] == MODE_RCB16) begin
      if (!rrcb_cell(l, d, cc, rr)) $display("placement failed");
      col[p][cc][rr] = 1;
    end else begin
      col[tile * 2 + l / 128][d % 128][l % 128] = 1;
    end
  endtask

  task automatic make_nfa();
    tmode[0] = MODE_RCB16; tmode[1] = MODE_FCB16; tmode[2] = MODE_32; tmode[3] = MODE_RCB16;
    tmask[0] = '0; tmask[1] = '0; tmask[2] = '0; tmask[3] = 16'h0001;
    for (int p = 0; p < NP; p++) for (int c = 0; c < 128; c++) col[p][c] = '0;
    for (int a = 0; a < NA; a++) for (int j = 0; j < 64; j++) gcol[a][j] = '0;
    gsrc = '0;
    for (int s = 0; s < NS; s++) begin
      int p, l, tile, ty;
      p = s / 256; l = s % 256; tile = p / 2;
      succ[s] = '0; w0[s] = '1; w1[s] = '1; ng[s] = 0; start[s] = 0; rep[s] = 0;
      if (tmode[tile] != MODE_RCB16 && p % 2 == 1) continue;   // unused partition
      ty = $urandom_range(0, 9);
      if (ty == 9 || (l >= 240) || (tmode[tile] != MODE_RCB16 && l >= 112 && l < 128)) w0[s] = '0;
      else if (ty < 5) w0[s] = tz_code16($urandom_range(0, ALPHA - 1));
      else begin
        int g; g = $urandom_range(0, 3);
        w0[s] = tz_code16(g * 6);
        for (int y = g * 6 + 1; y < g * 6 + 6; y++) if ($urandom_range(0, 1) == 1) w0[s] &= tz_code16(y);
      end
      if (ty == 4 || ty == 8) ng[s] = (tmode[tile] != MODE_32);
      if (tmode[tile] == MODE_32) begin
        w1[s] = '1;
        if ($urandom_range(0, 1) == 1) w1[s][0] = 1'b0;  // prefix 0 allowed
        if ($urandom_range(0, 1) == 1) w1[s][1] = 1'b0;  // prefix 1 allowed
        if (w1[s] == '1) w1[s] = '0;
      end
      isneg[s] = ng[s];
      start[s] = ($urandom_range(0, 15) == 0) && (l < 200);
      rep[s]   = ($urandom_range(0, 24) == 0);
      for (int y = 0; y < 256; y++) cls[s][y] = ste_match(s, y, tile);
      for (int e = 0; e < $urandom_range(0, 2); e++) begin
        int d;
        if (tmode[tile] == MODE_RCB16) d = (l + $urandom_range(0, 40) - 20 + 256) % 256;
        else d = (l / 128) * 128 + $urandom_range(0, 127);
        add_edge(p, l, d);
      end
    end
    // global transitions: 24 random ones per array between its four ports
    for (int a = 0; a < NA; a++)
      for (int k = 0; k < 24; k++) begin
        int ps, pd, i, j, src, dst;
        ps = $urandom_range(0, 3); pd = $urandom_range(0, 3);
        i = $urandom_range(0, 15); j = $urandom_range(0, 15);
        gcol[a][pd * 16 + j][ps * 16 + i] = 1;
        // STE behind the global output port ps, and behind input port pd
        if (tmode[a * 2 + ps / 2] == MODE_RCB16) src = (a * 4 + ps) * 256 + 240 + i;
        else src = (a * 4 + (ps / 2) * 2) * 256 + ((ps % 2) ? 240 : 112) + i;
        if (tmode[a * 2 + pd / 2] == MODE_RCB16) dst = (a * 4 + pd) * 256 + 240 + j;
        else dst = (a * 4 + (pd / 2) * 2) * 256 + 240 + j;
        succ[src][dst] = 1;
        gsrc[src] = 1;
      end
    // feed the global output STEs from neighbours so they become active
    for (int p = 0; p < NP; p++) begin
      int tile; tile = p / 2;
      if (tmode[tile] != MODE_RCB16 && p % 2 == 1) continue;
      for (int i = 0; i < 16; i++) begin
        add_edge(p, 226 + i, 240 + i);
        if (tmode[tile] != MODE_RCB16) add_edge(p, 98 + i, 112 + i);
      end
    end
    for (int k = 0; k < NSYM; k++) stream[k] = 8'($urandom_range(0, ALPHA - 1));
    // reference run
    begin
      logic [NS-1:0] nv, act;
      nv = '0;
      for (int k = 0; k < NSYM; k++) begin
        int nrep;
        nrep = 0;
        act = '0;
        for (int s = 0; s < NS; s++) act[s] = (nv[s] | start[s]) & cls[s][stream[k]];
        for (int s = 0; s < NS; s++) if (act[s]) begin
          int tile; tile = s / 512;
          n_m[tmode[tile]]++;
          if (gsrc[s]) n_global++;
          if (isneg[s]) n_neg++;
          if (start[s] && !nv[s]) n_start++;
          if (tmask[tile] != 0 && ((w0[s] & ~code32(stream[k])[15:0]) != '0)) n_mask++;
          if (rep[s]) begin
            expq.push_back('{cycle: 32'(k), symbol: stream[k], partition: 8'(s / 256), state: 8'(s % 256)});
            nrep++;
          end
        end
        if (nrep > 1) n_multi++;
        nv = '0;
        for (int s = 0; s < NS; s++) if (act[s]) nv |= succ[s];
      end
    end
  endtask

  bit nfa_ready = 0;
  initial begin
    make_nfa();
    $display("reference: %0d reports; active in RCB/FCB/32-bit tiles %0d/%0d/%0d; global %0d, negated %0d, start %0d, masked %0d, multi-report symbols %0d",
             expq.size(), n_m[0], n_m[1], n_m[2], n_global, n_neg, n_start, n_mask, n_multi);
    nfa_ready = 1;
  end

  bit done [2];

  // ------------------------------------------------------------ the two banks
  for (genvar v = 0; v < 2; v++) begin : g_v
    logic clr = 0, in_push = 0, in_full, irq_in_empty, out_clear = 0, irq_out_full, stall;
    logic [7:0] in_sym = 0, in_count;
    cfg_wr_t cfg = '0;
    logic [5:0] out_rd_idx = 0;
    report_t out_rd_entry;
    logic [6:0] out_count;
    logic [31:0] sym_count;
    int n_stall = 0, n_ofull = 0, n_iempty = 0, got = 0;

    cama_bank #(.N_ARRAYS(NA), .N_TILES(NT), .PIPELINED(v)) dut (.*);

    always @(posedge clk) if (rst_n && stall) n_stall++;

    task automatic wr(input cfg_tgt_e t, input int a, input int tile, input int sub, input int addr,
                      input logic [255:0] d);
      @(negedge clk);
      cfg = '0; cfg.we = 1; cfg.tgt = t; cfg.arr = 8'(a); cfg.tile = 8'(tile); cfg.sub = 1'(sub);
      cfg.addr = 8'(addr); cfg.data = d;
      @(negedge clk);
      cfg.we = 0;
    endtask

    task automatic drain();   // called at a negedge; one read per cycle
      for (int i = 0; i < int'(out_count); i++) begin
        out_rd_idx = 6'(i); #1;
        checks++;
        if (got >= expq.size() || out_rd_entry !== expq[got]) begin
          failures++;
          $display("FAIL variant %0d report %0d: got c%0d sym%0d p%0d s%0d exp c%0d p%0d s%0d", v, got,
                   out_rd_entry.cycle, out_rd_entry.symbol, out_rd_entry.partition, out_rd_entry.state,
                   expq[got].cycle, expq[got].partition, expq[got].state);
        end
        got++;
        @(negedge clk);
      end
      out_clear = 1; @(negedge clk); out_clear = 0;
    endtask

    initial begin
      int pushed;
      wait (nfa_ready && rst_n);
      for (int y = 0; y < 256; y++) wr(CFG_ENC, 0, 0, 0, y, 256'(~code32(y)));
      for (int t = 0; t < NA * NT; t++) begin
        wr(CFG_MODE, t / NT, t % NT, 0, 0, 256'({tmask[t], tmask[t], 14'b0, 2'(tmode[t])}));
        for (int sub = 0; sub < 2; sub++) begin
          int p; logic [255:0] sm, rm;
          p = t * 2 + sub;
          sm = '0; rm = '0;
          for (int l = 0; l < 256; l++) begin
            int s; s = p * 256 + l;
            sm[l] = start[s]; rm[l] = rep[s];
            if (tmode[t] == MODE_RCB16 || sub == 0)
              wr(CFG_CAM, t / NT, t % NT, sub, l, {239'b0, ng[s], w0[s]});
            else
              wr(CFG_CAM, t / NT, t % NT, sub, l, {239'b0, 1'b0, w1[p * 256 - 256 + l]});
          end
          wr(CFG_SMASK, t / NT, t % NT, sub, 0, sm);
          wr(CFG_RMASK, t / NT, t % NT, sub, 0, rm);
          for (int c = 0; c < 128; c++) wr(CFG_LSW, t / NT, t % NT, sub, c, 256'(col[p][c]));
        end
      end
      for (int a = 0; a < NA; a++)
        for (int j = 0; j < 64; j++) wr(CFG_GSW, a, 0, 0, j, 256'(gcol[a][j]));
      // stream
      pushed = 0;
      while (pushed < NSYM || sym_count < NSYM || stall || out_count != 0 || !irq_in_empty) begin
        @(negedge clk);
        if (irq_out_full) begin n_ofull++; drain(); end
        if (irq_in_empty && pushed < NSYM) begin
          n_iempty++;
          for (int k = 0; k < 128 && pushed < NSYM; k++) begin
            in_push = 1; in_sym = stream[pushed]; pushed++;
            @(negedge clk);
          end
          in_push = 0;
        end
        if (pushed == NSYM && sym_count == NSYM && !stall) begin
          repeat (4) @(negedge clk);
          if (!stall) drain();
          if (sym_count == NSYM && !stall && out_count == 0) break;
        end
      end
      checks++;
      if (got != expq.size()) begin failures++; $display("FAIL variant %0d: %0d of %0d reports", v, got, expq.size()); end
      $display("variant %0d: stall cycles %0d, output-full interrupts %0d, input-empty interrupts %0d",
               v, n_stall, n_ofull, n_iempty);
      checks++;
      if (n_stall == 0 || n_ofull == 0 || n_iempty < 2) begin failures++; $display("FAIL mechanism not exercised"); end
      done[v] = 1;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (done[0] && done[1]);
    checks++;
    if (n_m[0] == 0 || n_m[1] == 0 || n_m[2] == 0 || n_global == 0 || n_neg == 0 || n_start == 0 ||
        n_mask == 0 || n_multi == 0) begin
      failures++; $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
