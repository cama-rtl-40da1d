// tb_cama_bank_full -- the bank at its full size (16 arrays x 8 tiles,
// 65,536 STEs, CAMA-E), every parameter at its default.
//
// Two copies of the NFA of the pattern (a|b)e*cd+ are programmed: one in
// array 0, tile 0 (partition 0, states 10..13), and one in the last tile
// of the last array whose final state sits in the other sub-array,
// reached through the array's global switch (partition 255, states
// 250..252 -> global port 15 -> port 14 -> partition 254, state 245).  The
// final state reports.  A stream of 120 symbols goes through the input
// buffer; the report entries read from the output buffer must equal those
// of a reference matcher, in order.  The stream repeats a text that
// holds the pattern, parts of it and other symbols, with random skips.  The run must take one cycle per
// symbol plus one stall cycle per extra report of a symbol.
module tb_cama_bank_full;
  import cama_pkg::*;
  import cama_tb_pkg::*;
  localparam int N = 120;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clr = 0, in_push = 0, in_full, irq_in_empty, out_clear = 0, irq_out_full, stall;
  logic [7:0] in_sym = 0, in_count;
  cfg_wr_t cfg = '0;
  logic [5:0] out_rd_idx = 0;
  report_t out_rd_entry;
  logic [6:0] out_count;
  logic [31:0] sym_count;

  cama_bank dut (.*);

  initial begin
    #200000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(input string w, input logic c);
    checks++; if (!c) begin failures++; $display("FAIL %s", w); end
  endtask

  task automatic wr(input cfg_tgt_e t, input int a, input int tile, input int sub, input int addr,
                    input logic [255:0] d);
    @(negedge clk);
    cfg = '0; cfg.we = 1; cfg.tgt = t; cfg.arr = 8'(a); cfg.tile = 8'(tile); cfg.sub = 1'(sub);
    cfg.addr = 8'(addr); cfg.data = d;
    @(negedge clk);
    cfg.we = 0;
  endtask

  // local transition in an RCB-mode switch
  task automatic edge_rcb(input int a, input int tile, input int sub, input int s, input int d,
                          ref logic [127:0] cols [2][128]);
    int c, r;
    if (!rrcb_cell(s, d, c, r)) $display("placement failed");
    cols[sub][c][r] = 1'b1;
  endtask

  logic [7:0] str [N];
  report_t    exp_q [$];

  initial begin
    logic [15:0] cab, ce, cc, cd;
    logic [127:0] c0 [2][128], c7 [2][128];
    logic [255:0] gcol;
    int nrep, extra, t0, t1, got;
    cab = tz_code16("a") & tz_code16("b");
    ce = tz_code16("e"); cc = tz_code16("c"); cd = tz_code16("d");
    for (int s = 0; s < 2; s++) for (int c = 0; c < 128; c++) begin c0[s][c] = '0; c7[s][c] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int y = 0; y < 256; y++) wr(CFG_ENC, 0, 0, 0, y, 256'({16'hffff, ~tz_code16(y)}));
    // copy 1: array 0 tile 0 partition 0, states 10 (a|b) 11 (e) 12 (c) 13 (d)
    wr(CFG_CAM, 0, 0, 0, 10, 256'(cab)); wr(CFG_CAM, 0, 0, 0, 11, 256'(ce));
    wr(CFG_CAM, 0, 0, 0, 12, 256'(cc));  wr(CFG_CAM, 0, 0, 0, 13, 256'(cd));
    edge_rcb(0, 0, 0, 10, 11, c0); edge_rcb(0, 0, 0, 10, 12, c0); edge_rcb(0, 0, 0, 11, 11, c0);
    edge_rcb(0, 0, 0, 11, 12, c0); edge_rcb(0, 0, 0, 12, 13, c0); edge_rcb(0, 0, 0, 13, 13, c0);
    wr(CFG_SMASK, 0, 0, 0, 0, 256'(1) << 10);
    wr(CFG_RMASK, 0, 0, 0, 0, 256'(1) << 13);
    for (int c = 0; c < 128; c++) wr(CFG_LSW, 0, 0, 0, c, 256'(c0[0][c]));
    // copy 2: array 15 tile 7, sub 1 states 250 (a|b) 251 (e) 252 (c); sub 0 state 245 (d)
    wr(CFG_CAM, 15, 7, 1, 250, 256'(cab)); wr(CFG_CAM, 15, 7, 1, 251, 256'(ce));
    wr(CFG_CAM, 15, 7, 1, 252, 256'(cc));  wr(CFG_CAM, 15, 7, 0, 245, 256'(cd));
    edge_rcb(15, 7, 1, 250, 251, c7); edge_rcb(15, 7, 1, 250, 252, c7); edge_rcb(15, 7, 1, 251, 251, c7);
    edge_rcb(15, 7, 1, 251, 252, c7); edge_rcb(15, 7, 0, 245, 245, c7);
    wr(CFG_SMASK, 15, 7, 1, 0, 256'(1) << 250);
    wr(CFG_RMASK, 15, 7, 0, 0, 256'(1) << 245);
    for (int s = 0; s < 2; s++) for (int c = 0; c < 128; c++) wr(CFG_LSW, 15, 7, s, c, 256'(c7[s][c]));
    gcol = '0; gcol[15 * 16 + 12] = 1'b1;        // from port 15 bit 12 (state 252)
    wr(CFG_GSW, 15, 0, 0, 14 * 16 + 5, gcol);    // to port 14 bit 5 (state 245)
    // stream and reference: a report for every 'd' of a run (a|b)e*cd+
    begin
      int st;   // 0 idle, 1 after a|b or e, 2 after c, 3 in d+
      string text; text = "aeecddxbcdxecdaebcddd";
      st = 0; nrep = 0; extra = 0;
      for (int k = 0; k < N; k++) begin
        int nst;
        str[k] = text[(k + $urandom_range(0, 1)) % 21];
        nst = 0;
        if ((st == 1) && str[k] == "e") nst = 1;
        if ((st == 1) && str[k] == "c") nst = 2;
        if ((st == 2 || st == 3) && str[k] == "d") nst = 3;
        if (nst < 1 && (str[k] == "a" || str[k] == "b")) nst = 1;
        if (nst == 3) begin
          exp_q.push_back('{cycle: 32'(k), symbol: str[k], partition: 8'd0, state: 8'd13});
          exp_q.push_back('{cycle: 32'(k), symbol: str[k], partition: 8'd254, state: 8'd245});
          nrep += 2; extra++;
        end
        st = nst;
      end
    end
    // the a|b state is re-entered by any a or b: the model above lets a|b win over e,
    // which is exactly the NFA union of the 'still in e*' and the 'new start' paths
    t0 = $time / 10;
    for (int k = 0; k < N; k++) begin
      in_push = 1; in_sym = str[k]; @(negedge clk);
    end
    in_push = 0;
    wait (sym_count == N);
    repeat (4) @(negedge clk);
    t1 = $time / 10;
    chk("all reports written", int'(out_count) == nrep);
    got = 0;
    for (int i = 0; i < int'(out_count); i++) begin
      out_rd_idx = 6'(i); #1;
      chk($sformatf("report %0d", i), i < exp_q.size() && out_rd_entry == exp_q[i]);
      if (i < exp_q.size() && out_rd_entry != exp_q[i])
        $display("  got c%0d p%0d s%0d, expected c%0d p%0d s%0d", out_rd_entry.cycle,
                 out_rd_entry.partition, out_rd_entry.state, exp_q[i].cycle, exp_q[i].partition, exp_q[i].state);
    end
    $display("%0d symbols, %0d reports, %0d cycles from first push to drained", N, nrep, t1 - t0);
    chk("one cycle per symbol plus one per extra report", (t1 - t0) <= N + extra + 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
