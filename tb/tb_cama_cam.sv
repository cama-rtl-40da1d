// tb_cama_cam -- self-checking test of the 16x256 8T CAM sub-array.
//
// Directed part: the Two-Zeros prefix example (a = 001 01, b = 001 10,
// class {a,b} stored as 001 00) with the upper 11 search bits masked off;
// the class must match a and b and not c = 010 01, a negated entry must do
// the opposite, a disabled column never matches, a gated array reads '1's.
// Random part: random stored words, negation bits, search lines, masks and
// enables, checked against a bit-by-bit model of the 8T matching table
// (stored '1' and search line '1' on an unmasked bit = mismatch).
module tb_cama_cam;
  localparam int E = 256, W = 16;
  logic clk = 0, rst_n = 0;
  logic we; logic [7:0] waddr; logic [W-1:0] wcode; logic wneg;
  logic [W-1:0] sl, mask; logic [E-1:0] en, match; logic gate_off;
  int checks = 0, failures = 0;

  cama_cam #(.ENTRIES(E), .CODE_W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [W-1:0] st_m [E];
  logic         ng_m [E];

  task automatic wr(input int a, input logic [W-1:0] c, input logic n);
    @(negedge clk); we = 1; waddr = 8'(a); wcode = c; wneg = n;
    @(negedge clk); we = 0;
    st_m[a] = c; ng_m[a] = n;
  endtask

  function automatic logic model(input int e);
    logic mis = 0;
    for (int i = 0; i < W; i++)
      if (st_m[e][i] == 1'b1 && sl[i] == 1'b1 && mask[i] == 1'b0) mis = 1;
    if (gate_off) return 1'b1;
    return en[e] && ((!mis) != ng_m[e]);
  endfunction

  task automatic chk(input string what, input int e, input logic exp);
    checks++;
    if (match[e] !== exp) begin
      failures++;
      $display("FAIL %s entry %0d: got %b exp %b", what, e, match[e], exp);
    end
  endtask

  // code of a symbol in the 5-bit example; search lines = inverted code
  localparam logic [4:0] CA = 5'b00101, CB = 5'b00110, CC = 5'b01001, CAB = 5'b00100;

  initial begin
    we = 0; waddr = 0; wcode = 0; wneg = 0; sl = 0; mask = 0; en = 0; gate_off = 0;
    for (int e = 0; e < E; e++) begin st_m[e] = '1; ng_m[e] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // reset content matches nothing with a fixed-weight code
    en = '1; mask = '0; sl = ~16'hFF00; #1;
    for (int e = 0; e < E; e += 37) chk("reset", e, 1'b0);

    wr(0, {11'h7FF, CAB}, 0);      // class {a,b}
    wr(1, {11'h7FF, CAB}, 1);      // negated class: everything but a,b
    wr(2, {11'h7FF, CA}, 0);       // exactly a
    mask = 16'hFFE0;               // only 5 code bits in use
    en = '0; en[0] = 1; en[1] = 1; en[2] = 1;
    sl = {11'h000, ~CA}; #1;
    chk("ab on a", 0, 1); chk("^ab on a", 1, 0); chk("a on a", 2, 1);
    sl = {11'h000, ~CB}; #1;
    chk("ab on b", 0, 1); chk("^ab on b", 1, 0); chk("a on b", 2, 0);
    sl = {11'h000, ~CC}; #1;
    chk("ab on c", 0, 0); chk("^ab on c", 1, 1); chk("a on c", 2, 0);
    en[0] = 0; en[1] = 0; #1;
    chk("disabled", 0, 0); chk("disabled neg", 1, 0);
    gate_off = 1; #1;
    chk("gated", 0, 1); chk("gated", 200, 1);
    gate_off = 0;

    // random
    for (int e = 0; e < E; e++) wr(e, 16'($urandom), 1'($urandom_range(0, 3) == 0));
    for (int t = 0; t < 200; t++) begin
      sl   = 16'($urandom) | 16'($urandom);
      mask = (t % 3 == 0) ? 16'($urandom) & 16'($urandom) : '0;
      en   = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      // make many entries match: stored subset of ~sl for a few entries
      gate_off = (t % 50 == 7);
      #1;
      for (int e = 0; e < E; e++) chk("random", e, model(e));
      if (t % 10 == 0) wr($urandom_range(0, E-1), ~sl & 16'($urandom), 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
