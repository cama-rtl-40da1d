// tb_cama_encoder -- self-checking test of the 256x32 input encoder.
// Fills the table with the inverted Two-Zeros prefix codes (10-bit prefix
// with two '0's, 6-bit suffix with one '0') computed here, then checks the
// one-cycle synchronous read for every symbol and random orders, and that
// the output holds while rd_en is low.
module tb_cama_encoder;
  logic clk = 0, rst_n = 0;
  logic we; logic [7:0] waddr; logic [31:0] wdata; logic rd_en; logic [7:0] sym; logic [31:0] code;
  int checks = 0, failures = 0;
  logic [31:0] ref_t [256];

  cama_encoder dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // Two-Zeros prefix code of symbol i: prefix = i/6-th pair (z1<z2) of zero
  // positions among 10 bits, suffix zero at position i%6
  function automatic logic [15:0] tz_code(input int i);
    int n = 0; logic [15:0] c = '1;
    for (int z1 = 0; z1 < 10; z1++)
      for (int z2 = z1 + 1; z2 < 10; z2++) begin
        if (n == i / 6) begin c[6 + z1] = 0; c[6 + z2] = 0; end
        n++;
      end
    c[i % 6] = 0;
    return c;
  endfunction

  initial begin
    we = 0; waddr = 0; wdata = 0; rd_en = 0; sym = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 256; i++) begin
      ref_t[i] = {16'hFFFF, ~tz_code(i)};
      @(negedge clk); we = 1; waddr = 8'(i); wdata = ref_t[i];
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 600; t++) begin
      int s; s = (t < 256) ? t : $urandom_range(0, 255);
      sym = 8'(s); rd_en = 1;
      @(negedge clk);
      checks++;
      if (code !== ref_t[s]) begin failures++; $display("FAIL sym %0d", s); end
      if (t % 7 == 0) begin
        rd_en = 0; sym = 8'($urandom); @(negedge clk);
        checks++;
        if (code !== ref_t[s]) begin failures++; $display("FAIL hold %0d", s); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
