// tb_cama_output_buffer -- self-checking test of the 64-entry report buffer:
// write 64 entries, check the full interrupt and that a 65th write is
// refused, read every entry back at random, clear, and refill partially;
// finally check that an entry written in the clearing cycle is kept.
module tb_cama_output_buffer;
  import cama_pkg::*;
  logic clk = 0, rst_n = 0;
  logic we, full, clear, irq_full; report_t wentry, rd_entry; logic [6:0] count; logic [5:0] rd_idx;
  int checks = 0, failures = 0;
  report_t m [64];

  cama_output_buffer #(.DEPTH(64)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(input string w, input logic c);
    checks++; if (!c) begin failures++; $display("FAIL %s", w); end
  endtask

  initial begin
    we = 0; clear = 0; wentry = '0; rd_idx = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      int n; n = (round == 2) ? 17 : 64;
      for (int i = 0; i < n; i++) begin
        m[i] = report_t'({$urandom, $urandom});
        we = 1; wentry = m[i]; @(negedge clk);
        chk("no irq early", irq_full == (i == 63));
      end
      we = 0;
      chk("count", int'(count) == n);
      if (n == 64) chk("full", full && irq_full);
      for (int t = 0; t < 100; t++) begin
        int i; i = $urandom_range(0, n - 1);
        rd_idx = 6'(i); #1;
        chk("read", rd_entry == m[i]);
      end
      clear = 1; @(negedge clk); clear = 0;
      chk("cleared", count == 0 && !irq_full);
    end
    // a write in the clearing cycle survives as entry 0
    m[0] = report_t'({$urandom, $urandom});
    we = 1; wentry = m[0]; clear = 1; @(negedge clk); we = 0; clear = 0;
    rd_idx = 0; #1;
    chk("write during clear kept", count == 1 && rd_entry == m[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
