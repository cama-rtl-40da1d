// tb_cama_input_buffer -- self-checking test of the 128-entry input FIFO:
// fill to full, drain to empty with the empty interrupt, then random
// simultaneous pushes and pops against a queue model; the producer never
// pushes when full and the consumer never pops when empty.
module tb_cama_input_buffer;
  logic clk = 0, rst_n = 0, clr = 0;
  logic push, pop, full, empty, irq_empty; logic [7:0] din, dout; logic [7:0] count;
  int checks = 0, failures = 0;
  byte unsigned q[$];

  cama_input_buffer #(.DEPTH(128), .WIDTH(8)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(input string w, input logic c);
    checks++; if (!c) begin failures++; $display("FAIL %s at %0t", w, $time); end
  endtask

  initial begin
    push = 0; pop = 0; din = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    chk("empty after reset", empty && irq_empty);
    for (int i = 0; i < 128; i++) begin
      push = 1; din = 8'($urandom); q.push_back(din); @(negedge clk);
    end
    push = 0;
    chk("full at 128", full && count == 128 && !irq_empty);
    while (q.size() > 0) begin
      chk("head", dout == q[0]); pop = 1; void'(q.pop_front()); @(negedge clk);
    end
    pop = 0;
    chk("empty again", empty && irq_empty);
    for (int t = 0; t < 3000; t++) begin
      push = !full && ($urandom_range(0, 1) == 1);
      pop  = !empty && ($urandom_range(0, 2) != 0);
      din  = 8'($urandom);
      if (pop) chk("random head", dout == q[0]);
      @(negedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
      chk("count", int'(count) == q.size());
    end
    push = 0; pop = 0;
    clr = 1; @(negedge clk); clr = 0; q.delete();
    chk("clear", empty && count == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
