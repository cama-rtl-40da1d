// tb_cama_gswitch -- self-checking test of the 256x256 global switch:
// random connection columns and random active inputs checked against
// gout[j] = OR over i of (cfg[j][i] & gin[i]), written here as a bit loop.
module tb_cama_gswitch;
  localparam int P = 256;
  logic clk = 0, rst_n = 0;
  logic we; logic [7:0] wcol; logic [P-1:0] wdata, gin, gout;
  int checks = 0, failures = 0;
  logic [P-1:0] m [P];

  cama_gswitch #(.PORTS(P)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; wcol = 0; wdata = 0; gin = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    gin = '1; #1; checks++; if (gout !== '0) begin failures++; $display("FAIL reset"); end
    for (int j = 0; j < P; j++) begin
      for (int i = 0; i < P; i++) m[j][i] = ($urandom_range(0, 63) == 0);
      @(negedge clk); we = 1; wcol = 8'(j); wdata = m[j];
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < P; i++) gin[i] = ($urandom_range(0, 7) == 0);
      #1;
      for (int j = 0; j < P; j++) begin
        logic e;
        e = 0;
        for (int i = 0; i < P; i++) if (m[j][i] && gin[i]) e = 1;
        checks++;
        if (gout[j] !== e) begin failures++; $display("FAIL out %0d", j); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
