// tb_cama_report_unit -- self-checking test of report masking and output
// entry creation, with 4 partitions.  Random active vectors and report masks
// are captured whenever the unit is not busy; every written entry must be
// the next one of a model list (partitions, then STEs, in ascending order,
// with the captured symbol and index).  Without output back-pressure a
// capture with k reports must keep `busy` high for exactly k-1 cycles; with
// random back-pressure no entry may be lost or duplicated.
module tb_cama_report_unit;
  import cama_pkg::*;
  localparam int NP = 4;
  logic clk = 0, rst_n = 0, clr = 0;
  logic capture; logic [NP-1:0][255:0] act; logic [7:0] sym; logic [31:0] idx;
  logic rm_we; logic [1:0] rm_part; logic [255:0] rm_data;
  logic ent_we; report_t ent; logic out_full, busy;
  int checks = 0, failures = 0;
  logic [NP-1:0][255:0] mask_m;
  report_t expq[$];

  cama_report_unit #(.N_PART(NP)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // check entries as they are written
  always @(posedge clk) if (rst_n && ent_we) begin
    checks++;
    if (expq.size() == 0) begin failures++; $display("FAIL unexpected entry"); end
    else begin
      if (ent !== expq[0]) begin
        failures++;
        $display("FAIL entry got p%0d s%0d c%0d exp p%0d s%0d c%0d", ent.partition, ent.state,
                 ent.cycle, expq[0].partition, expq[0].state, expq[0].cycle);
      end
      void'(expq.pop_front());
    end
  end

  task automatic run(input int n, input bit bp);
    for (int t = 0; t < n; t++) begin
      @(negedge clk);
      out_full = bp && ($urandom_range(0, 3) == 0);
      #1;
      capture  = 0;
      if (!busy && ($urandom_range(0, 1) == 1)) begin
        int k = 0, st = 0;
        capture = 1;
        for (int p = 0; p < NP; p++)
          for (int i = 0; i < 256; i++) act[p][i] = ($urandom_range(0, 150) == 0);
        sym = 8'($urandom); idx = 32'(t);
        for (int p = 0; p < NP; p++)
          for (int i = 0; i < 256; i++)
            if (act[p][i] && mask_m[p][i]) begin
              expq.push_back('{cycle: idx, symbol: sym, partition: 8'(p), state: 8'(i)});
              k++;
            end
        if (!bp) begin
          // busy must last k-1 cycles
          @(negedge clk); capture = 0;
          while (busy) begin st++; @(negedge clk); end
          checks++;
          if (st != ((k > 0) ? k - 1 : 0)) begin
            failures++; $display("FAIL stall %0d for %0d reports", st, k);
          end
        end
      end
    end
  endtask

  initial begin
    capture = 0; act = '0; sym = 0; idx = 0; rm_we = 0; rm_part = 0; rm_data = 0; out_full = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int p = 0; p < NP; p++) begin
      for (int i = 0; i < 256; i++) mask_m[p][i] = ($urandom_range(0, 1) == 0);
      @(negedge clk); rm_we = 1; rm_part = 2'(p); rm_data = mask_m[p];
    end
    @(negedge clk); rm_we = 0;
    run(400, 0);
    run(600, 1);
    @(negedge clk); capture = 0; out_full = 0;
    repeat (100) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d entries lost", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
