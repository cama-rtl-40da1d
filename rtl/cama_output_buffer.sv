// cama_output_buffer -- the 64-entry report buffer.
//
// Report entries (state ID, partition ID, input symbol, cycle) are appended
// one per cycle.  When the buffer is full it raises `irq_full` (level); the
// host then reads the entries at random through (rd_idx, rd_entry) and
// clears them all at once with `clear`.  A write into a full buffer is
// refused, so the producer must wait (the bank stalls).
//
// Interface: `we`/`wentry` append (ignored when full); `count` is the number
// of valid entries, entry 0 being the oldest; `clear` empties the buffer of
// what was there before, and an entry written in the same cycle is kept as
// the new entry 0, so no report is lost while the host clears.  The depth, the interrupt when full and the
// read-all-then-clear protocol follow the paper; the random-access read port
// is this design's.
module cama_output_buffer
  import cama_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   we,
  input  report_t                wentry,
  output logic                   full,
  output logic [$clog2(DEPTH):0] count,
  input  logic [$clog2(DEPTH)-1:0] rd_idx,
  output report_t                rd_entry,
  input  logic                   clear,
  output logic                   irq_full
);

  report_t mem [DEPTH];

  assign full     = (count == ($clog2(DEPTH)+1)'(DEPTH));
  assign irq_full = full;
  assign rd_entry = mem[rd_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      for (int i = 0; i < int'(DEPTH); i++) mem[i] <= '0;
    end else if (clear) begin
      // an entry arriving in the clearing cycle becomes the new entry 0
      if (we) mem[0] <= wentry;
      count <= ($clog2(DEPTH)+1)'(we);
    end else if (we && !full) begin
      mem[count[$clog2(DEPTH)-1:0]] <= wentry;
      count <= count + 1'b1;
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(we && full && !clear));

endmodule
