// cama_encoder -- the 256x32 SRAM input encoder.
//
// Every input symbol addresses one 32-bit word that holds the search-line
// pattern for the CAM sub-arrays: the symbol's code with the inversion the
// 8T CAM needs already applied (SL = ~code), so no inverters sit on the
// search lines.  Bits [15:0] feed a 16-bit code to both sub-arrays; in 32-bit
// mode bits [31:16] feed the second sub-array.  What code each symbol gets
// (Multi-Zeros, Two-Zeros prefix, One-Zero prefix, One-Zero) is decided when
// the table is programmed, so the hardware supports every scheme.
//
// Timing: synchronous read.  When `rd_en` is high at a clock edge, `code`
// shows the word of `sym` from the next cycle on and holds while rd_en is
// low.  Writes go through (we, waddr, wdata).  Reset fills the table with
// all '1's (every search line driven, matching no stored code) and clears
// `code`.  The size and the embedded inversion follow the paper; the read
// latency, the ports and the reset value are this design's choices.
module cama_encoder #(
  parameter int unsigned SYMS  = 256,
  parameter int unsigned WIDTH = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    we,
  input  logic [$clog2(SYMS)-1:0] waddr,
  input  logic [WIDTH-1:0]        wdata,
  input  logic                    rd_en,
  input  logic [$clog2(SYMS)-1:0] sym,
  output logic [WIDTH-1:0]        code
);

  logic [WIDTH-1:0] table_q [SYMS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(SYMS); i++) table_q[i] <= '1;
    end else if (we) begin
      table_q[waddr] <= wdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     code <= '0;
    else if (rd_en) code <= table_q[sym];
  end

endmodule
