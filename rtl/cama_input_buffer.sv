// cama_input_buffer -- the 128-entry input symbol buffer.
//
// A first-in first-out queue of input symbols between the host and the
// bank.  The host fills it with a block of symbols; the bank removes one
// symbol per processing cycle and broadcasts it to every array.  When the
// buffer runs empty it raises `irq_empty` (level) so the host can refill it.
//
// Interface: `push` writes `din` at the tail (ignored when full); `pop`
// removes the head, shown on `dout` while `empty` is low (show-ahead).
// Both may happen in the same cycle.  `clr` empties the buffer.  Depth and
// the interrupt-on-empty behaviour follow the paper; the show-ahead read,
// the clear and the level interrupt are this design's choices.
module cama_input_buffer #(
  parameter int unsigned DEPTH = 128,
  parameter int unsigned WIDTH = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr,
  input  logic                     push,
  input  logic [WIDTH-1:0]         din,
  output logic                     full,
  input  logic                     pop,
  output logic [WIDTH-1:0]         dout,
  output logic                     empty,
  output logic [$clog2(DEPTH):0]   count,
  output logic                     irq_empty
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             do_push, do_pop;

  assign full      = (count == ($clog2(DEPTH)+1)'(DEPTH));
  assign empty     = (count == '0);
  assign irq_empty = empty;
  assign do_push   = push && !full;
  assign do_pop    = pop && !empty;
  assign dout      = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
      for (int i = 0; i < int'(DEPTH); i++) mem[i] <= '0;
    end else if (clr) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_push) begin
        mem[wp] <= din;
        wp      <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      end
      if (do_pop) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  // handshake rules: the producer must not push into a full buffer and the
  // consumer must not pop an empty one
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));

endmodule
