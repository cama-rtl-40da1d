// cama_rrcb -- the 128x128 reconfigurable reduced crossbar (local switch).
//
// An 8T SRAM array whose read word-lines are driven by active states and
// whose read bit-lines wire-OR the stored '1's, so that each bit-line reads
// the OR of the active sources connected to it.  The array is split into
// three column-banks of 43, 43 and 42 columns, each with its own word-line
// segment (3 x 128 = 384 inputs), and each column's read bit-line is cut at
// row 43+x (x = column inside its bank) into a lower and an upper segment
// read out at the bottom and at the top (2 x 128 = 256 outputs).
//
// RCB mode (fcb = 0): the 256 active states of one CAM sub-array are fanned
// out over the 384 word-line segments by a fixed replica wiring: segment k,
// row r carries state (base_k + r) mod 256 with base = 21, 107, 193.  The lower
// segment of a column writes one Next Vector bit and the upper segment
// another (tables in cama_pkg).  This stores the diagonal band of a 256x256
// full crossbar: destination d can be reached from sources d-21 .. d+21
// (d-20 .. d+21 for the 42 destinations held by the upper segments of bank 2).
//
// FCB mode (fcb = 1): the three segments of row r all carry act_in[r] and the
// two halves of every bit-line are ORed, giving a plain 128x128 full crossbar
// from act_in[127:0] to nv_out[127:0] (nv_out[255:128] is zero).
//
// To the global switch go 16 active states, taken from the switch input:
// act_in[255:240] in RCB mode, act_in[127:112] in FCB mode.
//
// Interface/timing: fully combinational read; one 128-bit column written per
// cycle through (we, wcol, wdata), bit r of wdata being row r.  Reset clears
// the array.  The bank widths, split rows, 384/256 bus widths and the FCB
// reconfiguration follow the paper; the exact replica and output tables and
// the choice of which 16 states go to the global switch are this design's.
module cama_rrcb
  import cama_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               fcb,
  input  logic [255:0]       act_in,
  input  logic               we,
  input  logic [6:0]         wcol,
  input  logic [SW_N-1:0]    wdata,
  output logic [255:0]       nv_out,
  output logic [G_PORTS-1:0] gout
);

  logic [SW_N-1:0] cfg [SW_N];   // cfg[c][r]: cell at row r of column c

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < int'(SW_N); c++) cfg[c] <= '0;
    end else if (we) begin
      cfg[wcol] <= wdata;
    end
  end

  // input MUX with fixed replication onto the three word-line segments
  logic [SW_N-1:0] wl [SW_SEG];
  always_comb begin
    for (int k = 0; k < int'(SW_SEG); k++)
      for (int r = 0; r < int'(SW_N); r++)
        wl[k][r] = fcb ? act_in[r] : act_in[rrcb_src(k, r)];
  end

  // split read bit-lines and output deMUX
  always_comb begin
    nv_out = '0;
    for (int c = 0; c < int'(SW_N); c++) begin
      logic [SW_N-1:0] hit, lowmask;
      logic bot, top;
      hit     = cfg[c] & wl[rrcb_bank(c)];
      lowmask = (SW_N'(1) << rrcb_split(c)) - SW_N'(1);
      bot     = |(hit & lowmask);
      top     = |(hit & ~lowmask);
      if (fcb) begin
        nv_out[c] = bot | top;
      end else begin
        nv_out[rrcb_dst_lo(c)] = bot;
        nv_out[rrcb_dst_hi(c)] = top;
      end
    end
  end

  assign gout = fcb ? act_in[SW_N-1 -: G_PORTS] : act_in[255 -: G_PORTS];

endmodule
