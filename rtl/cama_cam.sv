// cama_cam -- one 16x256 state-matching CAM sub-array built from 8T cells.
//
// Each of the ENTRIES entries (one per STE) stores a CODE_W-bit word.  The
// read word-line of an 8T cell acts as the search line (SL) and the read
// bit-line as the match line (ML): a cell discharges its ML only when it
// stores '1' and its SL is driven '1'.  The encoder already delivers the
// inverted code on the SLs, so a stored '1' demands a '1' in the input code
// and a stored '0' is a don't-care (the paper's matching table, Fig. 3).
//
//   ml[e]    = ~|(stored[e] & sl & ~mask)
//   match[e] = gate_off ? 1 : en[e] & (ml[e] ^ neg[e])
//
// `en` is the column precharger: only enabled entries are precharged, which
// performs the AND with the Next Vector in the energy-optimised variant.
// `mask` turns off search bits when the code is shorter than CODE_W.  `neg`
// is the per-entry output inverter of the negation optimisation.  `gate_off`
// models the power-gated sub-array of the 16-bit FCB mode, whose results the
// paper says are reset to '1's.
//
// Timing: search is combinational (one evaluation per cycle); entries are
// written synchronously through the (we, waddr, wcode, wneg) port.  Reset
// fills every entry with all '1's, which no fixed-weight input code matches.
// Search behaviour, precharge enable, mask, negation and gating follow the
// paper; the write port and reset value are this design's own.
module cama_cam #(
  parameter int unsigned ENTRIES = 256,
  parameter int unsigned CODE_W  = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // programming port
  input  logic                       we,
  input  logic [$clog2(ENTRIES)-1:0] waddr,
  input  logic [CODE_W-1:0]          wcode,
  input  logic                       wneg,
  // search
  input  logic [CODE_W-1:0]          sl,       // search lines (inverted code)
  input  logic [CODE_W-1:0]          mask,     // 1 = search bit turned off
  input  logic [ENTRIES-1:0]         en,       // column precharge enables
  input  logic                       gate_off, // sub-array power-gated
  output logic [ENTRIES-1:0]         match
);

  logic [CODE_W-1:0]  stored [ENTRIES];
  logic [ENTRIES-1:0] neg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < int'(ENTRIES); e++) stored[e] <= '1;
      neg <= '0;
    end else if (we) begin
      stored[waddr] <= wcode;
      neg[waddr]    <= wneg;
    end
  end

  logic [CODE_W-1:0] sl_eff;
  assign sl_eff = sl & ~mask;

  always_comb begin
    for (int e = 0; e < int'(ENTRIES); e++) begin
      logic ml;
      ml = ~|(stored[e] & sl_eff);
      match[e] = gate_off ? 1'b1 : (en[e] & (ml ^ neg[e]));
    end
  end

endmodule
