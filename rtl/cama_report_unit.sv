// cama_report_unit -- report detection and output entry creation.
//
// Holds the bank's report mask (one bit per STE, N_PART partitions of 256
// STEs).  In every cycle in which the tiles present the active states of a
// symbol (`capture`), the active states are ANDed with the mask and the
// reporting STEs are kept, with the symbol and its position in the input
// stream, in a pending set.  One output entry {cycle, symbol, partition,
// state} is written per cycle, lowest partition and lowest STE first.
//
// A symbol with at most one report passes without delay.  While more than
// one report is still pending, or an entry waits for a full output buffer,
// `busy` is high and the bank must hold its pipeline (no `capture`); so k
// reports of one symbol cost k-1 stall cycles.
//
// Interface: (rm_we, rm_part, rm_data) writes the 256 mask bits of one
// partition.  `clr` drops pending reports.  The report mask per bank and
// the entry fields follow the paper; the one-entry-per-cycle serialisation
// and the stall are this design's, the paper does not say how several
// reports in one cycle are written.
module cama_report_unit
  import cama_pkg::*;
#(
  parameter int unsigned N_PART = 256
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             clr,
  input  logic                             capture,
  input  logic [N_PART-1:0][ENTRIES-1:0]   act,
  input  logic [7:0]                       sym,
  input  logic [31:0]                      idx,
  input  logic                             rm_we,
  input  logic [$clog2(N_PART)-1:0]        rm_part,
  input  logic [ENTRIES-1:0]               rm_data,
  output logic                             ent_we,
  output report_t                          ent,
  input  logic                             out_full,
  output logic                             busy
);

  localparam int unsigned PW = (N_PART > 1) ? $clog2(N_PART) : 1;

  logic [N_PART-1:0][ENTRIES-1:0] rmask, pend;
  logic [7:0]                     pend_sym;
  logic [31:0]                    pend_idx;

  // first pending report, and whether more than one is pending
  logic [N_PART-1:0]  pany;
  logic [PW-1:0]      fp;
  logic [7:0]         fb;
  logic               any, more;

  always_comb begin
    for (int p = 0; p < int'(N_PART); p++) pany[p] = |pend[p];
    fp = '0;
    for (int p = int'(N_PART) - 1; p >= 0; p--) if (pany[p]) fp = PW'(p);
    fb   = first_set256(pend[fp]);
    any  = |pany;
    more = ((pany & (pany - 1'b1)) != '0) ||
           ((pend[fp] & (pend[fp] - 1'b1)) != '0);
  end

  assign ent_we = any && !out_full;
  assign busy   = any && (more || out_full);

  always_comb begin
    ent.cycle     = pend_idx;
    ent.symbol    = pend_sym;
    ent.partition = 8'(fp);
    ent.state     = fb;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rmask    <= '0;
      pend     <= '0;
      pend_sym <= '0;
      pend_idx <= '0;
    end else begin
      if (rm_we) rmask[rm_part] <= rm_data;
      if (clr) begin
        pend <= '0;
      end else if (capture) begin
        pend     <= act & rmask;
        pend_sym <= sym;
        pend_idx <= idx;
      end else if (ent_we) begin
        pend[fp][fb] <= 1'b0;
      end
    end
  end

  // the bank may only present a new symbol's states when nothing would be lost
  a_capture_when_free: assert property (@(posedge clk) disable iff (!rst_n) capture |-> !busy);

endmodule
