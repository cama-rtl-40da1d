// cama_pkg -- types, constants and the fixed wiring tables shared by the CAMA
// automata processor.
//
// A CAMA bank runs a homogeneous NFA: every state (STE) sits in one entry of a
// 16x256 CAM sub-array and matches the current input symbol against its
// encoded symbol class; active states then drive a local switch (a 128x128
// reconfigurable reduced crossbar, RRCB) whose output is the Next Vector, the
// set of states enabled for the next symbol.
//
// This package holds:
//  * the tile operating modes (16-bit RCB, 16-bit FCB, 32-bit), as in the paper;
//  * the configuration write bundle used to program every memory in a bank
//    (this programming interface is a choice of this design, the paper gives
//    none);
//  * the report entry written into the output buffer (state ID, partition ID,
//    input symbol, cycle: the fields the paper lists; their widths are chosen
//    here);
//  * the fixed geometry of the RRCB: three column banks of 43, 43 and 42
//    columns, read bit-lines split at row 43+x, and the fixed replica wiring of
//    the 384 word-line inputs.  The widths and the split rows are the paper's
//    numbers; the row-to-source and column-to-destination tables are derived
//    here from the paper's band width k_dia = 43 so that every state can reach
//    the states within about +-21 positions of itself.
package cama_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned ENTRIES   = 256;  // CAM entries (STEs) per sub-array
  localparam int unsigned CODE_W    = 16;   // CAM word length (rows)
  localparam int unsigned ENC_W     = 32;   // encoder word (two sub-arrays)
  localparam int unsigned SYM_W     = 8;    // input symbol width
  localparam int unsigned SW_N      = 128;  // local switch rows = columns
  localparam int unsigned SW_SEG    = 3;    // word-line segments per row
  localparam int unsigned G_PORTS   = 16;   // STEs to / from global per local switch
  localparam int unsigned G_FIRST   = ENTRIES - G_PORTS;  // 240: first global STE
  localparam int unsigned CFG_W     = 256;  // configuration data width

  // RRCB geometry (paper Fig. 4(b) and Fig. 5)
  localparam int unsigned RRCB_W0   = 43;   // columns of column-bank 0
  localparam int unsigned RRCB_W1   = 43;   // columns of column-bank 1
  localparam int unsigned RRCB_W2   = 42;   // columns of column-bank 2
  localparam int unsigned RRCB_SPLIT0 = 43; // RBL split row of the first column

  // ---------------------------------------------------------------- modes
  typedef enum logic [1:0] {
    MODE_RCB16 = 2'd0,   // both sub-arrays, local switches as reduced crossbars
    MODE_FCB16 = 2'd1,   // one sub-array gated, switches as two 128x128 FCBs
    MODE_32    = 2'd2    // 32-bit codes over both sub-arrays, switches as FCBs
  } mode_e;

  // ---------------------------------------------------------------- configuration
  typedef enum logic [2:0] {
    CFG_ENC   = 3'd0,   // encoder word:   addr = symbol, data[31:0]
    CFG_CAM   = 3'd1,   // CAM entry:      sub, addr = entry, data[15:0] code, data[16] negate
    CFG_LSW   = 3'd2,   // local switch:   sub = switch, addr[6:0] = column, data[127:0]
    CFG_GSW   = 3'd3,   // global switch:  addr = output column, data[255:0]
    CFG_SMASK = 3'd4,   // start mask:     sub, data[255:0]
    CFG_RMASK = 3'd5,   // report mask:    sub, data[255:0]
    CFG_MODE  = 3'd6    // tile mode:      data[1:0] mode, data[31:16] / data[47:32] search masks
  } cfg_tgt_e;

  typedef struct packed {
    logic             we;
    cfg_tgt_e         tgt;
    logic [7:0]       arr;    // array within the bank
    logic [7:0]       tile;   // tile within the array
    logic             sub;    // sub-array / local switch within the tile
    logic [7:0]       addr;
    logic [CFG_W-1:0] data;
  } cfg_wr_t;

  // ---------------------------------------------------------------- reports
  typedef struct packed {
    logic [31:0] cycle;      // index of the input symbol in the stream
    logic [7:0]  symbol;     // the input symbol
    logic [7:0]  partition;  // {array, tile, sub} of the reporting partition
    logic [7:0]  state;      // STE index inside the partition
  } report_t;

  // ---------------------------------------------------------------- RRCB tables
  // Column-bank of a physical column c (0..127).
  function automatic int unsigned rrcb_bank(input int unsigned c);
    if (c < RRCB_W0)            return 0;
    else if (c < RRCB_W0+RRCB_W1) return 1;
    else                         return 2;
  endfunction

  // Position of column c inside its column-bank.
  function automatic int unsigned rrcb_x(input int unsigned c);
    case (rrcb_bank(c))
      0:       return c;
      1:       return c - RRCB_W0;
      default: return c - RRCB_W0 - RRCB_W1;
    endcase
  endfunction

  // First row of the upper read bit-line segment of column c.
  function automatic int unsigned rrcb_split(input int unsigned c);
    return RRCB_SPLIT0 + rrcb_x(c);
  endfunction

  // Source STE driven onto word-line segment `k`, row r, in RCB mode.
  function automatic int unsigned rrcb_src(input int unsigned k, input int unsigned r);
    int unsigned base;
    case (k)
      0:       base = 21;
      1:       base = 107;
      default: base = 193;
    endcase
    return (base + r) % ENTRIES;
  endfunction

  // Destination STE of the lower / upper bit-line segment of column c, RCB mode.
  function automatic int unsigned rrcb_dst_lo(input int unsigned c);
    case (rrcb_bank(c))
      0:       return 42  + rrcb_x(c);
      1:       return 128 + rrcb_x(c);
      default: return 214 + rrcb_x(c);
    endcase
  endfunction

  function automatic int unsigned rrcb_dst_hi(input int unsigned c);
    case (rrcb_bank(c))
      0:       return 85  + rrcb_x(c);
      1:       return 171 + rrcb_x(c);
      default: return rrcb_x(c);
    endcase
  endfunction

  // Lowest set bit of a 256-bit vector (0 when none is set).
  function automatic logic [7:0] first_set256(input logic [255:0] v);
    logic [7:0] idx;
    idx = '0;
    for (int i = 255; i >= 0; i--) if (v[i]) idx = 8'(i);
    return idx;
  endfunction

endpackage
