// cama_tile -- one CAMA tile: two 16x256 CAM sub-arrays, two 128x128 local
// switches (RRCBs) and the Next Vector registers, in one of three modes.
//
//  MODE_RCB16  Each sub-array holds 256 STEs with 16-bit codes and drives its
//              own switch in RCB mode; switch i writes Next Vector i, which
//              enables sub-array i.  512 STEs per tile (two partitions).
//  MODE_FCB16  Sub-array 1 is gated off (its results read as '1's).  The 256
//              STEs of sub-array 0 are split in halves: states 0..127 drive
//              switch 0 and states 128..255 switch 1, both as 128x128 full
//              crossbars; their 128-bit outputs are concatenated into one
//              256-bit Next Vector that enables sub-array 0.
//  MODE_32     Sub-array 0 matches code bits [15:0] and sub-array 1 bits
//              [31:16]; the two results are ANDed per entry, then handled as
//              in MODE_FCB16.  Both sub-arrays are enabled by the Next Vector.
//
// In every mode the 16 global-switch inputs of switch i are ORed into bits
// 240..255 of Next Vector i (in the FCB modes both land in the one vector).
// States marked in the start mask are enabled on every symbol.
//
// PIPELINED = 0 is CAMA-E: the Next Vector drives the CAM column prechargers,
// so match and transition of a symbol happen in one cycle and reports come
// out in the cycle the symbol is searched.  PIPELINED = 1 is CAMA-T: the CAMs
// search with every column enabled, the result goes to a Match Vector
// register, and in the next cycle it is ANDed with the Next Vector and sent
// through the switches while the next symbol is searched; reports and the
// transition of a symbol come one cycle after its search.
//
// Handshake: the tile advances only in cycles with `step` high.  `code_valid`
// says the search lines carry a real symbol; a step without one (a bubble)
// leaves the NFA state untouched.  `act_valid` marks the cycles in which
// `act` holds the active states of a symbol (the report taps); it is
// meaningful together with `step`.  `clr` empties the Next Vector and Match
// Vector registers (a new stream) without touching the configuration.
//
// The modes, the AND in 32-bit mode, gating to '1's, the 256/384/16-bit
// buses, the [240:255] global ORs and both pipeline variants follow the
// paper (Fig. 7, Fig. 8); the register names, the handshake, the start mask
// and the configuration port are this design's.
module cama_tile
  import cama_pkg::*;
#(
  parameter bit PIPELINED = 1'b0
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         clr,
  input  logic                         step,
  input  logic                         code_valid,
  input  logic [ENC_W-1:0]             code,       // search-line pattern
  input  logic [1:0][G_PORTS-1:0]      gin,        // from the global switch
  output logic [1:0][G_PORTS-1:0]      gout,       // to the global switch
  output logic [1:0][ENTRIES-1:0]      act,        // active states per partition
  output logic                         act_valid,
  output mode_e                        mode,
  // programming
  input  cfg_wr_t                      cfg
);

  // ------------------------------------------------------------ configuration
  logic [1:0][ENTRIES-1:0] start_mask;
  logic [1:0][CODE_W-1:0]  search_mask;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode        <= MODE_RCB16;
      start_mask  <= '0;
      search_mask <= '0;
    end else if (cfg.we) begin
      if (cfg.tgt == CFG_MODE) begin
        mode           <= mode_e'(cfg.data[1:0]);
        search_mask[0] <= cfg.data[31:16];
        search_mask[1] <= cfg.data[47:32];
      end
      if (cfg.tgt == CFG_SMASK) start_mask[cfg.sub] <= cfg.data[ENTRIES-1:0];
    end
  end

  logic fcb;
  assign fcb = (mode != MODE_RCB16);

  // ------------------------------------------------------------ state registers
  logic [1:0][ENTRIES-1:0] nv, nv_next;   // Next Vector registers
  logic [1:0][ENTRIES-1:0] en;            // enables (Next Vector | start)

  always_comb begin
    en[0] = nv[0] | start_mask[0];
    en[1] = fcb ? en[0] : (nv[1] | start_mask[1]);
  end

  // ------------------------------------------------------------ state matching
  logic [1:0][CODE_W-1:0]  sl;
  logic [1:0][ENTRIES-1:0] cam_en, cam_match, m;
  logic                    gate1;

  assign sl[0] = code[CODE_W-1:0];
  assign sl[1] = (mode == MODE_32) ? code[ENC_W-1:CODE_W] : code[CODE_W-1:0];
  assign gate1 = (mode == MODE_FCB16);

  for (genvar s = 0; s < 2; s++) begin : g_cam
    assign cam_en[s] = PIPELINED ? '1 : en[s];
    cama_cam #(.ENTRIES(ENTRIES), .CODE_W(CODE_W)) u_cam (
      .clk, .rst_n,
      .we      (cfg.we && cfg.tgt == CFG_CAM && cfg.sub == 1'(s)),
      .waddr   (cfg.addr),
      .wcode   (cfg.data[CODE_W-1:0]),
      .wneg    (cfg.data[CODE_W]),
      .sl      (sl[s]),
      .mask    (search_mask[s]),
      .en      (cam_en[s]),
      .gate_off(s == 1 ? gate1 : 1'b0),
      .match   (cam_match[s])
    );
  end

  // CAMA-T Match Vector pipeline register
  if (PIPELINED) begin : g_pipe
    logic [1:0][ENTRIES-1:0] mv;
    logic                    mv_valid;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        mv       <= '0;
        mv_valid <= 1'b0;
      end else if (clr) begin
        mv       <= '0;
        mv_valid <= 1'b0;
      end else if (step) begin
        mv       <= code_valid ? cam_match : '0;
        mv_valid <= code_valid;
      end
    end
    assign m[0]      = mv[0] & en[0];
    assign m[1]      = mv[1] & en[1];
    assign act_valid = mv_valid;
  end else begin : g_nopipe
    assign m         = cam_match;
    assign act_valid = code_valid;
  end

  // ------------------------------------------------------------ state transition
  logic [ENTRIES-1:0]      a_fcb;
  logic [1:0][ENTRIES-1:0] sw_in, sw_out;

  assign a_fcb = m[0] & m[1];

  always_comb begin
    if (fcb) begin
      act[0]   = a_fcb;
      act[1]   = '0;
      sw_in[0] = {{(ENTRIES-SW_N){1'b0}}, a_fcb[SW_N-1:0]};
      sw_in[1] = {{(ENTRIES-SW_N){1'b0}}, a_fcb[ENTRIES-1:SW_N]};
    end else begin
      act[0]   = m[0];
      act[1]   = m[1];
      sw_in    = m;
    end
  end

  for (genvar s = 0; s < 2; s++) begin : g_sw
    cama_rrcb u_rrcb (
      .clk, .rst_n,
      .fcb   (fcb),
      .act_in(sw_in[s]),
      .we    (cfg.we && cfg.tgt == CFG_LSW && cfg.sub == 1'(s)),
      .wcol  (cfg.addr[6:0]),
      .wdata (cfg.data[SW_N-1:0]),
      .nv_out(sw_out[s]),
      .gout  (gout[s])
    );
  end

  always_comb begin
    if (fcb) begin
      nv_next[0] = {sw_out[1][SW_N-1:0], sw_out[0][SW_N-1:0]};
      nv_next[0][ENTRIES-1 -: G_PORTS] = nv_next[0][ENTRIES-1 -: G_PORTS] | gin[0] | gin[1];
      nv_next[1] = nv_next[0];
    end else begin
      for (int s = 0; s < 2; s++) begin
        nv_next[s] = sw_out[s];
        nv_next[s][ENTRIES-1 -: G_PORTS] = sw_out[s][ENTRIES-1 -: G_PORTS] | gin[s];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  nv <= '0;
    else if (clr)                nv <= '0;
    else if (step && act_valid)  nv <= nv_next;
  end

endmodule
