// cama_array -- one CAMA array: N_TILES tiles sharing one global switch.
//
// Every tile has two local switches; each sends 16 active states to the
// global switch and receives 16 signals from it, so the global switch has
// N_TILES*2*16 ports (256 for the paper's 8 tiles).  Port p = 2*tile + switch
// owns global inputs and outputs 16p .. 16p+15.  The global switch is
// combinational and works in the same cycle as the local switches, so a
// transition between tiles of one array takes effect on the next symbol just
// like a local one.  All tiles see the same search-line pattern.
//
// Configuration writes whose `tile` field selects a tile go to that tile;
// CFG_GSW writes program column `addr` of the global switch.  The bank
// filters writes for other arrays before they arrive here.  Tile count and
// the shared global switch follow the paper (Sec. VI.A, Fig. 7); the port
// numbering is this design's.
module cama_array
  import cama_pkg::*;
#(
  parameter int unsigned N_TILES   = 8,
  parameter bit          PIPELINED = 1'b0
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 clr,
  input  logic                                 step,
  input  logic                                 code_valid,
  input  logic [ENC_W-1:0]                     code,
  output logic [N_TILES-1:0][1:0][ENTRIES-1:0] act,
  output logic                                 act_valid,
  input  cfg_wr_t                              cfg
);

  localparam int unsigned PORTS = N_TILES * 2 * G_PORTS;
  localparam int unsigned PW    = $clog2(PORTS);

  logic [PORTS-1:0]   g_to, g_from;
  logic [N_TILES-1:0] tile_valid;

  for (genvar t = 0; t < int'(N_TILES); t++) begin : g_tile
    cfg_wr_t tcfg;
    mode_e   tmode;
    always_comb begin
      tcfg    = cfg;
      tcfg.we = cfg.we && (cfg.tile == 8'(t)) && (cfg.tgt != CFG_GSW);
    end
    cama_tile #(.PIPELINED(PIPELINED)) u_tile (
      .clk, .rst_n, .clr, .step, .code_valid, .code,
      .gin      ({g_from[(2*t+1)*G_PORTS +: G_PORTS], g_from[(2*t)*G_PORTS +: G_PORTS]}),
      .gout     ({g_to[(2*t+1)*G_PORTS +: G_PORTS],   g_to[(2*t)*G_PORTS +: G_PORTS]}),
      .act      (act[t]),
      .act_valid(tile_valid[t]),
      .mode     (tmode),
      .cfg      (tcfg)
    );
  end

  assign act_valid = tile_valid[0];

  cama_gswitch #(.PORTS(PORTS)) u_gsw (
    .clk, .rst_n,
    .we   (cfg.we && cfg.tgt == CFG_GSW),
    .wcol (cfg.addr[PW-1:0]),
    .wdata(cfg.data[PORTS-1:0]),
    .gin  (g_to),
    .gout (g_from)
  );

endmodule
