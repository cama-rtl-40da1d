// cama_bank -- a CAMA bank: N_ARRAYS arrays of N_TILES tiles (65536 STEs
// with the paper's 16 x 8 x 512), the input encoder and the input and output
// buffers.  This is the top of the design.
//
// Data path, one input symbol per cycle:
//   input buffer --pop--> encoder (256x32 SRAM, one cycle) --search lines-->
//   every CAM of every array --> local + global switches --> Next Vectors
//   active states --> report unit (report mask) --> output buffer
//
// Stage S1 holds the symbol whose code is on the search lines.  In CAMA-E
// (PIPELINED = 0) its reports are formed in the same cycle; in CAMA-T
// (PIPELINED = 1) one cycle later, so the symbol and its index are carried
// one more stage (S2) for the report entry.  When the input buffer is empty
// a bubble enters S1 and the NFA state is kept; the buffer's `irq_empty`
// asks the host for more symbols.  When the report unit is busy (several
// reports of one symbol, or a full output buffer) the whole pipeline holds:
// `stall` is high, no symbol is removed and no state register moves.
//
// Host interface: `in_push`/`in_sym` fill the input buffer; `cfg` programs
// every memory (encoder, CAM entries, local and global switches, start and
// report masks, tile modes), see cama_pkg; `out_rd_idx`/`out_rd_entry` read
// report entries, `out_clear` empties the output buffer, `irq_out_full`
// says it is full.  `clr` starts a new stream (clears state, buffers,
// pending reports and the symbol counter) and keeps the configuration.
//
// Sizes, buffers, interrupts and the entry fields follow the paper; the
// two-stage front end, the stall and the host protocol are this design's.
module cama_bank
  import cama_pkg::*;
#(
  parameter int unsigned N_ARRAYS   = 16,
  parameter int unsigned N_TILES    = 8,
  parameter bit          PIPELINED  = 1'b0,
  parameter int unsigned IBUF_DEPTH = 128,
  parameter int unsigned OBUF_DEPTH = 64
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clr,
  // input symbols
  input  logic                        in_push,
  input  logic [SYM_W-1:0]            in_sym,
  output logic                        in_full,
  output logic                        irq_in_empty,
  output logic [$clog2(IBUF_DEPTH):0] in_count,
  // configuration
  input  cfg_wr_t                     cfg,
  // reports
  input  logic [$clog2(OBUF_DEPTH)-1:0] out_rd_idx,
  output report_t                     out_rd_entry,
  output logic [$clog2(OBUF_DEPTH):0] out_count,
  input  logic                        out_clear,
  output logic                        irq_out_full,
  // status
  output logic                        stall,
  output logic [31:0]                 sym_count
);

  localparam int unsigned N_PART = N_ARRAYS * N_TILES * 2;
  localparam int unsigned PPW    = (N_PART > 1) ? $clog2(N_PART) : 1;

  // ------------------------------------------------------------ front end
  logic             advance, ib_empty, pop;
  logic [SYM_W-1:0] head;
  logic             v1;
  logic [SYM_W-1:0] sym1, sym2;
  logic [31:0]      idx1, idx2;
  logic [ENC_W-1:0] code;

  assign advance = !stall;
  assign pop     = advance && !ib_empty;

  cama_input_buffer #(.DEPTH(IBUF_DEPTH), .WIDTH(SYM_W)) u_ibuf (
    .clk, .rst_n, .clr,
    .push(in_push), .din(in_sym), .full(in_full),
    .pop, .dout(head), .empty(ib_empty), .count(in_count), .irq_empty(irq_in_empty)
  );

  cama_encoder #(.SYMS(256), .WIDTH(ENC_W)) u_enc (
    .clk, .rst_n,
    .we   (cfg.we && cfg.tgt == CFG_ENC),
    .waddr(cfg.addr),
    .wdata(cfg.data[ENC_W-1:0]),
    .rd_en(pop),
    .sym  (head),
    .code (code)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; sym1 <= '0; idx1 <= '0; sym2 <= '0; idx2 <= '0; sym_count <= '0;
    end else if (clr) begin
      v1 <= 1'b0; sym_count <= '0;
    end else if (advance) begin
      v1 <= pop;
      if (pop) begin
        sym1      <= head;
        idx1      <= sym_count;
        sym_count <= sym_count + 1'b1;
      end
      if (v1) begin
        sym2 <= sym1;
        idx2 <= idx1;
      end
    end
  end

  // ------------------------------------------------------------ arrays
  logic [N_ARRAYS-1:0]                          arr_valid;
  logic [N_ARRAYS-1:0][N_TILES-1:0][1:0][ENTRIES-1:0] arr_act;
  logic [N_PART-1:0][ENTRIES-1:0]               act_all;

  for (genvar a = 0; a < int'(N_ARRAYS); a++) begin : g_arr
    cfg_wr_t acfg;
    always_comb begin
      acfg    = cfg;
      acfg.we = cfg.we && (cfg.arr == 8'(a)) &&
                (cfg.tgt != CFG_ENC) && (cfg.tgt != CFG_RMASK);
    end
    cama_array #(.N_TILES(N_TILES), .PIPELINED(PIPELINED)) u_array (
      .clk, .rst_n, .clr,
      .step      (advance),
      .code_valid(v1),
      .code      (code),
      .act       (arr_act[a]),
      .act_valid (arr_valid[a]),
      .cfg       (acfg)
    );
    for (genvar t = 0; t < int'(N_TILES); t++) begin : g_t
      for (genvar s = 0; s < 2; s++) begin : g_s
        assign act_all[(a*N_TILES + t)*2 + s] = arr_act[a][t][s];
      end
    end
  end

  // ------------------------------------------------------------ reports
  logic    capture, ent_we, ob_full;
  report_t ent;
  logic [PPW-1:0] rm_part;

  assign capture = advance && arr_valid[0];
  assign rm_part = PPW'((32'(cfg.arr) * N_TILES + 32'(cfg.tile)) * 2 + 32'(cfg.sub));

  cama_report_unit #(.N_PART(N_PART)) u_rep (
    .clk, .rst_n, .clr,
    .capture,
    .act     (act_all),
    .sym     (PIPELINED ? sym2 : sym1),
    .idx     (PIPELINED ? idx2 : idx1),
    .rm_we   (cfg.we && cfg.tgt == CFG_RMASK),
    .rm_part (rm_part),
    .rm_data (cfg.data[ENTRIES-1:0]),
    .ent_we,
    .ent,
    .out_full(ob_full),
    .busy    (stall)
  );

  cama_output_buffer #(.DEPTH(OBUF_DEPTH)) u_obuf (
    .clk, .rst_n,
    .we      (ent_we),
    .wentry  (ent),
    .full    (ob_full),
    .count   (out_count),
    .rd_idx  (out_rd_idx),
    .rd_entry(out_rd_entry),
    .clear   (out_clear || clr),
    .irq_full(irq_out_full)
  );

endmodule
