// cama_gswitch -- the 256x256 global switch of one array.
//
// An 8T SRAM crossbar shared by the local switches of an array.  Each local
// switch sends 16 active states to it and receives 16 signals back, which are
// ORed into the top 16 bits (240..255) of its Next Vector.  Input i is active
// state from port i; output j is the OR of every active input whose cell in
// column j stores '1':
//
//   gout[j] = |(cfg[j] & gin)
//
// Timing: combinational, evaluated in the same cycle as the local switches
// (the paper runs local and global switch in parallel).  One column is
// written per cycle through (we, wcol, wdata); bit i of wdata is input i.
// Reset clears all connections.  The size, the 16-in / 16-out per local
// switch and the 8T crossbar function follow the paper; the port order and
// programming interface are this design's.
module cama_gswitch #(
  parameter int unsigned PORTS = 256
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     we,
  input  logic [$clog2(PORTS)-1:0] wcol,
  input  logic [PORTS-1:0]         wdata,
  input  logic [PORTS-1:0]         gin,
  output logic [PORTS-1:0]         gout
);

  logic [PORTS-1:0] cfg [PORTS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < int'(PORTS); j++) cfg[j] <= '0;
    end else if (we) begin
      cfg[wcol] <= wdata;
    end
  end

  always_comb begin
    for (int j = 0; j < int'(PORTS); j++) gout[j] = |(cfg[j] & gin);
  end

endmodule
