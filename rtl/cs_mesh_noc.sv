// cs_mesh_noc: circuit-switched 2D mesh NoC of ROWS x COLS routers.
//
// Router (r, c) has index r*COLS + c; row 0 is the top row, column 0 the
// left one. Its N/E/S/W ports are joined by a pair of one-way links to the
// neighbouring router, and its local port is brought out as local_in /
// local_out[index] for the dataflow node (or the frame source or sink)
// mapped onto it. Ports on the edge of the mesh receive no tokens and drive
// nothing. A connection between two nodes is a chain of crossbar settings
// along a route; once configured it carries one token per cycle with a fixed
// delay of one cycle per router passed.
//
// Configuration: cfg_we with cfg_addr writes one router's shadow
// configuration; cfg_apply switches all routers at once, so a whole new
// topology (one algorithm of the union graph) takes effect in one cycle.
// cfg_err[i] reports that router i rejected an illegal word. The mesh and
// the default 2x5 size are the paper's; indexing and the configuration bus
// are this design's choices.
module cs_mesh_noc
  import isp_pkg::*;
#(
  parameter int unsigned ROWS = 5,
  parameter int unsigned COLS = 2,
  localparam int unsigned NR  = ROWS * COLS,
  localparam int unsigned AW  = (NR > 1) ? $clog2(NR) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  token_t        local_in  [NR],
  output token_t        local_out [NR],
  input  logic          cfg_we,
  input  logic [AW-1:0] cfg_addr,
  input  router_cfg_t   cfg_word,
  input  logic          cfg_apply,
  output logic [NR-1:0] cfg_err
);

  token_t rin  [NR][NPORT];
  token_t rout [NR][NPORT];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam int unsigned I = r * COLS + c;

      if (r > 0)        begin : g_n assign rin[I][PORT_N] = rout[I-COLS][PORT_S]; end
      else              begin : g_n0 assign rin[I][PORT_N] = TOKEN_IDLE; end
      if (r < ROWS - 1) begin : g_s assign rin[I][PORT_S] = rout[I+COLS][PORT_N]; end
      else              begin : g_s0 assign rin[I][PORT_S] = TOKEN_IDLE; end
      if (c > 0)        begin : g_w assign rin[I][PORT_W] = rout[I-1][PORT_E]; end
      else              begin : g_w0 assign rin[I][PORT_W] = TOKEN_IDLE; end
      if (c < COLS - 1) begin : g_e assign rin[I][PORT_E] = rout[I+1][PORT_W]; end
      else              begin : g_e0 assign rin[I][PORT_E] = TOKEN_IDLE; end
      assign rin[I][PORT_L] = local_in[I];
      assign local_out[I]   = rout[I][PORT_L];

      router_cfg_t active_unused;

      cs_router u_router (
        .clk, .rst_n,
        .in_tok    (rin[I]),
        .out_tok   (rout[I]),
        .cfg_we    (cfg_we && cfg_addr == AW'(I)),
        .cfg_word  (cfg_word),
        .cfg_apply (cfg_apply),
        .cfg_active(active_unused),
        .cfg_err   (cfg_err[I])
      );
    end
  end

endmodule
