// isp_top: reconfigurable three-channel image preprocessor on circuit-switched
// NoC planes.
//
// The system runs one of two mutually exclusive algorithms:
//   day:   Gaussian -> colour constancy -> Canny
//   night: Gaussian -> histogram equalization -> Canny
// Their dataflow graphs are merged into one union graph whose shared nodes
// (Gaussian, Canny) exist once per channel. Each colour channel has its own
// 2x5 mesh (a "plane"); the nodes sit on the local ports of the routers:
//
//   router (row,col)  index  local port
//   (0,0)             0      to Gaussian        (0,1)  1  from frame input
//   (1,0)             2      to colour const.   (1,1)  3  from colour const.
//   (2,0)             4      from Gaussian      (2,1)  5  to Canny
//   (3,0)             6      to hist. equal.    (3,1)  7  from hist. equal.
//   (4,0)             8      to frame output    (4,1)  9  from Canny
//
// Input to Gaussian (1 -> 0) and Canny to output (9 -> 8) are always
// switched on. Day routes Gaussian up through (1,0) into colour constancy and
// its result from (1,1) down to Canny; night routes Gaussian down through
// (3,0) into histogram equalization and its result from (3,1) up to Canny.
// Switching algorithms is only a new NoC configuration: write each router's
// word (cfg_we, cfg_addr, cfg_word; the same word goes to the router of that
// index in every plane) and pulse cfg_apply. The colour constancy node is
// shared by the three planes and resynchronizes their streams.
//
// Interface: frame_in/frame_out carry one token stream per channel
// (0 = R, 1 = G, 2 = B). A frame is IMG_W*IMG_H consecutive non-null tokens,
// the first with sof; null tokens between frames flush the pipelines. The
// output keeps the input's token rate; both paths delay pixel 0 of a frame
// by 4*(IMG_W+1) tokens (Gaussian IMG_W+1, Canny 3*(IMG_W+1), the middle
// node 0), plus one clock per router passed. Between frames leave at least
// 256 null tokens or idle cycles so that the histogram table and the colour
// gains are ready (see he_late, cc_gain_late). Status flags are sticky
// except cc_sync_wait.
//
// The algorithm set, the node placement and the routes follow the paper's
// experiment; the per-channel planes, the shared configuration bus and the
// token format are this design's choices.
module isp_top
  import isp_pkg::*;
#(
  parameter int unsigned IMG_W   = 640,
  parameter int unsigned IMG_H   = 480,
  parameter int unsigned TH_LOW  = 60,
  parameter int unsigned TH_HIGH = 150,
  localparam int unsigned CH     = 3,
  localparam int unsigned ROWS   = 5,
  localparam int unsigned COLS   = 2,
  localparam int unsigned NR     = ROWS * COLS
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  token_t                 frame_in  [CH],
  output token_t                 frame_out [CH],
  input  logic                   cfg_we,
  input  logic [$clog2(NR)-1:0]  cfg_addr,
  input  router_cfg_t            cfg_word,
  input  logic                   cfg_apply,
  output logic                   cfg_err,
  output logic                   he_late,
  output logic                   cc_gain_late,
  output logic                   cc_sync_wait,
  output logic                   cc_sync_ovf
);

  // Local-port assignment of the nodes (result of map and route).
  localparam int unsigned RT_GAUSS_IN  = 0;
  localparam int unsigned RT_FRAME_IN  = 1;
  localparam int unsigned RT_CC_IN     = 2;
  localparam int unsigned RT_CC_OUT    = 3;
  localparam int unsigned RT_GAUSS_OUT = 4;
  localparam int unsigned RT_CANNY_IN  = 5;
  localparam int unsigned RT_HE_IN     = 6;
  localparam int unsigned RT_HE_OUT    = 7;
  localparam int unsigned RT_FRAME_OUT = 8;
  localparam int unsigned RT_CANNY_OUT = 9;

  token_t          l_in  [CH][NR];
  token_t          l_out [CH][NR];
  logic   [NR-1:0] p_err [CH];
  logic   [CH-1:0] p_he_late;
  token_t          cc_in  [CH];
  token_t          cc_out [CH];

  for (genvar p = 0; p < CH; p++) begin : g_plane
    token_t g_out, he_out, cn_out;

    cs_mesh_noc #(.ROWS(ROWS), .COLS(COLS)) u_noc (
      .clk, .rst_n,
      .local_in (l_in[p]),
      .local_out(l_out[p]),
      .cfg_we, .cfg_addr, .cfg_word, .cfg_apply,
      .cfg_err  (p_err[p])
    );

    gaussian_node #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_gauss (
      .clk, .rst_n, .in_tok(l_out[p][RT_GAUSS_IN]), .out_tok(g_out)
    );

    hist_eq_node #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_he (
      .clk, .rst_n, .in_tok(l_out[p][RT_HE_IN]), .out_tok(he_out), .lut_late(p_he_late[p])
    );

    canny_node #(.IMG_W(IMG_W), .IMG_H(IMG_H), .TH_LOW(TH_LOW), .TH_HIGH(TH_HIGH)) u_canny (
      .clk, .rst_n, .in_tok(l_out[p][RT_CANNY_IN]), .out_tok(cn_out)
    );

    assign cc_in[p] = l_out[p][RT_CC_IN];

    // Local inputs of the mesh: sources on their routers, idle elsewhere.
    always_comb begin
      for (int i = 0; i < NR; i++) l_in[p][i] = TOKEN_IDLE;
      l_in[p][RT_FRAME_IN]  = frame_in[p];
      l_in[p][RT_GAUSS_OUT] = g_out;
      l_in[p][RT_CC_OUT]    = cc_out[p];
      l_in[p][RT_HE_OUT]    = he_out;
      l_in[p][RT_CANNY_OUT] = cn_out;
    end

    assign frame_out[p] = l_out[p][RT_FRAME_OUT];
  end

  color_constancy_node #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_cc (
    .clk, .rst_n,
    .in_tok   (cc_in),
    .out_tok  (cc_out),
    .gain_late(cc_gain_late),
    .sync_wait(cc_sync_wait),
    .sync_ovf (cc_sync_ovf)
  );

  always_comb begin
    cfg_err = 1'b0;
    for (int p = 0; p < CH; p++) cfg_err |= |p_err[p];
  end
  assign he_late = |p_he_late;

endmodule
