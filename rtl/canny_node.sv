// canny_node: Canny edge extraction on one colour channel.
//
// Three token-driven 3x3 stages, joined inside the node (not through the
// NoC):
//  1. Sobel gradient: gx, gy, L1 magnitude |gx|+|gy| (11 bits) and the
//     gradient direction quantised to four sectors (0: horizontal gradient,
//     2: vertical, 1: gx and gy of equal sign, 3: of opposite sign), using
//     tan(22.5 deg) ~ 106/256 and tan(67.5 deg) ~ 618/256.
//  2. Non-maximum suppression: the magnitude survives if it is not smaller
//     than both neighbours along the gradient; survivors above TH_HIGH are
//     strong, above TH_LOW weak.
//  3. Hysteresis: a strong pixel is an edge, and so is a weak pixel with a
//     strong pixel among its eight neighbours.
// Output pixels are 255 (edge) or 0. Smoothing is left to the Gaussian node
// in front of it. Each stage keeps the one-token-in, one-token-out rate; the
// node delays the stream by 3*(IMG_W+1) tokens, pixels outside a frame
// leaving as null tokens. Borders are replicated in every stage.
//
// The paper names a Canny operator; the stage split, the L1 magnitude, the
// thresholds and the 3x3 hysteresis are this design's choices.
module canny_node
  import isp_pkg::*;
#(
  parameter int unsigned IMG_W   = 640,
  parameter int unsigned IMG_H   = 480,
  parameter int unsigned TH_LOW  = 60,
  parameter int unsigned TH_HIGH = 150
) (
  input  logic   clk,
  input  logic   rst_n,
  input  token_t in_tok,
  output token_t out_tok
);

  localparam int unsigned MW = 11;      // magnitude width
  localparam int unsigned GW = MW + 2;  // {dir, mag}

  // ---------------- stage 1: Sobel ----------------
  logic             a_vld, a_nul, a_sof;
  logic [PIX_W-1:0] a_w [3][3];

  win3x3 #(.IMG_W(IMG_W), .IMG_H(IMG_H), .DW(PIX_W)) u_win_grad (
    .clk, .rst_n,
    .in_vld (in_tok.vld), .in_nul (in_tok.nul), .in_sof (in_tok.sof), .in_data (in_tok.data),
    .win_vld(a_vld), .win_nul(a_nul), .win_sof(a_sof), .win(a_w)
  );

  logic signed [MW:0] gx, gy;
  logic        [MW-1:0] ax, ay;
  logic        [1:0]  dir;
  logic        [MW+8:0] ay_s, ax_lo, ax_hi;
  always_comb begin
    gx = (12'(a_w[0][2]) + (12'(a_w[1][2]) << 1) + 12'(a_w[2][2]))
       - (12'(a_w[0][0]) + (12'(a_w[1][0]) << 1) + 12'(a_w[2][0]));
    gy = (12'(a_w[2][0]) + (12'(a_w[2][1]) << 1) + 12'(a_w[2][2]))
       - (12'(a_w[0][0]) + (12'(a_w[0][1]) << 1) + 12'(a_w[0][2]));
    ax = MW'(gx < 0 ? -gx : gx);
    ay = MW'(gy < 0 ? -gy : gy);
    ay_s  = (MW+9)'(ay) << 8;
    ax_lo = (MW+9)'(ax) * 20'd106;
    ax_hi = (MW+9)'(ax) * 20'd618;
    if (ay_s <= ax_lo)               dir = 2'd0;
    else if (ay_s >= ax_hi)          dir = 2'd2;
    else if ((gx < 0) == (gy < 0))   dir = 2'd1;
    else                             dir = 2'd3;
  end

  logic          b_vld, b_nul, b_sof;
  logic [GW-1:0] b_data;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      b_vld <= 1'b0; b_nul <= 1'b0; b_sof <= 1'b0; b_data <= '0;
    end else begin
      b_vld  <= a_vld;
      b_nul  <= a_nul;
      b_sof  <= a_sof;
      b_data <= {dir, MW'(ax + ay)};
    end
  end

  // ---------------- stage 2: non-maximum suppression ----------------
  logic          c_vld, c_nul, c_sof;
  logic [GW-1:0] c_w [3][3];

  win3x3 #(.IMG_W(IMG_W), .IMG_H(IMG_H), .DW(GW)) u_win_nms (
    .clk, .rst_n,
    .in_vld (b_vld), .in_nul (b_nul), .in_sof (b_sof), .in_data (b_data),
    .win_vld(c_vld), .win_nul(c_nul), .win_sof(c_sof), .win(c_w)
  );

  logic [MW-1:0] m, n1, n2;
  logic [1:0]    cls;
  always_comb begin
    m = c_w[1][1][MW-1:0];
    unique case (c_w[1][1][GW-1:MW])
      2'd0:    begin n1 = c_w[1][0][MW-1:0]; n2 = c_w[1][2][MW-1:0]; end
      2'd1:    begin n1 = c_w[0][0][MW-1:0]; n2 = c_w[2][2][MW-1:0]; end
      2'd2:    begin n1 = c_w[0][1][MW-1:0]; n2 = c_w[2][1][MW-1:0]; end
      default: begin n1 = c_w[0][2][MW-1:0]; n2 = c_w[2][0][MW-1:0]; end
    endcase
    cls = 2'd0;
    if (m >= n1 && m >= n2) begin
      if (m > MW'(TH_HIGH))     cls = 2'd2;
      else if (m > MW'(TH_LOW)) cls = 2'd1;
    end
  end

  logic       d_vld, d_nul, d_sof;
  logic [1:0] d_data;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      d_vld <= 1'b0; d_nul <= 1'b0; d_sof <= 1'b0; d_data <= '0;
    end else begin
      d_vld  <= c_vld;
      d_nul  <= c_nul;
      d_sof  <= c_sof;
      d_data <= cls;
    end
  end

  // ---------------- stage 3: hysteresis ----------------
  logic       e_vld, e_nul, e_sof;
  logic [1:0] e_w [3][3];

  win3x3 #(.IMG_W(IMG_W), .IMG_H(IMG_H), .DW(2)) u_win_hyst (
    .clk, .rst_n,
    .in_vld (d_vld), .in_nul (d_nul), .in_sof (d_sof), .in_data (d_data),
    .win_vld(e_vld), .win_nul(e_nul), .win_sof(e_sof), .win(e_w)
  );

  logic edge_px;
  always_comb begin
    logic strong_nb;
    strong_nb = 1'b0;
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 3; c++)
        if (e_w[r][c] == 2'd2) strong_nb = 1'b1;
    edge_px = (e_w[1][1] == 2'd2) || (e_w[1][1] == 2'd1 && strong_nb);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_tok <= TOKEN_IDLE;
    end else begin
      out_tok.vld  <= e_vld;
      out_tok.nul  <= e_nul;
      out_tok.sof  <= e_sof;
      out_tok.data <= (!e_nul && edge_px) ? 8'hFF : 8'h00;
    end
  end

endmodule
