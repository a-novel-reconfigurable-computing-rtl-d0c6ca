// gaussian_node: anti-noise Gaussian smoothing of one colour channel.
//
// A dataflow node of the preprocessor. Every input token fires the node once
// and yields exactly one output token: the pixel IMG_W+1 tokens back,
// filtered with the 3x3 kernel [1 2 1; 2 4 2; 1 2 1]/16 (rounded, borders
// replicated). Tokens whose pixel is outside a frame leave as null tokens, so
// the stream keeps its rate and downstream nodes stay synchronised.
//
// Interface: in_tok/out_tok are NoC tokens (isp_pkg::token_t). Timing: output
// two cycles after the firing input token; IMG_W+1 tokens of delay. The
// paper names a Gaussian filter; the kernel, its size and the border rule
// are this design's choices.
module gaussian_node
  import isp_pkg::*;
#(
  parameter int unsigned IMG_W = 640,
  parameter int unsigned IMG_H = 480
) (
  input  logic   clk,
  input  logic   rst_n,
  input  token_t in_tok,
  output token_t out_tok
);

  logic             w_vld, w_nul, w_sof;
  logic [PIX_W-1:0] w [3][3];

  win3x3 #(.IMG_W(IMG_W), .IMG_H(IMG_H), .DW(PIX_W)) u_win (
    .clk, .rst_n,
    .in_vld (in_tok.vld), .in_nul (in_tok.nul), .in_sof (in_tok.sof), .in_data (in_tok.data),
    .win_vld(w_vld), .win_nul(w_nul), .win_sof(w_sof), .win(w)
  );

  logic [PIX_W+4-1:0] acc;   // weighted sum + 8; bits [3:0] drop in the /16
  always_comb begin
    acc = 12'(w[0][0]) + 12'(w[0][2]) + 12'(w[2][0]) + 12'(w[2][2])
        + (12'(w[0][1]) << 1) + (12'(w[1][0]) << 1) + (12'(w[1][2]) << 1) + (12'(w[2][1]) << 1)
        + (12'(w[1][1]) << 2) + 12'd8;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_tok <= TOKEN_IDLE;
    end else begin
      out_tok.vld  <= w_vld;
      out_tok.nul  <= w_nul;
      out_tok.sof  <= w_sof;
      out_tok.data <= w_nul ? '0 : acc[PIX_W+3:4];
    end
  end

endmodule
