// win3x3: token-driven 3x3 neighbourhood generator for raster streams.
//
// Each input token (in_vld) shifts a 3x3 window one pixel along: two line
// buffers of IMG_W entries hold the two previous image rows, and the window
// centre is the token received IMG_W+1 tokens earlier. The generator tracks
// the centre's position (x, y) from the sof flags that travel through the line
// buffers with the data, and replaces neighbours outside the frame by the
// nearest pixel inside it (border replication). A centre that is not a
// pixel of a frame (before the first sof, after the frame's last pixel, or a
// null token) gives a null window.
//
// Interface and timing: win_vld pulses one cycle after each input token with
// the window for that firing; exactly one window per input token (a fixed
// token rate, as the dataflow model requires), IMG_W+1 tokens of delay.
// Frames must be contiguous runs of IMG_W*IMG_H non-null tokens; between
// frames any number of null tokens may flow (they also flush the last rows).
// The whole block is this design's construction of a standard line-buffer
// window.
module win3x3 #(
  parameter int unsigned IMG_W = 640,
  parameter int unsigned IMG_H = 480,
  parameter int unsigned DW    = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_vld,
  input  logic          in_nul,
  input  logic          in_sof,
  input  logic [DW-1:0] in_data,
  output logic          win_vld,
  output logic          win_nul,   // centre is not a frame pixel
  output logic          win_sof,   // centre is pixel (0,0)
  output logic [DW-1:0] win [3][3] // [row dy+1][col dx+1], border-replicated
);

  localparam int unsigned XW = (IMG_W > 1) ? $clog2(IMG_W) : 1;
  localparam int unsigned YW = $clog2(IMG_H + 1);

  typedef struct packed {
    logic          real_px;  // a non-null token
    logic          sof;
    logic [DW-1:0] d;
  } ent_t;

  ent_t lb1 [IMG_W];
  ent_t lb2 [IMG_W];
  logic [XW-1:0] wptr;
  ent_t w_q [3][3];

  logic [XW-1:0] cx;
  logic [YW-1:0] cy;
  logic          c_in;   // centre is a frame pixel

  // Line-buffer entries not yet written since reset read as empty (not a
  // pixel, no sof): fill counts the completed passes of wptr, up to 2.
  logic [1:0] fill;
  ent_t in_e, lb1_rd, lb2_rd;
  assign in_e   = '{real_px: ~in_nul, sof: in_sof & ~in_nul, d: in_data};
  assign lb1_rd = (fill != 2'd0) ? lb1[wptr] : '0;
  assign lb2_rd = (fill == 2'd2) ? lb2[wptr] : '0;

  always_ff @(posedge clk) begin
    if (in_vld) begin
      lb1[wptr] <= in_e;
      lb2[wptr] <= lb1_rd;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr    <= '0;
      fill    <= 2'd0;
      win_vld <= 1'b0;
      cx      <= '0;
      cy      <= '0;
      c_in    <= 1'b0;
      for (int r = 0; r < 3; r++)
        for (int c = 0; c < 3; c++) w_q[r][c] <= '0;
    end else begin
      win_vld <= in_vld;
      if (in_vld) begin
        wptr <= (wptr == XW'(IMG_W - 1)) ? '0 : wptr + 1'b1;
        if (wptr == XW'(IMG_W - 1) && fill != 2'd2) fill <= fill + 1'b1;
        for (int r = 0; r < 3; r++) begin
          w_q[r][0] <= w_q[r][1];
          w_q[r][1] <= w_q[r][2];
        end
        w_q[0][2] <= lb2_rd;
        w_q[1][2] <= lb1_rd;
        w_q[2][2] <= in_e;
        // Position of the new centre, which is the old w_q[1][2].
        if (w_q[1][2].sof) begin
          cx   <= '0;
          cy   <= '0;
          c_in <= w_q[1][2].real_px;
        end else if (c_in) begin
          if (cx == XW'(IMG_W - 1)) begin
            cx <= '0;
            cy <= cy + 1'b1;
            if (cy == YW'(IMG_H - 1)) c_in <= 1'b0;
          end else begin
            cx <= cx + 1'b1;
          end
        end
      end
    end
  end

  // Border replication: map each window row/column to one inside the frame.
  logic [1:0] rs [3], cs [3];
  always_comb begin
    rs[0] = (cy == '0) ? 2'd1 : 2'd0;
    rs[1] = 2'd1;
    rs[2] = (cy == YW'(IMG_H - 1)) ? 2'd1 : 2'd2;
    cs[0] = (cx == '0) ? 2'd1 : 2'd0;
    cs[1] = 2'd1;
    cs[2] = (cx == XW'(IMG_W - 1)) ? 2'd1 : 2'd2;
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 3; c++)
        win[r][c] = w_q[rs[r]][cs[c]].d;
  end

  assign win_nul = ~(c_in & w_q[1][1].real_px);
  assign win_sof = w_q[1][1].sof & c_in;

endmodule
