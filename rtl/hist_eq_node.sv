// hist_eq_node: histogram equalization of one colour channel.
//
// While frame k streams through, every pixel is counted in a 256-bin
// histogram and is itself mapped through the table built from frame k-1
// (the first frame after reset passes unchanged). After the last pixel of
// frame k (pixel IMG_W*IMG_H-1 after its sof) a sequencer walks the 256 bins
// in 256 cycles, forms the running sum cdf(v) and writes
//     lut[v] = floor(255 * cdf(v) / N),   N = IMG_W * IMG_H,
// into the idle table bank, clearing the bins as it goes. The division is a
// multiplication by K = ceil(255 * 2^S / N) and a right shift by S, with
// 2^S >= 2*N*N, which gives the exact floor for every 0 <= cdf <= N.
// Histogram and table are both double-banked: the next frame is counted in
// the other histogram bank while the table is built, and the new table bank
// becomes active at the next sof. If that sof arrives before the table is
// finished (less than about 256 cycles between frames) the frame is mapped
// with the older table and lut_late is set.
//
// Interface: in_tok/out_tok NoC tokens; one output token per input token,
// one cycle later, zero tokens of delay. Tokens outside a frame leave as null
// tokens. The paper names histogram equalization; the formula, the use of the
// previous frame's histogram and the banking are this design's choices.
module hist_eq_node
  import isp_pkg::*;
#(
  parameter int unsigned IMG_W = 640,
  parameter int unsigned IMG_H = 480
) (
  input  logic   clk,
  input  logic   rst_n,
  input  token_t in_tok,
  output token_t out_tok,
  output logic   lut_late    // sticky: a frame started before its table was ready
);

  localparam int unsigned    N   = IMG_W * IMG_H;
  localparam int unsigned    CW  = $clog2(N + 1);
  localparam int unsigned    S   = 2 * $clog2(N) + 1;
  localparam longint unsigned K  = ((longint'(255) << S) + longint'(N) - 1) / longint'(N);
  localparam int unsigned    KW  = $clog2(K + 1);
  localparam int unsigned    NB  = 1 << PIX_W;

  logic [CW-1:0]    hist [2][NB];
  logic [NB-1:0]    hv   [2];          // bin holds a count (else it reads 0)
  logic [PIX_W-1:0] lut  [2][NB];

  logic [CW-1:0]    pos;               // index of the next pixel of the frame
  logic             infr;
  logic             acc_bank, cmp_bank, lut_sel, lut_ok, pending, busy;
  logic [PIX_W-1:0] ci;                // bin being processed
  logic [CW-1:0]    cdf;

  // Classification of the incoming token.
  logic [CW-1:0]    cur_idx;
  logic             cur_px, last_px;
  logic             swap, sel_eff, ok_eff;
  logic [PIX_W-1:0] v;
  assign v       = in_tok.data;
  assign cur_idx = in_tok.sof ? '0 : pos;
  assign cur_px  = in_tok.vld & ~in_tok.nul & (in_tok.sof | infr);
  assign last_px = cur_px & (cur_idx == CW'(N - 1));
  assign swap    = cur_px & in_tok.sof & pending;
  assign sel_eff = swap ? ~lut_sel : lut_sel;
  assign ok_eff  = swap | lut_ok;

  // Table sequencer arithmetic.
  logic [CW-1:0]    h, cdf_n;
  logic [CW+KW-1:0] prod;
  assign h     = hv[cmp_bank][ci] ? hist[cmp_bank][ci] : '0;
  assign cdf_n = cdf + h;
  assign prod  = (CW+KW)'(cdf_n) * (CW+KW)'(K);

  // Histogram count for the incoming pixel.
  logic [CW-1:0] hcur;
  assign hcur = hv[acc_bank][v] ? hist[acc_bank][v] : '0;

  always_ff @(posedge clk) begin
    if (cur_px) hist[acc_bank][v] <= hcur + 1'b1;
    if (busy)   lut[~lut_sel][ci] <= prod[S +: PIX_W];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      hv[0]    <= '0;
      hv[1]    <= '0;
      pos      <= '0;
      infr     <= 1'b0;
      acc_bank <= 1'b0;
      cmp_bank <= 1'b0;
      lut_sel  <= 1'b0;
      lut_ok   <= 1'b0;
      pending  <= 1'b0;
      busy     <= 1'b0;
      ci       <= '0;
      cdf      <= '0;
      lut_late <= 1'b0;
      out_tok  <= TOKEN_IDLE;
    end else begin
      // Output: one token per input token.
      out_tok.vld  <= in_tok.vld;
      out_tok.nul  <= ~cur_px;
      out_tok.sof  <= cur_px & in_tok.sof;
      out_tok.data <= !cur_px ? '0 : (ok_eff ? lut[sel_eff][v] : v);

      if (cur_px) begin
        hv[acc_bank][v] <= 1'b1;
        pos  <= cur_idx + 1'b1;
        infr <= (cur_idx != CW'(N - 1));
        if (in_tok.sof && busy) lut_late <= 1'b1;
      end
      if (swap) begin
        lut_sel <= ~lut_sel;
        lut_ok  <= 1'b1;
        pending <= 1'b0;
      end
      if (busy) begin
        hv[cmp_bank][ci] <= 1'b0;
        cdf <= cdf_n;
        ci  <= ci + 1'b1;
        if (ci == PIX_W'(NB - 1)) begin
          busy    <= 1'b0;
          pending <= 1'b1;
        end
      end
      if (last_px) begin
        if (busy) lut_late <= 1'b1;
        acc_bank <= ~acc_bank;
        cmp_bank <= acc_bank;
        busy     <= 1'b1;
        ci       <= '0;
        cdf      <= '0;
      end
    end
  end

endmodule
