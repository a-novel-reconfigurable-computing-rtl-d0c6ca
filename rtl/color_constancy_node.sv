// color_constancy_node: gray-world colour constancy over the R, G and B
// streams (day mode).
//
// The three channel streams arrive through three NoC planes and are first
// matched by an sdf_resync, so the node always fires on one R, G, B triple.
// During frame k the node sums each channel (S_R, S_G, S_B) and outputs
//     out_c = min(255, (in_c * g_c + 128) >> 8)
// with the gains g_c of frame k-1 (1.0 = 256 after reset). After the last
// pixel of frame k, three sequential dividers compute
//     g_c = min(65535, floor(256 * (S_R + S_G + S_B) / (3 * S_c)))
// which scales every channel mean to the common gray mean; the new gains are
// taken at the next sof. A sof that arrives while the dividers still run
// (fewer than about 40 cycles between frames) keeps the old gains and sets
// gain_late.
//
// Interface: in_tok/out_tok are three NoC token streams (0 = R, 1 = G,
// 2 = B). One output triple per matched input triple, registered: two cycles
// after the last token of a triple when the streams are aligned. The channel
// balancing task is the paper's; the gray-world rule, the fixed-point format
// and the one-frame-late gains are this design's choices.
module color_constancy_node
  import isp_pkg::*;
#(
  parameter int unsigned IMG_W = 640,
  parameter int unsigned IMG_H = 480,
  parameter int unsigned SYNC_DEPTH = 16
) (
  input  logic   clk,
  input  logic   rst_n,
  input  token_t in_tok  [3],
  output token_t out_tok [3],
  output logic   gain_late,  // sticky: a frame started before its gains were ready
  output logic   sync_wait,  // resynchronizer holding a partial set this cycle
  output logic   sync_ovf    // sticky: resynchronizer overflow
);

  localparam int unsigned N   = IMG_W * IMG_H;
  localparam int unsigned PW  = $clog2(N + 1);
  localparam int unsigned SW  = $clog2(255 * N + 1);     // one channel sum
  localparam int unsigned TW  = $clog2(3 * 255 * N + 1); // sum of the three
  localparam int unsigned NW  = TW + 8;                  // 256 * total
  localparam int unsigned GW  = 16;                      // gain, 8.8 fixed point

  token_t a [3];
  logic   a_fire;

  sdf_resync #(.N(3), .DEPTH(SYNC_DEPTH)) u_sync (
    .clk, .rst_n,
    .in_tok (in_tok),
    .out_tok(a),
    .fire   (a_fire),
    .waiting(sync_wait),
    .overflow(sync_ovf)
  );

  logic [PW-1:0] pos;
  logic          infr;
  logic [SW-1:0] sum   [3];
  logic [GW-1:0] g_act [3];
  logic [GW-1:0] g_new [3];
  logic          pending, busy;

  logic [PW-1:0] cur_idx;
  logic          cur_px, last_px, swap;
  assign cur_idx = a[0].sof ? '0 : pos;
  assign cur_px  = a_fire & ~a[0].nul & (a[0].sof | infr);
  assign last_px = cur_px & (cur_idx == PW'(N - 1));
  assign swap    = cur_px & a[0].sof & pending;

  // Dividers.
  logic [2:0]    d_busy, d_done;   // the three dividers run in lock step
  logic [NW-1:0] d_quo [3];
  logic [TW-1:0] total;
  logic [SW-1:0] sum_fin [3];
  always_comb begin
    for (int c = 0; c < 3; c++) sum_fin[c] = sum[c] + (cur_px ? SW'(a[c].data) : '0);
    total = TW'(sum_fin[0]) + TW'(sum_fin[1]) + TW'(sum_fin[2]);
  end

  for (genvar c = 0; c < 3; c++) begin : g_div
    seq_div #(.NW(NW), .DW(TW)) u_div (
      .clk, .rst_n,
      .start(last_px),
      .num  (NW'(total) << 8),
      .den  (TW'(3) * TW'(sum_fin[c])),
      .busy (d_busy[c]),
      .done (d_done[c]),
      .quo  (d_quo[c])
    );
  end

  // Gains in effect for the current triple.
  logic [GW-1:0]    g_eff [3];
  logic [PIX_W+GW:0] prod [3];
  always_comb begin
    for (int c = 0; c < 3; c++) begin
      g_eff[c] = swap ? g_new[c] : g_act[c];
      prod[c]  = (PIX_W+GW+1)'(a[c].data) * (PIX_W+GW+1)'(g_eff[c]) + (PIX_W+GW+1)'(128);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pos       <= '0;
      infr      <= 1'b0;
      pending   <= 1'b0;
      busy      <= 1'b0;
      gain_late <= 1'b0;
      for (int c = 0; c < 3; c++) begin
        sum[c]     <= '0;
        g_act[c]   <= GW'(256);
        g_new[c]   <= GW'(256);
        out_tok[c] <= TOKEN_IDLE;
      end
    end else begin
      for (int c = 0; c < 3; c++) begin
        out_tok[c].vld  <= a_fire;
        out_tok[c].nul  <= ~cur_px;
        out_tok[c].sof  <= cur_px & a[0].sof;
        out_tok[c].data <= !cur_px ? '0
                         : (prod[c][PIX_W+GW:8] > (PIX_W+GW-7)'(255)) ? 8'hFF
                         : prod[c][8 +: PIX_W];
      end
      if (cur_px) begin
        pos  <= cur_idx + 1'b1;
        infr <= (cur_idx != PW'(N - 1));
        for (int c = 0; c < 3; c++) sum[c] <= last_px ? '0 : sum_fin[c];
        if (a[0].sof && busy) gain_late <= 1'b1;
      end
      if (swap) begin
        for (int c = 0; c < 3; c++) g_act[c] <= g_new[c];
        pending <= 1'b0;
      end
      if (last_px) begin
        if (busy) gain_late <= 1'b1;
        busy <= 1'b1;
      end
      if (&d_done) begin
        busy    <= 1'b0;
        pending <= 1'b1;
        for (int c = 0; c < 3; c++)
          g_new[c] <= (d_quo[c] > NW'(2**GW - 1)) ? GW'(2**GW - 1) : d_quo[c][GW-1:0];
      end
    end
  end

  // The three streams of one set always carry the same frame position.
  a_div_lockstep: assert property (@(posedge clk) disable iff (!rst_n) d_busy == {3{d_busy[0]}});

  a_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    a_fire |-> (a[0].nul == a[1].nul && a[0].nul == a[2].nul &&
                a[0].sof == a[1].sof && a[0].sof == a[2].sof));

endmodule
