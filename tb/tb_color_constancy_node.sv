// tb_color_constancy_node: self-checking test of the gray-world colour
// constancy node.
//
// The R, G and B streams of NF frames are played out with independent random
// idle cycles, so they reach the node skewed and must be resynchronized.
// Frame 0 must pass unchanged (unit gains); frames 1 and 2, each after a
// gap of null tokens, must use the gains of the frame before. Frame 3 follows
// frame 2 with no gap: gain_late must rise and frame 3 must keep the gains of
// frame 1. Also checks one output triple per input triple.
module tb_color_constancy_node;
  import isp_pkg::*;
  import isp_ref_pkg::*;

  localparam int W  = 16;
  localparam int H  = 12;
  localparam int NF = 4;
  localparam int GAP = 80;
  localparam int DEPTH = 16;

  logic   clk = 0, rst_n = 0;
  token_t in_tok [3], out_tok [3];
  logic   gain_late, sync_wait, sync_ovf;
  int     checks = 0, failures = 0;

  always #5 clk = ~clk;

  color_constancy_node #(.IMG_W(W), .IMG_H(H), .SYNC_DEPTH(DEPTH)) dut (
    .clk, .rst_n, .in_tok, .out_tok, .gain_late, .sync_wait, .sync_ovf);

  int     img  [NF][3][];
  int     gain [NF][3];
  token_t stim [3][$];
  int     sent [3];
  int     n_in = 0, n_out = 0, nwait = 0;
  int     got  [3][$];
  bit     late_early = 0;
  int     sofs_out = 0;

  function automatic int min_sent();
    return (sent[0] < sent[1]) ? ((sent[0] < sent[2]) ? sent[0] : sent[2])
                               : ((sent[1] < sent[2]) ? sent[1] : sent[2]);
  endfunction

  always @(posedge clk) begin
    for (int c = 0; c < 3; c++) begin
      if (rst_n && stim[c].size() > 0 && sent[c] - min_sent() < DEPTH - 4 &&
          $urandom_range(0, 1 + c) == 0) begin
        in_tok[c] <= stim[c].pop_front();
        sent[c]++;
      end else begin
        in_tok[c] <= TOKEN_IDLE;
      end
    end
  end

  always @(posedge clk) begin
    if (rst_n) begin
      if (sync_wait) nwait++;
      if (out_tok[0].vld) begin
        n_out++;
        if (!out_tok[0].nul) begin
          if (out_tok[0].sof) sofs_out++;
          for (int c = 0; c < 3; c++) got[c].push_back(int'(out_tok[c].data));
        end
      end
      if (gain_late && sofs_out < 3) late_early = 1;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 3; c++) begin
      in_tok[c] = TOKEN_IDLE;
      sent[c] = 0;
    end
    for (int f = 0; f < NF; f++) begin
      int base[];
      make_image(W, H, f, base);
      for (int c = 0; c < 3; c++) begin
        img[f][c] = new[W * H];
        foreach (base[i]) img[f][c][i] = (base[i] * (4 - c) * (f + 2)) / 24;
      end
      cc_gains(img[f][0], img[f][1], img[f][2], gain[f]);
    end
    for (int f = 0; f < NF; f++) begin
      for (int i = 0; i < W * H; i++) begin
        for (int c = 0; c < 3; c++)
          stim[c].push_back('{vld: 1'b1, nul: 1'b0, sof: (i == 0), data: 8'(img[f][c][i])});
        n_in++;
      end
      if (f != 2) for (int i = 0; i < GAP; i++) begin
        for (int c = 0; c < 3; c++) stim[c].push_back('{vld: 1'b1, nul: 1'b1, sof: 1'b0, data: 8'd0});
        n_in++;
      end
    end
    repeat (4) @(posedge clk);
    rst_n = 1;
    wait (stim[0].size() == 0 && stim[1].size() == 0 && stim[2].size() == 0);
    repeat (20) @(posedge clk);

    checks++;
    if (n_out != n_in) begin failures++; $display("triples in %0d out %0d", n_in, n_out); end
    checks++;
    if (got[0].size() != NF * W * H) begin failures++; $display("pixels %0d", got[0].size()); end
    checks++;
    if (nwait == 0) begin failures++; $display("streams never skewed"); end
    checks++;
    if (sync_ovf) begin failures++; $display("resync overflow"); end
    checks++;
    if (late_early || !gain_late) begin failures++; $display("gain_late early %0b final %0b", late_early, gain_late); end
    for (int f = 0; f < NF; f++)
      for (int c = 0; c < 3; c++)
        for (int i = 0; i < W * H; i++) begin
          int g, e;
          g = (f == 0) ? 256 : (f == 3) ? gain[1][c] : gain[f - 1][c];
          e = cc_apply(img[f][c][i], g);
          checks++;
          if (f * W * H + i >= got[c].size() || got[c][f * W * H + i] != e) begin
            failures++;
            if (failures < 10) $display("frame %0d ch %0d pixel %0d: expected %0d", f, c, i, e);
          end
        end
    $display("gains frame 0: %0d %0d %0d; skewed cycles %0d", gain[0][0], gain[0][1], gain[0][2], nwait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
