// tb_hist_eq_node: self-checking test of the histogram-equalization node.
//
// Frame 0 must pass unchanged (no table yet); frames 1 and 2, each preceded
// by a blanking gap of null tokens longer than the 256-cycle table build,
// must be mapped through the table of the frame before them. Frame 3 follows
// frame 2 with no gap: its start must raise lut_late and it must be mapped
// with the older table (from frame 1). Also checks one output token per input
// token and zero tokens of delay.
module tb_hist_eq_node;
  import isp_pkg::*;
  import isp_ref_pkg::*;

  localparam int W  = 24;
  localparam int H  = 16;
  localparam int NF = 4;
  localparam int GAP = 300;

  logic   clk = 0, rst_n = 0;
  token_t in_tok, out_tok;
  logic   lut_late;
  int     checks = 0, failures = 0;

  always #5 clk = ~clk;

  hist_eq_node #(.IMG_W(W), .IMG_H(H)) dut (.clk, .rst_n, .in_tok, .out_tok, .lut_late);

  int img [NF][];
  int lut [NF][];
  int n_in = 0, n_out = 0, in_sof_idx[$], out_sof_idx[$];
  int got [$];
  bit late_seen_before_f3 = 0;

  token_t stim [$];
  function automatic void send(input bit nul, input bit sof, input int d);
    stim.push_back('{vld: 1'b1, nul: nul, sof: sof, data: 8'(d)});
  endfunction

  always @(posedge clk) begin
    if (rst_n && stim.size() > 0 && $urandom_range(0, 3) != 0) begin
      if (stim[0].sof) in_sof_idx.push_back(n_in);
      in_tok <= stim.pop_front();
      n_in++;
    end else begin
      in_tok <= TOKEN_IDLE;
    end
  end

  always @(posedge clk) begin
    if (rst_n && out_tok.vld) begin
      if (!out_tok.nul) begin
        if (out_tok.sof) out_sof_idx.push_back(n_out);
        got.push_back(int'(out_tok.data));
      end
      n_out++;
    end
    if (rst_n && lut_late && in_sof_idx.size() < 4) late_seen_before_f3 = 1;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_tok = TOKEN_IDLE;
    for (int f = 0; f < NF; f++) begin
      make_image(W, H, f + 2, img[f]);
      // compress the range so that equalization visibly stretches it
      foreach (img[f][i]) img[f][i] = 60 + img[f][i] / 4;
      he_lut(img[f], lut[f]);
    end
    repeat (4) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NF; f++) begin
      for (int i = 0; i < W * H; i++) send(1'b0, i == 0, img[f][i]);
      if (f != 2) for (int i = 0; i < GAP; i++) send(1'b1, 1'b0, 0);
    end
    wait (stim.size() == 0);
    repeat (10) @(posedge clk);

    checks++;
    if (n_out != n_in) begin failures++; $display("token count: in %0d out %0d", n_in, n_out); end
    checks++;
    if (got.size() != NF * W * H) begin failures++; $display("pixel count %0d", got.size()); end
    checks++;
    if (out_sof_idx.size() != NF) begin failures++; $display("sof count %0d", out_sof_idx.size()); end
    else for (int f = 0; f < NF; f++) begin
      checks++;
      if (out_sof_idx[f] != in_sof_idx[f]) begin failures++; $display("frame %0d delayed", f); end
    end
    checks++;
    if (late_seen_before_f3 || !lut_late) begin
      failures++;
      $display("lut_late: early %0b final %0b", late_seen_before_f3, lut_late);
    end
    for (int f = 0; f < NF; f++)
      for (int i = 0; i < W * H; i++) begin
        int e;
        e = (f == 0) ? img[f][i] : (f == 3) ? lut[1][img[f][i]] : lut[f - 1][img[f][i]];
        checks++;
        if (f * W * H + i >= got.size() || got[f * W * H + i] != e) begin
          failures++;
          if (failures < 10) $display("frame %0d pixel %0d: expected %0d", f, i, e);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
