// tb_canny_node: self-checking test of the Canny node.
//
// Streams NF smoothed test frames of W x H pixels with random idle cycles
// between tokens and null tokens between frames, then compares every output
// pixel with the whole-frame reference model (Sobel, non-maximum
// suppression, hysteresis), checks that the node emits exactly one token per
// input token, that pixel 0 of a frame leaves 3*(W+1) tokens after it
// entered, and that the frames contain both edge and non-edge pixels.
module tb_canny_node;
  import isp_pkg::*;
  import isp_ref_pkg::*;

  localparam int W  = 16;
  localparam int H  = 12;
  localparam int NF = 3;
  localparam int GAP = 3 * W + 8;   // null tokens after each frame

  logic   clk = 0, rst_n = 0;
  token_t in_tok, out_tok;
  int     checks = 0, failures = 0;

  always #5 clk = ~clk;

  canny_node #(.IMG_W(W), .IMG_H(H), .TH_LOW(60), .TH_HIGH(150)) dut (.clk, .rst_n, .in_tok, .out_tok);

  int img [NF][];
  int expd[NF][];
  int n_in = 0, n_out = 0, in_sof_idx[$], out_sof_idx[$];
  int got [$];

  // Stimulus queue, played out with random idle cycles.
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
      int raw[];
      make_image(W, H, f, raw);
      gauss(W, H, raw, img[f]);
      canny(W, H, 60, 150, img[f], expd[f]);
    end
    repeat (4) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NF; f++) begin
      for (int i = 0; i < W * H; i++) send(1'b0, i == 0, img[f][i]);
      for (int i = 0; i < GAP; i++) send(1'b1, 1'b0, 0);
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
      if (out_sof_idx[f] - in_sof_idx[f] != 3 * (W + 1)) begin
        failures++;
        $display("frame %0d delay %0d tokens, expected %0d", f, out_sof_idx[f] - in_sof_idx[f], 3 * (W + 1));
      end
    end
    for (int f = 0; f < NF; f++)
      for (int i = 0; i < W * H; i++) begin
        checks++;
        if (f * W * H + i >= got.size() || got[f * W * H + i] != expd[f][i]) begin
          failures++;
          if (failures < 10) $display("frame %0d pixel %0d: expected %0d", f, i, expd[f][i]);
        end
      end
    begin
      int ne;
      ne = 0;
      foreach (got[i]) if (got[i] == 255) ne++;
      checks++;
      if (ne == 0 || ne == got.size()) begin failures++; $display("edge pixels %0d of %0d", ne, got.size()); end
      else $display("edge pixels %0d of %0d", ne, got.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
