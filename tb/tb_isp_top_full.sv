// tb_isp_top_full: end-to-end test of the reconfigurable preprocessor at the full default frame size (640 x 480).
//
// 1. Loads the day configuration over the configuration bus and streams
//    ND RGB frames; each channel's output must equal
//    canny(colour_constancy(gauss(input))) computed by the whole-frame
//    reference models, with the gains of the previous frame (unit gains for
//    the first).
// 2. Offers an illegal router word: it must be rejected (cfg_err) and the day
//    routes must stay.
// 3. Switches to the night configuration and streams NN frames; outputs must
//    equal canny(hist_eq(gauss(input))) with the table of the previous night
//    frame (identity for the first).
// The three channel streams are played out with independent random idle
// cycles so that they reach the shared colour constancy node skewed. Null
// tokens fill the gaps between frames. Checks also that every plane returns
// one token per token it received, that pixel 0 of each frame leaves
// 4*(W+1) tokens after it entered, and counts each mechanism (mode switch,
// rejected configuration, resynchronization, null tokens, gain update, table
// update); one that never happened counts as a failure.
module tb_isp_top_full;
  import isp_pkg::*;
  import isp_ref_pkg::*;

  localparam int W  = 640;
  localparam int H  = 480;
  localparam int ND = 2;
  localparam int NN = 2;
  localparam int NF = ND + NN;
  localparam int GAP = 4 * (W + 1) + 300;
  localparam int TL = 60, TH = 150;
  localparam int SKEW = 10;

  logic        clk = 0, rst_n = 0;
  token_t      frame_in [3], frame_out [3];
  logic        cfg_we = 0, cfg_apply = 0;
  logic [3:0]  cfg_addr = 0;
  router_cfg_t cfg_word;
  logic        cfg_err, he_late, cc_gain_late, cc_sync_wait, cc_sync_ovf;
  int          checks = 0, failures = 0;

  always #5 clk = ~clk;

  isp_top dut (
    .clk, .rst_n, .frame_in, .frame_out,
    .cfg_we, .cfg_addr, .cfg_word, .cfg_apply,
    .cfg_err, .he_late, .cc_gain_late, .cc_sync_wait, .cc_sync_ovf
  );

  int     img  [NF][3][];   // input frames
  int     expd [NF][3][];   // expected output frames
  token_t stim [3][$];
  int     sent [3], n_out [3];
  int     in_sof [3][$], out_sof [3][$];
  int     got  [3][$];
  int     n_null = 0, n_sync_wait = 0, n_switch = 0, n_reject = 0;

  function automatic int min_sent();
    return (sent[0] < sent[1]) ? ((sent[0] < sent[2]) ? sent[0] : sent[2])
                               : ((sent[1] < sent[2]) ? sent[1] : sent[2]);
  endfunction

  always @(posedge clk) begin
    for (int c = 0; c < 3; c++) begin
      if (rst_n && stim[c].size() > 0 && sent[c] - min_sent() < SKEW &&
          $urandom_range(0, 1 + c) == 0) begin
        if (stim[c][0].sof) in_sof[c].push_back(sent[c]);
        frame_in[c] <= stim[c].pop_front();
        sent[c]++;
      end else begin
        frame_in[c] <= TOKEN_IDLE;
      end
    end
  end

  always @(posedge clk) begin
    if (rst_n) begin
      if (cc_sync_wait) n_sync_wait++;
      for (int c = 0; c < 3; c++) begin
        if (frame_out[c].vld) begin
          if (frame_out[c].nul) n_null++;
          else begin
            if (frame_out[c].sof) out_sof[c].push_back(n_out[c]);
            got[c].push_back(int'(frame_out[c].data));
          end
          n_out[c]++;
        end
      end
    end
  end

  // Configuration words of the two algorithms (result of map and route).
  function automatic void mode_cfg(input bit night, output router_cfg_t w [10]);
    for (int i = 0; i < 10; i++) w[i] = CFG_ALL_OFF;
    w[1].sel[PORT_W] = SEL_L;  w[0].sel[PORT_L] = SEL_E;   // frame input -> Gaussian
    w[9].sel[PORT_W] = SEL_L;  w[8].sel[PORT_L] = SEL_E;   // Canny -> frame output
    if (!night) begin
      w[4].sel[PORT_N] = SEL_L; w[2].sel[PORT_L] = SEL_S;  // Gaussian -> colour constancy
      w[3].sel[PORT_S] = SEL_L; w[5].sel[PORT_L] = SEL_N;  // colour constancy -> Canny
    end else begin
      w[4].sel[PORT_S] = SEL_L; w[6].sel[PORT_L] = SEL_N;  // Gaussian -> hist. equalization
      w[7].sel[PORT_N] = SEL_L; w[5].sel[PORT_L] = SEL_S;  // hist. equalization -> Canny
    end
  endfunction

  task automatic write_word(input int a, input router_cfg_t w);
    @(negedge clk);
    cfg_we = 1; cfg_addr = 4'(a); cfg_word = w;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic apply();
    @(negedge clk);
    cfg_apply = 1;
    @(negedge clk);
    cfg_apply = 0;
  endtask

  task automatic set_mode(input bit night);
    router_cfg_t w [10];
    mode_cfg(night, w);
    for (int i = 0; i < 10; i++) write_word(i, w[i]);
    apply();
    n_switch++;
    checks++;
    if (cfg_err) begin failures++; $display("mode word rejected"); end
  endtask

  task automatic play(input int f0, input int f1);
    for (int f = f0; f < f1; f++) begin
      for (int i = 0; i < W * H; i++)
        for (int c = 0; c < 3; c++)
          stim[c].push_back('{vld: 1'b1, nul: 1'b0, sof: (i == 0), data: 8'(img[f][c][i])});
      for (int i = 0; i < GAP; i++)
        for (int c = 0; c < 3; c++)
          stim[c].push_back('{vld: 1'b1, nul: 1'b1, sof: 1'b0, data: 8'd0});
    end
    wait (stim[0].size() == 0 && stim[1].size() == 0 && stim[2].size() == 0);
    repeat (40) @(posedge clk);
  endtask

  initial begin
    repeat (8000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sm [NF][3][];
    for (int c = 0; c < 3; c++) begin
      frame_in[c] = TOKEN_IDLE;
      sent[c] = 0;
      n_out[c] = 0;
    end
    cfg_word = CFG_ALL_OFF;

    // Input frames and expected results.
    for (int f = 0; f < NF; f++) begin
      int base[];
      make_image(W, H, f, base);
      for (int c = 0; c < 3; c++) begin
        img[f][c] = new[W * H];
        foreach (base[i]) img[f][c][i] = (base[i] * (24 - 3 * c - 2 * (f % 2))) / 24;
        gauss(W, H, img[f][c], sm[f][c]);
      end
    end
    for (int f = 0; f < ND; f++) begin
      int g [3];
      if (f == 0) g = '{256, 256, 256};
      else cc_gains(sm[f - 1][0], sm[f - 1][1], sm[f - 1][2], g);
      for (int c = 0; c < 3; c++) begin
        int t[];
        t = new[W * H];
        foreach (t[i]) t[i] = cc_apply(sm[f][c][i], g[c]);
        canny(W, H, TL, TH, t, expd[f][c]);
      end
    end
    for (int f = ND; f < NF; f++)
      for (int c = 0; c < 3; c++) begin
        int t[], lut[];
        t = new[W * H];
        if (f == ND) foreach (t[i]) t[i] = sm[f][c][i];
        else begin
          he_lut(sm[f - 1][c], lut);
          foreach (t[i]) t[i] = lut[sm[f][c][i]];
        end
        canny(W, H, TL, TH, t, expd[f][c]);
      end
    $display("reference models done");

    repeat (4) @(posedge clk);
    rst_n = 1;

    set_mode(1'b0);
    play(0, ND);

    // illegal word: router 4 local port both read and driven
    begin
      router_cfg_t w [10], bad;
      mode_cfg(1'b0, w);
      bad = w[4];
      bad.sel[PORT_L] = SEL_N;
      write_word(4, bad);
      apply();
      checks++;
      if (!cfg_err) begin failures++; $display("illegal word accepted"); end
      else n_reject++;
      checks++;
      if (dut.g_plane[0].u_noc.g_row[2].g_col[0].u_router.cfg_active != w[4]) begin
        failures++; $display("rejected word changed the routes");
      end
    end

    set_mode(1'b1);
    play(ND, NF);

    // ---- results ----
    for (int c = 0; c < 3; c++) begin
      checks++;
      if (n_out[c] != sent[c]) begin failures++; $display("plane %0d: in %0d out %0d tokens", c, sent[c], n_out[c]); end
      checks++;
      if (got[c].size() != NF * W * H) begin failures++; $display("plane %0d: %0d pixels", c, got[c].size()); end
      checks++;
      if (out_sof[c].size() != NF) begin failures++; $display("plane %0d: %0d frames", c, out_sof[c].size()); end
      else for (int f = 0; f < NF; f++) begin
        checks++;
        if (out_sof[c][f] - in_sof[c][f] != 4 * (W + 1)) begin
          failures++;
          $display("plane %0d frame %0d: delay %0d tokens", c, f, out_sof[c][f] - in_sof[c][f]);
        end
      end
      for (int f = 0; f < NF; f++) begin
        int bad, ne;
        bad = 0; ne = 0;
        for (int i = 0; i < W * H; i++) begin
          int k;
          k = f * W * H + i;
          if (k < got[c].size() && got[c][k] == 255) ne++;
          if (k >= got[c].size() || got[c][k] != expd[f][c][i]) bad++;
        end
        checks++;
        if (bad != 0) begin failures++; $display("plane %0d frame %0d: %0d pixels differ", c, f, bad); end
        checks++;
        if (ne == 0) begin failures++; $display("plane %0d frame %0d: no edges", c, f); end
      end
    end
    checks++;
    if (he_late || cc_gain_late || cc_sync_ovf) begin
      failures++; $display("late %0b %0b overflow %0b", he_late, cc_gain_late, cc_sync_ovf);
    end
    // mechanisms
    $display("mode switches %0d, rejected configs %0d, resync cycles %0d, null tokens out %0d",
             n_switch, n_reject, n_sync_wait, n_null);
    checks++; if (n_switch < 2)    begin failures++; $display("no mode switch"); end
    checks++; if (n_reject == 0)   begin failures++; $display("no rejected configuration"); end
    checks++; if (n_sync_wait == 0) begin failures++; $display("no resynchronization"); end
    checks++; if (n_null == 0)     begin failures++; $display("no null tokens"); end
    checks++;
    if (dut.u_cc.g_act[0] == 16'd256 && dut.u_cc.g_act[1] == 16'd256) begin
      failures++; $display("gains never updated");
    end
    checks++;
    if (!dut.g_plane[0].u_he.lut_ok) begin failures++; $display("histogram table never used"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
