// tb_cs_router: self-checking test of the circuit-switched router.
//
// Repeatedly writes a random configuration word into the shadow register
// (a mix of legal, U-turn, both-direction and out-of-range words), applies
// it, and checks that legal words become active, illegal ones are rejected
// with cfg_err and the old configuration kept. Random tokens on all five
// inputs are driven every cycle and each output is compared, one cycle
// later, with the input its active select names (or an idle link). A
// multicast word (local input to N, E and S) is applied explicitly.
module tb_cs_router;
  import isp_pkg::*;

  logic        clk = 0, rst_n = 0;
  token_t      in_tok [NPORT], out_tok [NPORT];
  logic        cfg_we = 0, cfg_apply = 0;
  router_cfg_t cfg_word, cfg_active;
  logic        cfg_err;
  int          checks = 0, failures = 0;
  int          n_legal = 0, n_illegal = 0, n_multicast = 0;

  always #5 clk = ~clk;

  cs_router dut (.clk, .rst_n, .in_tok, .out_tok, .cfg_we, .cfg_word, .cfg_apply, .cfg_active, .cfg_err);

  // Expected state, kept by the testbench.
  logic [2:0] exp_sel  [NPORT];   // active configuration
  logic [2:0] sel_prev [NPORT];   // active configuration one cycle ago
  logic [2:0] shadow   [NPORT];
  token_t     prev_in  [NPORT];

  function automatic bit legal(logic [2:0] s [NPORT]);
    bit used [NPORT];
    foreach (used[q]) used[q] = 0;
    for (int p = 0; p < NPORT; p++) begin
      if (s[p] > 5) return 0;
      if (s[p] != 0) used[s[p] - 1] = 1;
    end
    for (int p = 0; p < NPORT; p++) begin
      if (s[p] == p + 1) return 0;
      if (s[p] != 0 && used[p]) return 0;
    end
    return 1;
  endfunction

  // Drive random tokens and check outputs every cycle.
  always @(posedge clk) begin
    if (rst_n) begin
      for (int p = 0; p < NPORT; p++) begin
        token_t e;
        e = (sel_prev[p] == 0) ? TOKEN_IDLE : prev_in[sel_prev[p] - 1];
        checks++;
        if (out_tok[p] != e) begin
          failures++;
          if (failures < 10) $display("%0t port %0d: got %h expected %h", $time, p, out_tok[p], e);
        end
      end
    end
    sel_prev = exp_sel;
    if (rst_n && cfg_apply && legal(shadow)) exp_sel = shadow;
    if (rst_n && cfg_we) for (int p = 0; p < NPORT; p++) shadow[p] = 3'(cfg_word.sel[p]);
    for (int p = 0; p < NPORT; p++) begin
      token_t t;
      t = token_t'($urandom);
      prev_in[p] = in_tok[p];
      in_tok[p] <= t;
    end
  end

  task automatic configure(input logic [2:0] s [NPORT]);
    router_cfg_t w;
    bit ok;
    for (int p = 0; p < NPORT; p++) w.sel[p] = sel_e'(s[p]);
    ok = legal(s);
    @(negedge clk);
    cfg_word = w;
    cfg_we   = 1;
    @(negedge clk);
    cfg_we    = 0;
    cfg_apply = 1;
    @(posedge clk);
    @(negedge clk);
    cfg_apply = 0;
    checks++;
    if (cfg_err != !ok) begin failures++; $display("cfg_err %0b for legal=%0b", cfg_err, ok); end
    for (int p = 0; p < NPORT; p++) begin
      checks++;
      if (3'(cfg_active.sel[p]) != exp_sel[p]) begin failures++; $display("active sel[%0d] wrong", p); end
    end
    if (ok) n_legal++; else n_illegal++;
    repeat (3) @(posedge clk);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [2:0] s [NPORT];
    for (int p = 0; p < NPORT; p++) begin
      exp_sel[p] = 0;
      sel_prev[p] = 0;
      shadow[p] = 0;
      in_tok[p]  = TOKEN_IDLE;
      prev_in[p] = TOKEN_IDLE;
    end
    cfg_word = CFG_ALL_OFF;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    // multicast: local to N, E, S
    s = '{3'd5, 3'd5, 3'd5, 3'd0, 3'd0};
    configure(s);
    n_multicast++;
    for (int k = 0; k < 300; k++) begin
      for (int p = 0; p < NPORT; p++) begin
        int r;
        r = $urandom_range(0, 9);
        s[p] = (r < 4) ? 3'd0 : (r == 9) ? 3'($urandom_range(6, 7)) : 3'($urandom_range(1, 5));
      end
      configure(s);
    end
    checks++;
    if (n_legal < 20 || n_illegal < 20) begin failures++; $display("legal %0d illegal %0d", n_legal, n_illegal); end
    $display("legal %0d illegal %0d", n_legal, n_illegal);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
