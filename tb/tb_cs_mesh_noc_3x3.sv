// tb_cs_mesh_noc_3x3: the mesh at 3 x 3, the size used to illustrate the
// NoC topology.
//
// One multicast connection: the local port of the centre router (index 4)
// drives, through the crossbars, the local ports of all four corner routers
// (0, 2, 6, 8) at once, each two links away (three routers, three cycles):
// one dataflow edge with one driver and four loads, routed as a tree.
// Random tokens enter every local port every cycle; routed outputs must
// equal their source delayed by the router count, all others must stay idle.
module tb_cs_mesh_noc_3x3;
  import isp_pkg::*;

  localparam int ROWS = 3, COLS = 3, NR = ROWS * COLS;

  logic          clk = 0, rst_n = 0;
  token_t        local_in [NR], local_out [NR];
  logic          cfg_we = 0, cfg_apply = 0;
  logic [3:0]    cfg_addr = 0;
  router_cfg_t   cfg_word;
  logic [NR-1:0] cfg_err;
  int            checks = 0, failures = 0;

  always #5 clk = ~clk;

  cs_mesh_noc #(.ROWS(ROWS), .COLS(COLS)) dut (.clk, .rst_n, .local_in, .local_out,
    .cfg_we, .cfg_addr, .cfg_word, .cfg_apply, .cfg_err);

  token_t hist [NR][$];
  int     route_src [NR];
  int     route_lat [NR];
  bit     checking = 0;

  always @(posedge clk) begin
    if (checking) begin
      for (int d = 0; d < NR; d++) begin
        token_t e;
        e = (route_src[d] < 0) ? TOKEN_IDLE : hist[route_src[d]][route_lat[d]];
        checks++;
        if (local_out[d] != e) begin
          failures++;
          if (failures < 10) $display("%0t local %0d: got %h expected %h", $time, d, local_out[d], e);
        end
      end
    end
    for (int s = 0; s < NR; s++) begin
      token_t t;
      t = token_t'($urandom);
      t.vld = 1'b1;
      hist[s].push_front(t);
      if (hist[s].size() > 16) void'(hist[s].pop_back());
      local_in[s] <= t;
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    router_cfg_t w [NR];
    for (int i = 0; i < NR; i++) begin
      local_in[i] = TOKEN_IDLE;
      w[i] = CFG_ALL_OFF;
      route_src[i] = -1;
      route_lat[i] = 0;
    end
    cfg_word = CFG_ALL_OFF;
    // centre 4 -> N (1) and S (7); 1 -> W (0) and E (2); 7 -> W (6) and E (8)
    w[4].sel[PORT_N] = SEL_L; w[4].sel[PORT_S] = SEL_L;
    w[1].sel[PORT_W] = SEL_S; w[1].sel[PORT_E] = SEL_S;
    w[7].sel[PORT_W] = SEL_N; w[7].sel[PORT_E] = SEL_N;
    w[0].sel[PORT_L] = SEL_E; w[2].sel[PORT_L] = SEL_W;
    w[6].sel[PORT_L] = SEL_E; w[8].sel[PORT_L] = SEL_W;
    foreach (route_src[d]) if (d == 0 || d == 2 || d == 6 || d == 8) begin
      route_src[d] = 4; route_lat[d] = 3;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NR; i++) begin
      @(negedge clk);
      cfg_we = 1; cfg_addr = 4'(i); cfg_word = w[i];
    end
    @(negedge clk);
    cfg_we = 0; cfg_apply = 1;
    @(negedge clk);
    cfg_apply = 0;
    repeat (6) @(negedge clk);
    checking = 1;
    repeat (40) @(negedge clk);
    checks++;
    if (cfg_err != '0) begin failures++; $display("cfg_err %b", cfg_err); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
