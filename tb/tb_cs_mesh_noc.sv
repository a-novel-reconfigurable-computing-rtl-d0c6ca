// tb_cs_mesh_noc: self-checking test of the 2x5 circuit-switched mesh.
//
// Loads three whole-mesh configurations in turn, each router's word through
// the addressed configuration bus followed by one cfg_apply:
//   day   : 1->0, 4->2, 3->5, 9->8 (two hops each)
//   night : 1->0, 4->6 and 4->2 (multicast), 7->5, 9->8
//   snake : 1 down the right column and across the bottom to 8 (six hops)
// Random tokens enter every local port every cycle. Every routed local
// output must equal its source's token delayed by the number of routers on
// the route; all other local outputs must stay idle. Finally an illegal word
// must be rejected by its router alone.
module tb_cs_mesh_noc;
  import isp_pkg::*;

  localparam int ROWS = 5, COLS = 2, NR = ROWS * COLS;

  logic        clk = 0, rst_n = 0;
  token_t      local_in [NR], local_out [NR];
  logic        cfg_we = 0, cfg_apply = 0;
  logic [3:0]  cfg_addr = 0;
  router_cfg_t cfg_word;
  logic [NR-1:0] cfg_err;
  int          checks = 0, failures = 0;

  always #5 clk = ~clk;

  cs_mesh_noc #(.ROWS(ROWS), .COLS(COLS)) dut (.clk, .rst_n, .local_in, .local_out,
    .cfg_we, .cfg_addr, .cfg_word, .cfg_apply, .cfg_err);

  // history of injected tokens, newest first
  token_t hist [NR][$];
  int     route_src [NR];   // -1: local output must be idle
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

  task automatic load(input router_cfg_t w [NR]);
    checking = 0;
    for (int i = 0; i < NR; i++) begin
      @(negedge clk);
      cfg_we = 1; cfg_addr = 4'(i); cfg_word = w[i];
    end
    @(negedge clk);
    cfg_we = 0; cfg_apply = 1;
    @(negedge clk);
    cfg_apply = 0;
    repeat (8) @(negedge clk);   // old paths drain
    checking = 1;
    repeat (50) @(negedge clk);
    checks++;
    if (cfg_err != '0) begin failures++; $display("unexpected cfg_err %b", cfg_err); end
  endtask

  function automatic void clear(ref router_cfg_t w [NR]);
    for (int i = 0; i < NR; i++) w[i] = CFG_ALL_OFF;
    for (int d = 0; d < NR; d++) begin route_src[d] = -1; route_lat[d] = 0; end
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    router_cfg_t w [NR];
    for (int i = 0; i < NR; i++) local_in[i] = TOKEN_IDLE;
    cfg_word = CFG_ALL_OFF;
    clear(w);
    repeat (3) @(posedge clk);
    rst_n = 1;

    // day
    clear(w);
    w[1].sel[PORT_W] = SEL_L; w[0].sel[PORT_L] = SEL_E; route_src[0] = 1; route_lat[0] = 2;
    w[4].sel[PORT_N] = SEL_L; w[2].sel[PORT_L] = SEL_S; route_src[2] = 4; route_lat[2] = 2;
    w[3].sel[PORT_S] = SEL_L; w[5].sel[PORT_L] = SEL_N; route_src[5] = 3; route_lat[5] = 2;
    w[9].sel[PORT_W] = SEL_L; w[8].sel[PORT_L] = SEL_E; route_src[8] = 9; route_lat[8] = 2;
    load(w);

    // night, with the Gaussian output multicast to both branches
    clear(w);
    w[1].sel[PORT_W] = SEL_L; w[0].sel[PORT_L] = SEL_E; route_src[0] = 1; route_lat[0] = 2;
    w[4].sel[PORT_S] = SEL_L; w[6].sel[PORT_L] = SEL_N; route_src[6] = 4; route_lat[6] = 2;
    w[4].sel[PORT_N] = SEL_L; w[2].sel[PORT_L] = SEL_S; route_src[2] = 4; route_lat[2] = 2;
    w[7].sel[PORT_N] = SEL_L; w[5].sel[PORT_L] = SEL_S; route_src[5] = 7; route_lat[5] = 2;
    w[9].sel[PORT_W] = SEL_L; w[8].sel[PORT_L] = SEL_E; route_src[8] = 9; route_lat[8] = 2;
    load(w);

    // snake: 1 -> 3 -> 5 -> 7 -> 9 -> 8
    clear(w);
    w[1].sel[PORT_S] = SEL_L;
    w[3].sel[PORT_S] = SEL_N;
    w[5].sel[PORT_S] = SEL_N;
    w[7].sel[PORT_S] = SEL_N;
    w[9].sel[PORT_W] = SEL_N;
    w[8].sel[PORT_L] = SEL_E; route_src[8] = 1; route_lat[8] = 6;
    load(w);

    // illegal word for router 6 (local port both in and out)
    @(negedge clk);
    cfg_we = 1; cfg_addr = 4'd6; cfg_word = CFG_ALL_OFF;
    cfg_word.sel[PORT_L] = SEL_N; cfg_word.sel[PORT_S] = SEL_L;
    @(negedge clk);
    cfg_we = 0; cfg_apply = 1;
    @(negedge clk);
    cfg_apply = 0;
    checks++;
    if (cfg_err != NR'(1 << 6)) begin failures++; $display("cfg_err %b after illegal word", cfg_err); end
    repeat (20) @(negedge clk);   // snake still running, checked meanwhile
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
