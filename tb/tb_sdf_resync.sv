// tb_sdf_resync: self-checking test of the stream resynchronizer.
//
// Three streams carry the same-numbered sequence of K tokens (random data,
// about one in five a null token, the first with sof), each with its own
// random idle cycles and a different start delay, so their tokens arrive
// skewed. The k-th output set must hold the k-th token of every stream with
// all three valid in the same cycle, exactly K sets must leave, waiting must
// have been seen, overflow never, and with aligned inputs a set must leave
// one cycle after it arrived.
module tb_sdf_resync;
  import isp_pkg::*;

  localparam int N = 3;
  localparam int DEPTH = 8;
  localparam int K = 400;

  logic   clk = 0, rst_n = 0;
  token_t in_tok [N], out_tok [N];
  logic   fire, waiting, overflow;
  int     checks = 0, failures = 0;

  always #5 clk = ~clk;

  sdf_resync #(.N(N), .DEPTH(DEPTH)) dut (.clk, .rst_n, .in_tok, .out_tok, .fire, .waiting, .overflow);

  token_t seqs [N][K];
  int     sent [N];
  int     nsets = 0, nwait = 0;
  bit     phase2 = 0;
  int     lat_ok = 0;

  // Each stream runs ahead by at most DEPTH-2 tokens of the slowest one.
  function automatic int min_sent();
    int m;
    m = sent[0];
    for (int i = 1; i < N; i++) if (sent[i] < m) m = sent[i];
    return m;
  endfunction

  always @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      if (rst_n && !phase2 && sent[i] < K && sent[i] - min_sent() < DEPTH - 2 &&
          $urandom_range(0, 2 + 2 * i) == 0) begin
        in_tok[i] <= seqs[i][sent[i]];
        sent[i]++;
      end else if (!phase2) begin
        in_tok[i] <= TOKEN_IDLE;
      end
    end
  end

  always @(posedge clk) begin
    if (rst_n) begin
      if (waiting) nwait++;
      if (out_tok[0].vld || out_tok[1].vld || out_tok[2].vld) begin
        checks++;
        if (!(out_tok[0].vld && out_tok[1].vld && out_tok[2].vld) || !fire) begin
          failures++;
          $display("set %0d not complete", nsets);
        end
        for (int i = 0; i < N; i++) begin
          checks++;
          if (nsets >= K || out_tok[i] != seqs[i][nsets]) begin
            failures++;
            if (failures < 10) $display("set %0d stream %0d mismatch", nsets, i);
          end
        end
        nsets++;
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      in_tok[i] = TOKEN_IDLE;
      sent[i] = 0;
    end
    for (int k = 0; k < K; k++) begin
      bit nul;
      int d;
      nul = ($urandom_range(0, 4) == 0);
      for (int i = 0; i < N; i++) begin
        d = nul ? 0 : int'($urandom_range(0, 255));
        seqs[i][k] = '{vld: 1'b1, nul: nul, sof: (k == 0), data: 8'(d)};
      end
    end
    repeat (4) @(posedge clk);
    rst_n = 1;
    wait (sent[0] == K && sent[1] == K && sent[2] == K);
    repeat (20) @(posedge clk);
    checks++;
    if (nsets != K) begin failures++; $display("sets %0d of %0d", nsets, K); end
    checks++;
    if (nwait == 0) begin failures++; $display("never waited"); end
    checks++;
    if (overflow) begin failures++; $display("overflow"); end
    // Aligned inputs: one set per cycle, one cycle of latency.
    phase2 = 1;
    @(posedge clk);
    for (int i = 0; i < N; i++) in_tok[i] <= '{vld: 1'b1, nul: 1'b0, sof: 1'b0, data: 8'(i + 7)};
    @(posedge clk);
    for (int i = 0; i < N; i++) in_tok[i] <= TOKEN_IDLE;
    @(posedge clk);   // the DUT has taken the tokens into its buffers
    #1;
    checks++;
    if (!(fire && out_tok[1].vld && out_tok[1].data == 8'd8)) begin
      failures++;
      $display("aligned set not out after one cycle");
    end
    $display("sets %0d, cycles waiting %0d", nsets, nwait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
