// sdf_resync: resynchronizer for the input streams of a dataflow node.
//
// The delay of every NoC path is unknown to the node, so the tokens that
// belong together arrive on its N inputs at different times. Each input
// stream is written into its own FIFO of DEPTH tokens; whenever every FIFO
// holds at least one token, one token is taken from each and the matched set
// is presented on out_tok with all vld bits set (fire). Null tokens are
// buffered and matched like any other token, so a set may mix data and null
// tokens. Because every node emits a fixed number of tokens per firing, the
// k-th tokens of all streams always form one set, whatever the delays.
//
// Timing: out_tok is registered; a set leaves one cycle after its last token
// arrived (or after the previous set). waiting is high while some, but not
// all, FIFOs hold tokens; overflow is sticky and means a skew larger than
// DEPTH tokens. Buffering, depth and the flags are this design's choices;
// the need to resynchronize the inputs is the paper's.
module sdf_resync
  import isp_pkg::*;
#(
  parameter int unsigned N     = 3,
  parameter int unsigned DEPTH = 16
) (
  input  logic   clk,
  input  logic   rst_n,
  input  token_t in_tok  [N],
  output token_t out_tok [N],
  output logic   fire,
  output logic   waiting,
  output logic   overflow
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH + 1);

  typedef struct packed {
    logic             nul;
    logic             sof;
    logic [PIX_W-1:0] data;
  } ent_t;

  ent_t          mem  [N][DEPTH];
  logic [AW-1:0] wp   [N];
  logic [AW-1:0] rp   [N];
  logic [CW-1:0] cnt  [N];
  logic [N-1:0]  nonempty;
  logic          pop;

  always_comb begin
    for (int i = 0; i < N; i++) nonempty[i] = (cnt[i] != '0);
  end
  assign pop     = &nonempty;
  assign waiting = |nonempty & ~pop;

  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++)
      if (in_tok[i].vld && cnt[i] != CW'(DEPTH))
        mem[i][wp[i]] <= '{nul: in_tok[i].nul, sof: in_tok[i].sof, data: in_tok[i].data};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        wp[i]      <= '0;
        rp[i]      <= '0;
        cnt[i]     <= '0;
        out_tok[i] <= TOKEN_IDLE;
      end
      fire     <= 1'b0;
      overflow <= 1'b0;
    end else begin
      fire <= pop;
      for (int i = 0; i < N; i++) begin
        logic push;
        push = in_tok[i].vld && (cnt[i] != CW'(DEPTH));
        if (in_tok[i].vld && cnt[i] == CW'(DEPTH)) overflow <= 1'b1;
        if (push) wp[i] <= (wp[i] == AW'(DEPTH - 1)) ? '0 : wp[i] + 1'b1;
        if (pop)  rp[i] <= (rp[i] == AW'(DEPTH - 1)) ? '0 : rp[i] + 1'b1;
        cnt[i] <= cnt[i] + CW'(push) - CW'(pop);
        out_tok[i].vld  <= pop;
        out_tok[i].nul  <= mem[i][rp[i]].nul;
        out_tok[i].sof  <= mem[i][rp[i]].sof;
        out_tok[i].data <= mem[i][rp[i]].data;
      end
    end
  end

  // A full FIFO must never be offered another token.
  for (genvar i = 0; i < N; i++) begin : g_chk
    a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
      !(in_tok[i].vld && cnt[i] == CW'(DEPTH)))
      else $error("sdf_resync: input %0d overflow", i);
  end

endmodule
