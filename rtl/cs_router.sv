// cs_router: circuit-switched NoC router, a 5x5 crossbar with a
// configuration model.
//
// The router joins its four neighbour ports (N, E, S, W) and the local port
// of the node attached to it. A connection is a fixed path through the
// crossbar: output port p copies the token of the input port named by
// sel[p] every cycle, so a link carries its stream at full, fixed rate with no
// header or routing information. One input may drive several outputs
// (multicast), which realises dataflow edges with several loads.
//
// Configuration model: cfg_we writes a configuration word into a shadow
// register; cfg_apply (the external configuration signal) copies the shadow
// into the active configuration in one cycle, so all routers of a NoC can
// switch together. A shadow word that breaks the port rules (see
// isp_pkg::cfg_legal: no U-turn, each port in one direction at a time) is
// rejected: the active configuration stays and cfg_err is set until the next
// legal apply. Reset (synchronous, active low) switches every output off.
//
// Timing: with OUT_REG = 1 every output is registered, one cycle per hop.
// The crossbar, the port rules and the configure-on-external-signal behaviour
// follow the paper; the configuration encoding, the shadow register and the
// output register are this design's choices.
module cs_router
  import isp_pkg::*;
#(
  parameter bit OUT_REG = 1'b1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  token_t      in_tok  [NPORT],
  output token_t      out_tok [NPORT],
  input  logic        cfg_we,
  input  router_cfg_t cfg_word,
  input  logic        cfg_apply,
  output router_cfg_t cfg_active,
  output logic        cfg_err
);

  router_cfg_t shadow_q, active_q;
  token_t      xbar [NPORT];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      shadow_q <= CFG_ALL_OFF;
      active_q <= CFG_ALL_OFF;
      cfg_err  <= 1'b0;
    end else begin
      if (cfg_we) shadow_q <= cfg_word;
      if (cfg_apply) begin
        if (cfg_legal(shadow_q)) begin
          active_q <= shadow_q;
          cfg_err  <= 1'b0;
        end else begin
          cfg_err  <= 1'b1;
        end
      end
    end
  end

  assign cfg_active = active_q;

  // Crossbar: one multiplexer per output port.
  always_comb begin
    for (int p = 0; p < NPORT; p++) begin
      unique case (active_q.sel[p])
        SEL_N:   xbar[p] = in_tok[PORT_N];
        SEL_E:   xbar[p] = in_tok[PORT_E];
        SEL_S:   xbar[p] = in_tok[PORT_S];
        SEL_W:   xbar[p] = in_tok[PORT_W];
        SEL_L:   xbar[p] = in_tok[PORT_L];
        default: xbar[p] = TOKEN_IDLE;
      endcase
    end
  end

  if (OUT_REG) begin : g_reg
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        for (int p = 0; p < NPORT; p++) out_tok[p] <= TOKEN_IDLE;
      end else begin
        for (int p = 0; p < NPORT; p++) out_tok[p] <= xbar[p];
      end
    end
  end else begin : g_comb
    always_comb out_tok = xbar;
  end

  // The active configuration always obeys the port rules.
  a_active_legal: assert property (@(posedge clk) disable iff (!rst_n) cfg_legal(active_q));

endmodule
