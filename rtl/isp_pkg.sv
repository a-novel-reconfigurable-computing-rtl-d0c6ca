// isp_pkg: types and constants shared by the reconfigurable image
// preprocessor.
//
// A NoC link carries one token per cycle at most. A token is an 8-bit pixel
// value plus three flags: vld (a token is on the link this cycle), nul (a
// null token, "no information", used by nodes to keep their fixed one-in /
// one-out token rate where no pixel result exists, e.g. before the first
// frame or while a pipeline is being flushed) and sof (the token is pixel 0
// of a frame, the stream-start marker). The token layout and widths are this
// design's choice.
//
// Router configuration: each of the five router output ports (N, E, S, W,
// local) selects which input port drives it, or is switched off.
package isp_pkg;

  localparam int unsigned PIX_W = 8;

  typedef struct packed {
    logic             vld;
    logic             nul;
    logic             sof;
    logic [PIX_W-1:0] data;
  } token_t;

  localparam token_t TOKEN_IDLE = '{vld: 1'b0, nul: 1'b0, sof: 1'b0, data: '0};

  // Router port numbering, also used as the index of in_tok/out_tok.
  localparam int unsigned NPORT  = 5;
  localparam int unsigned PORT_N = 0;
  localparam int unsigned PORT_E = 1;
  localparam int unsigned PORT_S = 2;
  localparam int unsigned PORT_W = 3;
  localparam int unsigned PORT_L = 4;

  // Source selected by one output port: SEL_OFF or input port (index + 1).
  typedef enum logic [2:0] {
    SEL_OFF = 3'd0,
    SEL_N   = 3'd1,
    SEL_E   = 3'd2,
    SEL_S   = 3'd3,
    SEL_W   = 3'd4,
    SEL_L   = 3'd5
  } sel_e;

  // One router's configuration word: sel[p] drives output port p.
  typedef struct packed {
    sel_e [NPORT-1:0] sel;
  } router_cfg_t;

  localparam int unsigned CFG_W = $bits(router_cfg_t);

  localparam router_cfg_t CFG_ALL_OFF = '{sel: {NPORT{SEL_OFF}}};

  // Input port index chosen by a select value (only meaningful if not SEL_OFF).
  function automatic int unsigned sel_port(sel_e s);
    return int'(s) - 1;
  endfunction

  // Configuration rules of one router:
  //  * an output never selects its own input (no U-turn: every port pair of
  //    the 5x5 crossbar joins two different ports);
  //  * a port works in one direction at a time: if its output is on, no other
  //    output may read its input;
  //  * select codes above SEL_L are illegal.
  function automatic logic cfg_legal(router_cfg_t c);
    logic ok;
    ok = 1'b1;
    for (int p = 0; p < NPORT; p++) begin
      if (c.sel[p] > SEL_L) ok = 1'b0;
      else if (c.sel[p] != SEL_OFF) begin
        if (sel_port(c.sel[p]) == p) ok = 1'b0;
        for (int q = 0; q < NPORT; q++)
          if (c.sel[q] != SEL_OFF && c.sel[q] <= SEL_L && sel_port(c.sel[q]) == p) ok = 1'b0;
      end
    end
    return ok;
  endfunction

endpackage
