// xs1_switch: the 12-ported wormhole switch that sits beside each core.
//
// Every port carries tokens in both directions (in_* from the port into
// the switch, out_* from the switch to the port). A packet starts with a
// three-byte header; the first two bytes are the destination node
// identifier. An input collects those two bytes, asks route_lookup for a
// direction, and then waits for an output port of that direction
// (port_dir) that no route holds. Several ports may share one direction:
// a new route takes the lowest-numbered free one, so parallel links in one
// direction add bandwidth. Once granted, the input replays the two header
// bytes and then streams its tokens straight through; the output stays
// reserved for that input until the END control token has passed, which is
// the wormhole route the paper describes. A route never closed stays open
// for good, which is how a dedicated (channel-switched) circuit is made.
// Control tokens met while no route is open are dropped.
//
// One route is granted per cycle, inputs taking turns (round robin). From
// the second header byte entering to the first header byte leaving takes
// two cycles when the output is free; afterwards a token passes in the
// cycle it is offered. Header handling, arbitration and the per-direction
// port sets follow from the paper's description; the cycle timing is this
// design's own.
module xs1_switch
  import swallow_pkg::*;
#(
  parameter int unsigned NPORTS = SW_PORTS
) (
  input  logic     clk,
  input  logic     rst_n,
  input  node_id_t own_id,
  input  dir_t     bit_dir  [NODE_ID_W],
  input  dir_t     port_dir [NPORTS],
  input  logic     in_valid  [NPORTS],
  input  token_t   in_tok    [NPORTS],
  output logic     in_ready  [NPORTS],
  output logic     out_valid [NPORTS],
  output token_t   out_tok   [NPORTS],
  input  logic     out_ready [NPORTS],
  // status, one bit per output port
  output logic [NPORTS-1:0] out_busy,      // a route holds the port
  output logic [NPORTS-1:0] route_opened,  // a route was granted this cycle
  output logic [NPORTS-1:0] route_closed   // END passed this cycle
);

  localparam int unsigned PW = $clog2(NPORTS);

  typedef enum logic [2:0] {S_IDLE, S_H1, S_REQ, S_HDR0, S_HDR1, S_FWD} state_e;

  state_e       state   [NPORTS];
  logic [7:0]   hdr0    [NPORTS];
  logic [7:0]   hdr1    [NPORTS];
  logic [PW-1:0] route  [NPORTS];  // output held by each input
  dir_t         req_dir [NPORTS];
  logic [PW-1:0] owner  [NPORTS];  // input holding each output
  logic [PW-1:0] rr;               // round-robin start

  // route lookup for every input
  for (genvar i = 0; i < NPORTS; i++) begin : g_lookup
    logic unused_local;
    route_lookup u_lu (.dest({hdr0[i], hdr1[i]}), .own_id, .bit_dir,
                       .dir(req_dir[i]), .is_local(unused_local));
  end

  // ---------------- allocation: one grant per cycle ----------------
  logic          gnt_valid;
  logic [PW-1:0] gnt_in, gnt_out;

  always_comb begin
    logic found;
    gnt_valid = 1'b0;
    gnt_in    = '0;
    gnt_out   = '0;
    found     = 1'b0;
    for (int n = 0; n < NPORTS; n++) begin
      int i;
      i = (int'(rr) + n) % NPORTS;
      if (!found && state[i] == S_REQ) begin
        for (int o = 0; o < NPORTS; o++) begin
          if (!found && !out_busy[o] && port_dir[o] == req_dir[i]) begin
            found     = 1'b1;
            gnt_valid = 1'b1;
            gnt_in    = PW'(i);
            gnt_out   = PW'(o);
          end
        end
      end
    end
  end

  // ---------------- crossbar ----------------
  always_comb begin
    for (int o = 0; o < NPORTS; o++) begin
      out_valid[o] = 1'b0;
      out_tok[o]   = '0;
      if (out_busy[o]) begin
        unique case (state[owner[o]])
          S_HDR0: begin out_valid[o] = 1'b1; out_tok[o] = '{ctrl: 1'b0, data: hdr0[owner[o]]}; end
          S_HDR1: begin out_valid[o] = 1'b1; out_tok[o] = '{ctrl: 1'b0, data: hdr1[owner[o]]}; end
          S_FWD:  begin out_valid[o] = in_valid[owner[o]]; out_tok[o] = in_tok[owner[o]]; end
          default: ;
        endcase
      end
    end
    for (int i = 0; i < NPORTS; i++) begin
      unique case (state[i])
        S_IDLE, S_H1: in_ready[i] = 1'b1;
        S_FWD:        in_ready[i] = out_ready[route[i]];
        default:      in_ready[i] = 1'b0;
      endcase
    end
  end

  always_comb begin
    route_opened = '0;
    route_closed = '0;
    if (gnt_valid) route_opened[gnt_out] = 1'b1;
    for (int i = 0; i < NPORTS; i++)
      if (state[i] == S_FWD && in_valid[i] && out_ready[route[i]] && is_end(in_tok[i]))
        route_closed[route[i]] = 1'b1;
  end

  // ---------------- per-input state ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NPORTS; i++) begin
        state[i] <= S_IDLE;
        hdr0[i]  <= '0;
        hdr1[i]  <= '0;
        route[i] <= '0;
        owner[i] <= '0;
      end
      out_busy <= '0;
      rr       <= '0;
    end else begin
      if (gnt_valid) begin
        out_busy[gnt_out] <= 1'b1;
        owner[gnt_out]    <= gnt_in;
        route[gnt_in]     <= gnt_out;
        state[gnt_in]     <= S_HDR0;
        rr <= (gnt_in == PW'(NPORTS - 1)) ? '0 : gnt_in + 1'b1;
      end
      for (int i = 0; i < NPORTS; i++) begin
        unique case (state[i])
          S_IDLE: if (in_valid[i] && !in_tok[i].ctrl) begin
                    hdr0[i]  <= in_tok[i].data;
                    state[i] <= S_H1;
                  end
          S_H1:   if (in_valid[i]) begin
                    if (in_tok[i].ctrl) state[i] <= S_IDLE;  // malformed: drop
                    else begin
                      hdr1[i]  <= in_tok[i].data;
                      state[i] <= S_REQ;
                    end
                  end
          S_REQ:  ;  // handled by the grant above
          S_HDR0: if (out_ready[route[i]]) state[i] <= S_HDR1;
          S_HDR1: if (out_ready[route[i]]) state[i] <= S_FWD;
          S_FWD:  if (in_valid[i] && out_ready[route[i]] && is_end(in_tok[i])) begin
                    state[i]            <= S_IDLE;
                    out_busy[route[i]]  <= 1'b0;
                  end
          default: state[i] <= S_IDLE;
        endcase
      end
    end
  end

  // An output is never granted while a route holds it.
  a_no_double_grant: assert property (@(posedge clk) disable iff (!rst_n)
    gnt_valid |-> !out_busy[gnt_out]);

endmodule
