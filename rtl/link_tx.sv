// link_tx: transmit half of one Swallow link direction.
//
// Each token is sent as four 2-bit symbols, most significant first. A
// symbol s is signalled by toggling wire s of wires[3:0], so a byte costs
// four wire transitions. A control token additionally toggles wires[4]
// together with its first symbol (this marking of control tokens is this
// design's choice). Symbols are spaced ts clock cycles apart and the first
// symbol of the next token follows the last symbol of this one after tt
// cycles, so back-to-back tokens leave every 3*ts+tt cycles, as the link
// timing formula states. ts and tt are run-time settings (>= 1).
//
// Interface: tok_valid/tok_ready handshake; tok_ready is high when the
// transmitter can accept a token this cycle (idle, or the inter-token gap
// expires this cycle). wires is a registered output.
module link_tx
  import swallow_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  ts,
  input  logic [7:0]  tt,
  input  logic        tok_valid,
  input  token_t      tok,
  output logic        tok_ready,
  output logic [LINK_WIRES-1:0] wires
);

  typedef enum logic [1:0] {S_IDLE, S_SYM, S_GAP} state_e;
  state_e     state;
  logic [7:0] cur;       // byte being sent
  logic [1:0] sym_idx;   // index of the last symbol sent
  logic [7:0] wait_cnt;  // cycles left before the next event

  // A new token may start when idle or on the last cycle of the gap.
  assign tok_ready = (state == S_IDLE) || (state == S_GAP && wait_cnt <= 8'd1);

  // wire index (0..3) toggled for symbol i of byte d
  function automatic logic [2:0] sym_of(logic [7:0] d, logic [1:0] i);
    return {1'b0, d[7 - 2*i -: 2]};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cur      <= '0;
      sym_idx  <= '0;
      wait_cnt <= '0;
      wires    <= '0;
    end else begin
      if (tok_valid && tok_ready) begin
        // first symbol goes out now
        cur      <= tok.data;
        sym_idx  <= 2'd0;
        wait_cnt <= ts;
        state    <= S_SYM;
        wires[sym_of(tok.data, 2'd0)] <= ~wires[sym_of(tok.data, 2'd0)];
        if (tok.ctrl) wires[4] <= ~wires[4];
      end else begin
        unique case (state)
          S_IDLE: ;
          S_SYM: begin
            if (wait_cnt <= 8'd1) begin
              wires[sym_of(cur, sym_idx + 2'd1)] <= ~wires[sym_of(cur, sym_idx + 2'd1)];
              sym_idx <= sym_idx + 2'd1;
              if (sym_idx == 2'd2) begin
                state    <= S_GAP;
                wait_cnt <= tt;
              end else begin
                wait_cnt <= ts;
              end
            end else begin
              wait_cnt <= wait_cnt - 8'd1;
            end
          end
          S_GAP: begin
            if (wait_cnt <= 8'd1) state <= S_IDLE;
            else                  wait_cnt <= wait_cnt - 8'd1;
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end

endmodule
