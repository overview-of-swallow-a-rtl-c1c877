// link_rx: receive half of one Swallow link direction.
//
// Compares the five incoming wires with their value one cycle earlier. A
// toggle on one of wires[3:0] is a 2-bit symbol equal to that wire's index;
// four symbols, most significant first, make a token. A toggle on wires[4]
// with the first symbol marks a control token (this design's encoding, see
// link_tx). The wires are sampled through a register, so a token appears on
// tok/tok_valid (a one-cycle pulse) two cycles after its last symbol was
// driven. There is no back-pressure here: the credit scheme in link_port
// guarantees room for every token.
module link_rx
  import swallow_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [LINK_WIRES-1:0] wires,
  output logic        tok_valid,
  output token_t      tok
);

  logic [LINK_WIRES-1:0] w_q, w_prev;
  logic [LINK_WIRES-1:0] toggled;
  logic [1:0] sym;
  logic [1:0] nsym;      // symbols collected so far in this token
  logic [5:0] shift;     // first three symbols
  logic       ctrl_q;

  assign toggled = w_q ^ w_prev;

  always_comb begin
    sym = 2'd0;
    for (int i = 0; i < 4; i++)
      if (toggled[i]) sym = 2'(i);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q       <= '0;
      w_prev    <= '0;
      nsym      <= '0;
      shift     <= '0;
      ctrl_q    <= 1'b0;
      tok_valid <= 1'b0;
      tok       <= '0;
    end else begin
      w_q       <= wires;
      w_prev    <= w_q;
      tok_valid <= 1'b0;
      if (|toggled[3:0]) begin
        if (nsym == 2'd0) ctrl_q <= toggled[4];
        if (nsym == 2'd3) begin
          tok_valid <= 1'b1;
          tok.ctrl  <= ctrl_q;
          tok.data  <= {shift, sym};
          nsym      <= 2'd0;
        end else begin
          shift <= {shift[3:0], sym};
          nsym  <= nsym + 2'd1;
        end
      end
    end
  end

endmodule
