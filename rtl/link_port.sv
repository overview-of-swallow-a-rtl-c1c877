// link_port: one end of a bidirectional Swallow link with credit-based
// flow control.
//
// The port owns one link_tx (driving tx_wires) and one link_rx (watching
// rx_wires). Tokens from the switch (in_*) are sent only while the port
// holds credit, one credit per token. Tokens that arrive go into a receive
// buffer of BUF_DEPTH entries and leave towards the switch on out_*. The
// port returns buffer space to the far end as credit tokens: whenever the
// space that is free and not yet granted reaches CREDIT_CHUNK (or the whole
// buffer after reset), it sends a credit token carrying that number, ahead
// of any waiting data token. Credit tokens are consumed by the receiving
// port and never reach a switch.
//
// The paper gives the wormhole/credit principle and the link timing; the
// buffer depth, the credit chunk and the credit-token format are this
// design's choices. Timing: an accepted token leaves at the link_tx pace
// (3*ts+tt cycles per token) and appears on the far port's out_* about
// 3*ts+2 cycles after it was accepted.
module link_port
  import swallow_pkg::*;
#(
  parameter int unsigned BUF_DEPTH    = 8,
  parameter int unsigned CREDIT_CHUNK = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  ts,
  input  logic [7:0]  tt,
  // tokens from the switch, to be sent
  input  logic        in_valid,
  input  token_t      in_tok,
  output logic        in_ready,
  // tokens received, towards the switch
  output logic        out_valid,
  output token_t      out_tok,
  input  logic        out_ready,
  // the link's wires
  output logic [LINK_WIRES-1:0] tx_wires,
  input  logic [LINK_WIRES-1:0] rx_wires,
  // status
  output logic        credit_stall   // a token waits for credit
);

  localparam int unsigned CW = $clog2(BUF_DEPTH + 1) + 1;

  // ---------------- receive side ----------------
  logic   rx_valid;
  token_t rx_tok;

  link_rx u_rx (.clk, .rst_n, .wires(rx_wires), .tok_valid(rx_valid), .tok(rx_tok));

  logic rx_is_credit;
  assign rx_is_credit = is_credit(rx_tok);

  token_t            buf_mem [BUF_DEPTH];
  logic [$clog2(BUF_DEPTH)-1:0] wr_ptr, rd_ptr;
  logic [CW-1:0]     count;    // entries in the buffer
  logic [CW-1:0]     granted;  // credit held by the far end, unspent
  logic              push, pop;

  assign push      = rx_valid && !rx_is_credit;
  assign out_valid = (count != '0);
  assign out_tok   = buf_mem[rd_ptr];
  assign pop       = out_valid && out_ready;

  // ---------------- transmit side ----------------
  logic          tx_valid, tx_ready;
  token_t        tx_tok;
  logic [CW-1:0] tx_credit;  // credit we hold for the far buffer
  logic [CW-1:0] avail;      // free space not yet granted
  logic          send_credit;
  logic          seen_first; // first grant after reset sent

  assign avail       = CW'(BUF_DEPTH) - count - granted;
  assign send_credit = (avail >= CW'(CREDIT_CHUNK)) || (!seen_first && avail != '0);

  always_comb begin
    if (send_credit) begin
      tx_valid = 1'b1;
      tx_tok   = '{ctrl: 1'b1, data: {CT_CREDIT, avail[3:0]}};
    end else begin
      tx_valid = in_valid && (tx_credit != '0);
      tx_tok   = in_tok;
    end
  end

  assign in_ready     = !send_credit && tx_ready && (tx_credit != '0);
  assign credit_stall = in_valid && (tx_credit == '0);

  link_tx u_tx (.clk, .rst_n, .ts, .tt, .tok_valid(tx_valid), .tok(tx_tok),
                .tok_ready(tx_ready), .wires(tx_wires));

  logic credit_sent, data_sent;
  assign credit_sent = send_credit && tx_ready;
  assign data_sent   = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr     <= '0;
      rd_ptr     <= '0;
      count      <= '0;
      granted    <= '0;
      tx_credit  <= '0;
      seen_first <= 1'b0;
    end else begin
      if (push) begin
        buf_mem[wr_ptr] <= rx_tok;
        wr_ptr <= wr_ptr + 1'b1;
      end
      if (pop) rd_ptr <= rd_ptr + 1'b1;
      count <= count + CW'(push) - CW'(pop);

      granted <= granted - CW'(push) + (credit_sent ? avail : '0);
      if (credit_sent) seen_first <= 1'b1;

      tx_credit <= tx_credit - CW'(data_sent)
                 + ((rx_valid && rx_is_credit) ? CW'(rx_tok.data[3:0]) : '0);
    end
  end

  // The far end must never send more than the credit it was given.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    push |-> (count < CW'(BUF_DEPTH) || pop));

endmodule
