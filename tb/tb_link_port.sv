// tb_link_port: two link ports wired back to back, as the two ends of one
// link. Random token streams are sent in both directions while the
// receiving sides accept at random, so the far receive buffer fills and
// the sender must stop for credit. Checks: every token arrives once and in
// order in each direction, a credit stall happens, no credit token leaks to
// the switch side, and a one-way stream into an always-ready receiver runs
// at one token per 3*ts+tt cycles.
module tb_link_port;
  import swallow_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #0.5 rst_n = 0;  // a real falling edge for the asynchronous reset
  logic [7:0] ts = 2, tt = 1;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic   a_in_valid, a_in_ready, a_out_valid, a_out_ready, a_stall;
  logic   b_in_valid, b_in_ready, b_out_valid, b_out_ready, b_stall;
  token_t a_in_tok, a_out_tok, b_in_tok, b_out_tok;
  logic [LINK_WIRES-1:0] a2b, b2a;

  link_port u_a (.clk, .rst_n, .ts, .tt, .in_valid(a_in_valid), .in_tok(a_in_tok), .in_ready(a_in_ready),
                 .out_valid(a_out_valid), .out_tok(a_out_tok), .out_ready(a_out_ready),
                 .tx_wires(a2b), .rx_wires(b2a), .credit_stall(a_stall));
  link_port u_b (.clk, .rst_n, .ts, .tt, .in_valid(b_in_valid), .in_tok(b_in_tok), .in_ready(b_in_ready),
                 .out_valid(b_out_valid), .out_tok(b_out_tok), .out_ready(b_out_ready),
                 .tx_wires(b2a), .rx_wires(a2b), .credit_stall(b_stall));

  token_t ab_q[$], ba_q[$];
  int stalls = 0, nab = 0, nba = 0;
  int ready_pct = 30;
  longint cyc = 0; longint first_rx = -1, last_rx;
  always @(posedge clk) cyc <= cyc + 1;

  // sources
  function automatic token_t rnd_tok();
    token_t t; t.ctrl = ($urandom % 6 == 0); t.data = 8'($urandom);
    if (t.ctrl) t.data = CT_END;  // only END as payload control token
    return t;
  endfunction
  int send_ab = 0, send_ba = 0;
  always @(posedge clk) begin
    if (a_stall || b_stall) stalls++;
    if (a_in_valid && a_in_ready) begin ab_q.push_back(a_in_tok); send_ab--; end
    if (b_in_valid && b_in_ready) begin ba_q.push_back(b_in_tok); send_ba--; end
    if (b_out_valid && b_out_ready) begin
      token_t e; e = ab_q.pop_front(); checks++; nab++;
      if (e != b_out_tok) begin failures++; $display("FAIL a->b got %h want %h", b_out_tok, e); end
      if (is_credit(b_out_tok)) begin failures++; $display("FAIL credit leaked"); end
      if (first_rx < 0) first_rx = cyc; last_rx = cyc;
    end
    if (a_out_valid && a_out_ready) begin
      token_t e; e = ba_q.pop_front(); checks++; nba++;
      if (e != a_out_tok) begin failures++; $display("FAIL b->a got %h want %h", a_out_tok, e); end
    end
  end
  always @(negedge clk) begin
    if (!a_in_valid || a_in_ready_q) begin a_in_valid <= (send_ab > 0); a_in_tok <= rnd_tok(); end
    if (!b_in_valid || b_in_ready_q) begin b_in_valid <= (send_ba > 0); b_in_tok <= rnd_tok(); end
    a_out_ready <= ($urandom % 100) < ready_pct;
    b_out_ready <= ($urandom % 100) < ready_pct;
  end
  logic a_in_ready_q, b_in_ready_q;
  always @(posedge clk) begin a_in_ready_q <= a_in_valid && a_in_ready; b_in_ready_q <= b_in_valid && b_in_ready; end

  initial begin
    a_in_valid = 0; b_in_valid = 0; a_in_tok = '0; b_in_tok = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    // phase 1: both directions, slow receivers, internal-link timing
    send_ab = 200; send_ba = 200;
    wait (send_ab <= 0 && send_ba <= 0);
    ready_pct = 100;
    repeat (200) @(posedge clk);
    checks++; if (stalls == 0) begin failures++; $display("FAIL: no credit stall"); end
    checks++; if (nab != 200 || nba != 200) begin failures++; $display("FAIL: counts %0d %0d", nab, nba); end
    // phase 2: one way, external-link timing, always-ready receiver
    ts = 8; tt = 8; repeat (4) @(posedge clk);
    first_rx = -1; nab = 0; send_ab = 64;
    wait (send_ab <= 0); repeat (200) @(posedge clk);
    checks++;
    if (nab != 64 || (last_rx - first_rx) != 63 * (3*8 + 8)) begin
      failures++; $display("FAIL: %0d tokens over %0d cycles, want 64 over %0d", nab, last_rx-first_rx, 63*32);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
