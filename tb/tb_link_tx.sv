// tb_link_tx: self-checking test of the link transmitter.
// Sends random data and control tokens at several ts/tt settings, decodes
// the wire toggles in the testbench (one toggle on wires[3:0] per 2-bit
// symbol, wires[4] toggling with the first symbol of a control token) and
// checks each token's value, its symbol spacing (ts) and the token period
// 3*ts+tt when tokens are offered back to back.
module tb_link_tx;
  import swallow_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #0.5 rst_n = 0;  // a real falling edge for the asynchronous reset
  logic [7:0] ts, tt;
  logic tok_valid; token_t tok; logic tok_ready;
  logic [LINK_WIRES-1:0] wires, prev;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  link_tx dut (.*);

  token_t sent_q[$];
  // decoder/monitor
  int nsym = 0; logic [7:0] acc; logic ctl; longint last_sym_t, first_sym_t, prev_first_t = -1;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) begin
    prev <= wires;
    if (rst_n && (wires ^ prev) != 0) begin
      logic [4:0] t; int s; t = wires ^ prev; s = -1;
      for (int i = 0; i < 4; i++) if (t[i]) s = i;
      if ($countones(t[3:0]) != 1) begin failures++; $display("FAIL: %0d wires toggled", $countones(t[3:0])); end
      if (nsym == 0) begin
        ctl = t[4]; acc = 0; first_sym_t = cyc;
        if (prev_first_t >= 0 && back2back) begin
          checks++;
          if (cyc - prev_first_t != 3*ts + tt) begin failures++; $display("FAIL: token period %0d, want %0d", cyc - prev_first_t, 3*ts+tt); end
        end
        prev_first_t = cyc;
      end else begin
        checks++;
        if (cyc - last_sym_t != ts) begin failures++; $display("FAIL: symbol gap %0d want %0d", cyc-last_sym_t, ts); end
        if (t[4]) begin failures++; $display("FAIL: wire 4 toggled mid-token"); end
      end
      last_sym_t = cyc;
      acc = {acc[5:0], 2'(s)};
      nsym++;
      if (nsym == 4) begin
        token_t exp; nsym = 0;
        exp = sent_q.pop_front();
        checks++;
        if (exp.data != acc || exp.ctrl != ctl) begin failures++; $display("FAIL: got %0d/%h want %0d/%h", ctl, acc, exp.ctrl, exp.data); end
      end
    end
  end

  bit back2back;
  initial begin
    tok_valid = 0; tok = '0; ts = 2; tt = 1; back2back = 1;
    repeat (3) @(posedge clk); rst_n = 1;
    foreach (cfg_ts[k]) begin
      ts = cfg_ts[k]; tt = cfg_tt[k];
      prev_first_t = -1;
      for (int n = 0; n < 40; n++) begin
        @(negedge clk);
        tok_valid = 1; tok.ctrl = ($urandom % 5 == 0); tok.data = 8'($urandom);
        @(posedge clk); while (!tok_ready) @(posedge clk);
        sent_q.push_back(tok);
        @(negedge clk); tok_valid = 0;
      end
      repeat (4*ts + 2*tt + 4) @(posedge clk);
    end
    checks++; if (sent_q.size() != 0) begin failures++; $display("FAIL: %0d tokens not seen", sent_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  int cfg_ts[3] = '{2, 8, 3};
  int cfg_tt[3] = '{1, 8, 5};

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
