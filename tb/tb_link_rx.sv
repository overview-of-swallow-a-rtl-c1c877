// tb_link_rx: self-checking test of the link receiver.
// The testbench itself encodes random tokens onto five wires (a toggle of
// wire s for each 2-bit symbol s, most significant first; wire 4 toggles
// with the first symbol of a control token) with random symbol spacing,
// and checks that every token comes out once, in order, with the right
// value and control flag, two cycles after its last symbol.
module tb_link_rx;
  import swallow_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #0.5 rst_n = 0;  // a real falling edge for the asynchronous reset
  logic [LINK_WIRES-1:0] wires = '0;
  logic tok_valid; token_t tok;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  link_rx dut (.*);

  token_t exp_q[$];
  longint cyc = 0, last_sym_cyc;
  longint t_q[$];
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && tok_valid) begin
    token_t e;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL: unexpected token %h at %0d", tok, cyc); end
    else begin
      e = exp_q.pop_front();
      if (e != tok) begin failures++; $display("FAIL: got %0d/%h want %0d/%h", tok.ctrl, tok.data, e.ctrl, e.data); end
      checks++;
      last_sym_cyc = t_q.pop_front();
      // registered twice: visible to the second edge after the last symbol
      if (cyc - last_sym_cyc != 1) begin failures++; $display("FAIL: latency %0d", cyc - last_sym_cyc); end
    end
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (2) @(posedge clk);
    for (int n = 0; n < 300; n++) begin
      token_t t;
      t.ctrl = ($urandom % 4 == 0); t.data = 8'($urandom);
      exp_q.push_back(t);
      for (int s = 0; s < 4; s++) begin
        logic [1:0] sym; sym = t.data[7-2*s -: 2];
        @(negedge clk);
        wires[sym] = ~wires[sym];
        if (s == 0 && t.ctrl) wires[4] = ~wires[4];
        @(posedge clk); #0.1; if (s == 3) t_q.push_back(cyc);
        repeat ($urandom % 3) @(posedge clk);
      end
      repeat ($urandom % 4) @(posedge clk);
    end
    repeat (6) @(posedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d tokens lost", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
