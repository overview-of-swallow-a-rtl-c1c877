// tb_l2_package: one dual-core package. Core 0 has node identifier 0000,
// core 1 has 0001. Core 0 reaches core 1 over the four on-die links
// (bit 0 -> DIR_INTERNAL). Core 1's table sends bit 0 to DIR_EAST, its
// XLink 1, which the testbench loops back into core 0's XLink 0, so core 1
// reaches core 0 through an external link. Checks: every packet arrives
// whole at the other core; several on-die links carry routes at once; the
// XLink path stalls for credit; and a long packet over the XLink arrives
// at one token every 3*ts_ext+tt_ext = 32 cycles, while over the on-die
// links it arrives at one per 3*ts_int+tt_int = 7 cycles.
module tb_l2_package;
  import swallow_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #0.5 rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  node_id_t node_id [2];
  dir_t bit_dir [2][NODE_ID_W];
  dir_t xl_dir [2][4];
  logic proc_in_valid [2][4]; token_t proc_in_tok [2][4]; logic proc_in_ready [2][4];
  logic proc_out_valid [2][4]; token_t proc_out_tok [2][4]; logic proc_out_ready [2][4];
  logic [LINK_WIRES-1:0] xl_tx [2][4], xl_rx [2][4];
  logic [SW_PORTS-1:0] route_opened [2], route_closed [2], out_busy [2];
  logic [7:0] link_stall [2];

  l2_package dut (.clk, .rst_n, .ts_int(8'd2), .tt_int(8'd1), .ts_ext(8'd8), .tt_ext(8'd8), .*);

  // external loop: core 1 XLink 1 -> core 0 XLink 0 and back
  always_comb begin
    foreach (xl_rx[c, k]) xl_rx[c][k] = '0;
    xl_rx[0][0] = xl_tx[1][1];
    xl_rx[1][1] = xl_tx[0][0];
  end

  typedef token_t pkt_t [$];
  pkt_t q [2][4][$];   // per core, per processor link
  pkt_t exp_q [2][$];  // expected at each core, in any order: matched by tag
  pkt_t rx [2][4];
  int delivered = 0, total = 0, max_int_busy = 0, stall_cycles = 0;
  longint cyc = 0;
  longint last_t [2]; int gaps_ok [2], gaps_bad [2]; int gap_want [2];

  function automatic pkt_t make_pkt(node_id_t d, int tag, int len);
    pkt_t p;
    p.push_back('{1'b0, d[15:8]}); p.push_back('{1'b0, d[7:0]}); p.push_back('{1'b0, 8'(tag)});
    for (int b = 0; b < len; b++) p.push_back('{1'b0, 8'($urandom)});
    p.push_back('{1'b1, CT_END});
    return p;
  endfunction

  int pos [2][4];
  always @(negedge clk) begin
    foreach (proc_in_valid[c, k]) begin
      proc_in_valid[c][k] = rst_n && q[c][k].size() > 0;
      proc_in_tok[c][k]   = proc_in_valid[c][k] ? q[c][k][0][pos[c][k]] : '0;
      proc_out_ready[c][k] = 1;
    end
  end
  bit watch_gap [2];
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if ($countones(out_busy[0][7:4]) > max_int_busy) max_int_busy = $countones(out_busy[0][7:4]);
    if (link_stall[1][5]) stall_cycles++;
    foreach (proc_in_valid[c, k]) if (proc_in_valid[c][k] && proc_in_ready[c][k]) begin
      pos[c][k]++;
      if (pos[c][k] == q[c][k][0].size()) begin void'(q[c][k].pop_front()); pos[c][k] = 0; end
    end
    foreach (proc_out_valid[c, k]) if (proc_out_valid[c][k] && proc_out_ready[c][k]) begin
      token_t t; t = proc_out_tok[c][k];
      rx[c][k].push_back(t);
      if (watch_gap[c] && rx[c][k].size() > 8 && !t.ctrl) begin
        if (cyc - last_t[c] == gap_want[c]) gaps_ok[c]++; else gaps_bad[c]++;
      end
      last_t[c] = cyc;
      if (t.ctrl && t.data == CT_END) begin
        automatic bit found = 0;
        checks++;
        foreach (exp_q[c][i]) if (!found && exp_q[c][i] == rx[c][k]) begin found = 1; exp_q[c].delete(i); end
        if (!found) begin failures++; $display("FAIL: core %0d link %0d got an unexpected packet", c, k); end
        if ({rx[c][k][0].data, rx[c][k][1].data} != node_id[c]) begin failures++; $display("FAIL: wrong core"); end
        checks++;
        rx[c][k].delete();
        delivered++;
      end
    end
  end

  initial begin
    node_id[0] = 16'h0000; node_id[1] = 16'h0001;
    foreach (bit_dir[c, k]) bit_dir[c][k] = DIR_NONE;
    bit_dir[0][0] = DIR_INTERNAL;
    bit_dir[1][0] = DIR_EAST;
    xl_dir[0] = '{DIR_WEST, DIR_NONE, DIR_NONE, DIR_NONE};
    xl_dir[1] = '{DIR_NONE, DIR_EAST, DIR_NONE, DIR_NONE};
    gap_want[0] = 32; gap_want[1] = 7;
    foreach (pos[c, k]) pos[c][k] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // 1. one long packet each way, alone: check the token rate
    watch_gap[0] = 1; watch_gap[1] = 1;
    begin
      pkt_t a, b;
      a = make_pkt(node_id[1], 1, 40); b = make_pkt(node_id[0], 2, 40);
      q[0][0].push_back(a); exp_q[1].push_back(a);
      q[1][0].push_back(b); exp_q[0].push_back(b);
      total += 2;
    end
    wait (delivered == total);
    checks++;
    if (gaps_bad[0] != 0 || gaps_ok[0] < 20) begin failures++; $display("FAIL: XLink rate %0d good %0d bad gaps", gaps_ok[0], gaps_bad[0]); end
    checks++;
    if (gaps_bad[1] != 0 || gaps_ok[1] < 20) begin failures++; $display("FAIL: on-die rate %0d good %0d bad gaps", gaps_ok[1], gaps_bad[1]); end
    watch_gap[0] = 0; watch_gap[1] = 0;
    // 2. four packets at once from every processor link of each core
    for (int n = 0; n < 12; n++) begin
      for (int c = 0; c < 2; c++) begin
        pkt_t p; p = make_pkt(node_id[1-c], 16 + 2*n + c, 2 + $urandom % 10);
        q[c][n % 4].push_back(p); exp_q[1-c].push_back(p); total++;
      end
    end
    wait (delivered == total);
    checks++;
    if (max_int_busy < 2) begin failures++; $display("FAIL: on-die links never used in parallel"); end
    checks++;
    if (stall_cycles == 0) begin failures++; $display("FAIL: XLink never stalled for credit"); end
    $display("max on-die links busy %0d, XLink credit-stall cycles %0d", max_int_busy, stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog: %0d of %0d delivered", delivered, total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
