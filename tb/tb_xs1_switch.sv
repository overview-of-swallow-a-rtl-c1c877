// tb_xs1_switch: self-checking test of the 12-ported wormhole switch.
// Ports 0-3 are the processor links (DIR_LOCAL), 4-7 the on-die links
// (DIR_INTERNAL), 8 and 9 single external links (north, south), 10 and 11
// unused. Every input sends packets (2-byte destination, a tag byte, a few
// payload bytes, END) to random destinations; sinks accept at random.
// Checks: each packet leaves whole and unmixed on a port of the direction
// that a first-differing-bit reference lookup gives, every packet arrives
// exactly once, parallel routes in one direction use more than one port,
// a lone header reaches a free output two cycles after its second byte,
// and a route left open (no END) keeps its port until it is closed.
module tb_xs1_switch;
  import swallow_pkg::*;
  localparam int N = 12;
  logic clk = 0, rst_n = 1;
  initial #0.5 rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  node_id_t own_id = 16'h5a3c;
  dir_t bit_dir [NODE_ID_W];
  dir_t port_dir [N];
  logic in_valid [N]; token_t in_tok [N]; logic in_ready [N];
  logic out_valid [N]; token_t out_tok [N]; logic out_ready [N];
  logic [N-1:0] out_busy, route_opened, route_closed;

  xs1_switch dut (.*);

  function automatic dir_t ref_dir(node_id_t d);
    for (int k = NODE_ID_W-1; k >= 0; k--) if (d[k] != own_id[k]) return bit_dir[k];
    return DIR_LOCAL;
  endfunction

  typedef token_t pkt_t [$];
  pkt_t  src_q [N][$];     // packets still to send, per input
  pkt_t  sent  [int];      // by tag
  dir_t  want_dir [int];
  int    received = 0, total = 0;
  int    used_internal [N];
  int    ready_pct = 60;
  logic  hold_north = 0;   // when set, sinks accept
  token_t cur_out [N][$];

  // build a packet with a unique tag
  function automatic pkt_t make_pkt(node_id_t d, int tag, bit with_end);
    pkt_t p;
    p.push_back('{1'b0, d[15:8]}); p.push_back('{1'b0, d[7:0]}); p.push_back('{1'b0, 8'(tag)});
    for (int b = 0; b < 1 + $urandom % 6; b++) p.push_back('{1'b0, 8'($urandom)});
    if (with_end) p.push_back('{1'b1, CT_END});
    return p;
  endfunction

  function automatic node_id_t rnd_dest();
    node_id_t d; d = own_id ^ (node_id_t'($urandom) >> ($urandom % 17));
    // only directions that have ports
    while (!(ref_dir(d) inside {DIR_LOCAL, DIR_INTERNAL, DIR_NORTH, DIR_SOUTH}))
      d = own_id ^ (node_id_t'($urandom) >> ($urandom % 17));
    return d;
  endfunction

  // drivers: one token per input, held until accepted
  int pos [N];
  always @(negedge clk) begin
    for (int i = 0; i < N; i++) begin
      if (src_q[i].size() > 0 && pos[i] < src_q[i][0].size() && ($urandom % 4 != 0 || in_valid[i])) begin
        in_valid[i] = 1; in_tok[i] = src_q[i][0][pos[i]];
      end else begin
        in_valid[i] = 0; in_tok[i] = '0;
      end
      out_ready[i] = ($urandom % 100) < ready_pct;
    end
  end
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) begin
      if (in_valid[i] && in_ready[i]) begin
        pos[i]++;
        if (pos[i] == src_q[i][0].size()) begin void'(src_q[i].pop_front()); pos[i] = 0; end
      end
      if (out_valid[i] && out_ready[i]) begin
        cur_out[i].push_back(out_tok[i]);
        if (out_tok[i].ctrl && out_tok[i].data == CT_END) begin
          int tag; tag = cur_out[i][2].data;
          checks++;
          if (!sent.exists(tag) || sent[tag] != cur_out[i]) begin
            failures++; $display("FAIL: port %0d delivered a corrupted or unknown packet (tag %0d)", i, tag);
          end else begin
            checks++;
            if (port_dir[i] != want_dir[tag]) begin failures++; $display("FAIL: tag %0d on port %0d dir %0d want %0d", tag, i, port_dir[i], want_dir[tag]); end
            sent.delete(tag);
          end
          if (port_dir[i] == DIR_INTERNAL) used_internal[i]++;
          received++;
          cur_out[i].delete();
        end
      end
    end
  end

  int t_hdr1, t_out;
  initial begin
    foreach (bit_dir[k]) bit_dir[k] = dir_t'($urandom % 4);  // LOCAL/INTERNAL/NORTH/SOUTH
    bit_dir[NODE_ID_W-1] = DIR_NORTH;
    foreach (port_dir[p]) port_dir[p] = (p < 4) ? DIR_LOCAL : (p < 8) ? DIR_INTERNAL :
                                        (p == 8) ? DIR_NORTH : (p == 9) ? DIR_SOUTH : DIR_NONE;
    foreach (in_valid[i]) begin in_valid[i] = 0; in_tok[i] = '0; out_ready[i] = 0; pos[i] = 0; end
    repeat (3) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);

    // 1. latency of a lone packet into a free output
    ready_pct = 100;
    begin
      node_id_t d; pkt_t p; d = own_id ^ 16'h0001; p = make_pkt(d, 250, 1);
      sent[250] = p; want_dir[250] = ref_dir(d); total++;
      src_q[0].push_back(p);
      wait (pos[0] == 2); t_hdr1 = cycle - 1;  // second byte accepted on the previous edge
      wait (out_valid[0] || out_valid[1] || out_valid[2] || out_valid[3] ||
            out_valid[4] || out_valid[5] || out_valid[6] || out_valid[7] || out_valid[8] || out_valid[9]);
      t_out = cycle;
      checks++;
      if (t_out - t_hdr1 != 2) begin failures++; $display("FAIL: header latency %0d, want 2", t_out - t_hdr1); end
      wait (received == total);
    end

    // 2. random traffic on every input, slow sinks
    ready_pct = 40;
    for (int tag = 0; tag < 240; tag++) begin
      node_id_t d; pkt_t p; int i;
      d = rnd_dest(); p = make_pkt(d, tag, 1);
      i = $urandom % N;
      sent[tag] = p; want_dir[tag] = ref_dir(d); total++;
      src_q[i].push_back(p);
    end
    wait (received == total);
    checks++;
    begin
      int ports_used = 0;
      for (int i = 4; i < 8; i++) if (used_internal[i] > 0) ports_used++;
      if (ports_used < 2) begin failures++; $display("FAIL: only %0d internal links used", ports_used); end
    end

    // 3. a route left open holds its port; a second packet waits for END
    begin
      node_id_t d; pkt_t p1, p2; d = own_id ^ 16'h8000;  // north
      p1 = make_pkt(d, 251, 0); p2 = make_pkt(d, 252, 1);
      sent[252] = p2; want_dir[252] = DIR_NORTH; total++;
      src_q[1].push_back(p1); src_q[2].push_back(p2);
      repeat (60) @(posedge clk);
      checks++;
      if (!out_busy[8] || sent.exists(252) == 0) begin failures++; $display("FAIL: open route did not hold north port"); end
      // close the first route with END alone
      sent[251] = p1; sent[251].push_back('{1'b1, CT_END}); want_dir[251] = DIR_NORTH; total++;
      src_q[1].push_back('{'{1'b1, CT_END}});
      wait (received == total);
      checks++;
      if (out_busy != '0) begin failures++; $display("FAIL: routes left open %b", out_busy); end
    end
    checks++;
    if (sent.size() != 0) begin failures++; $display("FAIL: %0d packets missing", sent.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #200000;
    failures++;
    $display("watchdog: received %0d of %0d", received, total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
