// swallow_traffic: traffic generator and checker for the processor links
// of a ROWS x COLS grid of packages (testbench only).
//
// Every core sends NPKT packets to random other cores, one at a time,
// cycling over its four processor links. A packet is: destination node
// identifier (2 bytes), a channel-end byte, the source identifier (2
// bytes), a sequence number, 0-5 random bytes, END. The first packet of
// core 0 of package (0,0) waits HOLD cycles before its END, keeping its
// route open across the grid meanwhile. Every core accepts tokens on its
// four links (at random), rebuilds the packets, and checks that the header
// names this core and that the packet is one that was sent, unchanged.
// Node identifiers follow swallow_top: {row, column, layer}.
module swallow_traffic
  import swallow_pkg::*;
#(
  parameter int ROWS = 4,
  parameter int COLS = 2,
  parameter int NPKT = 4,
  parameter int HOLD = 300
) (
  input  logic   clk,
  input  logic   rst_n,
  output logic   proc_in_valid  [ROWS][COLS][2][4],
  output token_t proc_in_tok    [ROWS][COLS][2][4],
  input  logic   proc_in_ready  [ROWS][COLS][2][4],
  input  logic   proc_out_valid [ROWS][COLS][2][4],
  input  token_t proc_out_tok   [ROWS][COLS][2][4],
  output logic   proc_out_ready [ROWS][COLS][2][4],
  output int     checks,
  output int     failures,
  output int     delivered,
  output int     expected
);
  localparam int RB = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int CB = (COLS > 1) ? $clog2(COLS) : 1;

  function automatic node_id_t node_of(int r, int c, int l);
    return node_id_t'((r << (CB + 1)) | (c << 1) | l);
  endfunction

  typedef token_t pkt_t [$];
  pkt_t sent [int];                  // key {src, seq}
  pkt_t q    [ROWS][COLS][2][$];     // packets still to send
  int   pos  [ROWS][COLS][2];
  int   lnk  [ROWS][COLS][2];
  int   wait_cnt [ROWS][COLS][2];
  pkt_t rx   [ROWS][COLS][2][4];

  initial begin
    checks = 0; failures = 0; delivered = 0; expected = 0;
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) for (int l = 0; l < 2; l++) begin
      pos[r][c][l] = 0; lnk[r][c][l] = 0; wait_cnt[r][c][l] = 0;
      for (int k = 0; k < 4; k++) begin proc_in_valid[r][c][l][k] = 0; proc_in_tok[r][c][l][k] = '0; proc_out_ready[r][c][l][k] = 0; end
      for (int n = 0; n < NPKT; n++) begin
        automatic pkt_t p = {}; node_id_t src, dst; int dr, dc, dl;
        do begin dr = $urandom % ROWS; dc = $urandom % COLS; dl = $urandom % 2; end
        while (dr == r && dc == c && dl == l);
        if (r == 0 && c == 0 && l == 0 && n == 0) begin dr = ROWS - 1; dc = COLS - 1; dl = 1; end
        src = node_of(r, c, l); dst = node_of(dr, dc, dl);
        p.push_back('{1'b0, dst[15:8]}); p.push_back('{1'b0, dst[7:0]}); p.push_back('{1'b0, 8'h02});
        p.push_back('{1'b0, src[15:8]}); p.push_back('{1'b0, src[7:0]}); p.push_back('{1'b0, 8'(n)});
        for (int b = 0; b < $urandom % 6; b++) p.push_back('{1'b0, 8'($urandom)});
        p.push_back('{1'b1, CT_END});
        sent[{src, 8'(n)}] = p;
        q[r][c][l].push_back(p);
        expected++;
      end
    end
  end

  always @(negedge clk) if (rst_n) begin
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) for (int l = 0; l < 2; l++) begin
      for (int k = 0; k < 4; k++) begin
        proc_in_valid[r][c][l][k] = 0;
        proc_out_ready[r][c][l][k] = ($urandom % 4) != 0;
      end
      if (q[r][c][l].size() > 0) begin
        token_t t; t = q[r][c][l][0][pos[r][c][l]];
        if (t.ctrl && r == 0 && c == 0 && l == 0 && q[r][c][l].size() == NPKT && wait_cnt[r][c][l] < HOLD)
          wait_cnt[r][c][l]++;        // channel held open before END
        else begin
          proc_in_valid[r][c][l][lnk[r][c][l]] = 1;
          proc_in_tok[r][c][l][lnk[r][c][l]]   = t;
        end
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) for (int l = 0; l < 2; l++) begin
      int k; k = lnk[r][c][l];
      if (proc_in_valid[r][c][l][k] && proc_in_ready[r][c][l][k]) begin
        pos[r][c][l]++;
        if (pos[r][c][l] == q[r][c][l][0].size()) begin
          void'(q[r][c][l].pop_front()); pos[r][c][l] = 0; lnk[r][c][l] = (k + 1) % 4;
        end
      end
      for (int j = 0; j < 4; j++) if (proc_out_valid[r][c][l][j] && proc_out_ready[r][c][l][j]) begin
        token_t t; t = proc_out_tok[r][c][l][j];
        rx[r][c][l][j].push_back(t);
        if (t.ctrl && t.data == CT_END) begin
          automatic pkt_t p = {}; int key; node_id_t me;
          p = rx[r][c][l][j]; rx[r][c][l][j].delete();
          me = node_of(r, c, l);
          checks++;
          if (p.size() < 7 || {p[0].data, p[1].data} != me) begin
            failures++; $display("FAIL: core (%0d,%0d,%0d) got a packet for %h", r, c, l, {p[0].data, p[1].data});
          end else begin
            key = {p[3].data, p[4].data, p[5].data};
            checks++;
            if (!sent.exists(key) || sent[key] != p) begin
              failures++; $display("FAIL: core (%0d,%0d,%0d) got unknown/corrupt packet key %h", r, c, l, key);
              foreach (p[i]) $write(" %h", p[i]); $display("");
              if (sent.exists(key)) begin foreach (sent[key][i]) $write(" %h", sent[key][i]); $display(" <- sent"); end
            end else sent.delete(key);
          end
          delivered++;
        end
      end
    end
  end
endmodule
