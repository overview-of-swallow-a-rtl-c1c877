// tb_swallow_top: end-to-end test of the interconnect on a 2 x 1 slice grid
// (4 x 4 packages, 32 cores) with the paper's link timing: on-die links
// ts=2, tt=1; package-to-package links ts=8, tt=8 (32 cycles per byte, a
// quarter of the on-die rate). Every core sends packets to random cores;
// swallow_traffic checks each delivery. The test also counts the cycles in
// which each network mechanism was seen (route to a processor, layer
// change across the on-die links, vertical and horizontal routes, route
// closed by END, credit stall, parallel on-die links in use) and fails if
// one never happened.
module tb_swallow_top;
  import swallow_pkg::*;
  localparam int SX = 2, SY = 1;
  localparam int R = 4 * SY, C = 2 * SX;
  logic clk = 0, rst_n = 1;
  initial #0.5 rst_n = 0;
  always #1 clk = ~clk;

  logic   proc_in_valid  [R][C][2][4];
  token_t proc_in_tok    [R][C][2][4];
  logic   proc_in_ready  [R][C][2][4];
  logic   proc_out_valid [R][C][2][4];
  token_t proc_out_tok   [R][C][2][4];
  logic   proc_out_ready [R][C][2][4];
  logic [LINK_WIRES-1:0] edge_n_tx [C], edge_n_rx [C], edge_s_tx [C], edge_s_rx [C];
  logic [LINK_WIRES-1:0] edge_w_tx [R], edge_w_rx [R], edge_e_tx [R], edge_e_rx [R];
  logic ev_route_local, ev_route_internal, ev_route_vertical, ev_route_horizontal;
  logic ev_route_close, ev_credit_stall, ev_parallel_links;
  int checks, failures, delivered, expected;

  swallow_top #(.SLICES_X(SX), .SLICES_Y(SY)) dut (
    .clk, .rst_n, .ts_int(8'd2), .tt_int(8'd1), .ts_ext(8'd8), .tt_ext(8'd8), .*);

  swallow_traffic #(.ROWS(R), .COLS(C), .NPKT(6), .HOLD(400)) u_traffic (.*);

  initial begin
    foreach (edge_n_rx[i]) begin edge_n_rx[i] = '0; edge_s_rx[i] = '0; end
    foreach (edge_w_rx[i]) begin edge_w_rx[i] = '0; edge_e_rx[i] = '0; end
  end

  int n_ev [7];
  string ev_name [7] = '{"route to processor", "layer change", "vertical route", "horizontal route",
                         "route closed", "credit stall", "parallel on-die links"};
  always @(posedge clk) if (rst_n) begin
    n_ev[0] += int'(ev_route_local);   n_ev[1] += int'(ev_route_internal);
    n_ev[2] += int'(ev_route_vertical); n_ev[3] += int'(ev_route_horizontal);
    n_ev[4] += int'(ev_route_close);   n_ev[5] += int'(ev_credit_stall);
    n_ev[6] += int'(ev_parallel_links);
  end

  task automatic finish_test(bit timeout);
    int ch, fl;
    ch = checks; fl = failures;
    if (timeout) begin fl++; $display("FAIL: watchdog, %0d of %0d packets delivered", delivered, expected); end
    foreach (n_ev[i]) begin
      ch++;
      $display("mechanism %-22s seen in %0d cycles", ev_name[i], n_ev[i]);
      if (n_ev[i] == 0) begin fl++; $display("FAIL: %s never happened", ev_name[i]); end
    end
    ch++;
    if (delivered != expected) begin fl++; $display("FAIL: delivered %0d of %0d", delivered, expected); end
    $display("TB_RESULT checks=%0d failures=%0d", ch, fl);
    $finish;
  endtask

  initial begin
    foreach (n_ev[i]) n_ev[i] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    wait (expected > 0 && delivered == expected);
    repeat (50) @(posedge clk);
    finish_test(0);
  end
  initial begin
    repeat (200000) @(posedge clk);
    finish_test(1);
  end
endmodule
