// l2_package: the network side of one dual-core package (two cores, one
// switch per core).
//
// Each core's switch has twelve ports: 0-3 are the four links to its core
// (token-level streams here, the core itself is outside this design), 4-7
// the four on-die links to the other core's switch, and 8-11 its four
// external links (XLinks). The on-die links are real links (link_port at
// each end, five wires each way) run with the fast timing ts_int/tt_int;
// the XLinks leave the package as five-wire pairs and run with
// ts_ext/tt_ext. The on-die links all belong to direction DIR_INTERNAL, so
// up to four routes can cross between the cores at once. The direction of
// each XLink and the per-bit routing table of each switch are inputs,
// since the system sets them in software.
//
// Timing: a token crossing between the cores spends about 3*ts_int+tt_int
// cycles on the on-die link; on an XLink, 3*ts_ext+tt_ext per token.
module l2_package
  import swallow_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic [7:0] ts_int, tt_int,   // on-die link timing
  input  logic [7:0] ts_ext, tt_ext,   // XLink timing
  input  node_id_t node_id  [2],
  input  dir_t     bit_dir  [2][NODE_ID_W],
  input  dir_t     xl_dir   [2][4],    // direction of each XLink
  // processor links, core -> switch
  input  logic     proc_in_valid  [2][4],
  input  token_t   proc_in_tok    [2][4],
  output logic     proc_in_ready  [2][4],
  // processor links, switch -> core
  output logic     proc_out_valid [2][4],
  output token_t   proc_out_tok   [2][4],
  input  logic     proc_out_ready [2][4],
  // XLinks
  output logic [LINK_WIRES-1:0] xl_tx [2][4],
  input  logic [LINK_WIRES-1:0] xl_rx [2][4],
  // status
  output logic [SW_PORTS-1:0] route_opened [2],
  output logic [SW_PORTS-1:0] route_closed [2],
  output logic [SW_PORTS-1:0] out_busy     [2],
  output logic [7:0]          link_stall   [2]   // [3:0] on-die, [7:4] XLinks
);

  // switch-side streams of every port
  logic   sw_in_valid  [2][SW_PORTS];
  token_t sw_in_tok    [2][SW_PORTS];
  logic   sw_in_ready  [2][SW_PORTS];
  logic   sw_out_valid [2][SW_PORTS];
  token_t sw_out_tok   [2][SW_PORTS];
  logic   sw_out_ready [2][SW_PORTS];
  dir_t   port_dir     [2][SW_PORTS];

  // on-die link wires: int_w[c][l] is driven by core c's end of link l
  logic [LINK_WIRES-1:0] int_w [2][4];

  for (genvar c = 0; c < 2; c++) begin : g_core
    for (genvar p = 0; p < 4; p++) begin : g_port
      // processor links
      assign sw_in_valid[c][p]     = proc_in_valid[c][p];
      assign sw_in_tok[c][p]       = proc_in_tok[c][p];
      assign proc_in_ready[c][p]   = sw_in_ready[c][p];
      assign proc_out_valid[c][p]  = sw_out_valid[c][p];
      assign proc_out_tok[c][p]    = sw_out_tok[c][p];
      assign sw_out_ready[c][p]    = proc_out_ready[c][p];
      assign port_dir[c][p]        = DIR_LOCAL;
      assign port_dir[c][4+p]      = DIR_INTERNAL;
      assign port_dir[c][8+p]      = xl_dir[c][p];

      // on-die link end
      link_port u_int (
        .clk, .rst_n, .ts(ts_int), .tt(tt_int),
        .in_valid(sw_out_valid[c][4+p]), .in_tok(sw_out_tok[c][4+p]), .in_ready(sw_out_ready[c][4+p]),
        .out_valid(sw_in_valid[c][4+p]), .out_tok(sw_in_tok[c][4+p]), .out_ready(sw_in_ready[c][4+p]),
        .tx_wires(int_w[c][p]), .rx_wires(int_w[1-c][p]), .credit_stall(link_stall[c][p]));

      // XLink end
      link_port u_xl (
        .clk, .rst_n, .ts(ts_ext), .tt(tt_ext),
        .in_valid(sw_out_valid[c][8+p]), .in_tok(sw_out_tok[c][8+p]), .in_ready(sw_out_ready[c][8+p]),
        .out_valid(sw_in_valid[c][8+p]), .out_tok(sw_in_tok[c][8+p]), .out_ready(sw_in_ready[c][8+p]),
        .tx_wires(xl_tx[c][p]), .rx_wires(xl_rx[c][p]), .credit_stall(link_stall[c][4+p]));
    end

    xs1_switch u_sw (
      .clk, .rst_n, .own_id(node_id[c]), .bit_dir(bit_dir[c]), .port_dir(port_dir[c]),
      .in_valid(sw_in_valid[c]), .in_tok(sw_in_tok[c]), .in_ready(sw_in_ready[c]),
      .out_valid(sw_out_valid[c]), .out_tok(sw_out_tok[c]), .out_ready(sw_out_ready[c]),
      .out_busy(out_busy[c]), .route_opened(route_opened[c]), .route_closed(route_closed[c]));
  end

endmodule
