// swallow_top: the Swallow interconnect, a grid of dual-core packages
// wired as a two-layer lattice.
//
// The system is built from slices of 2 x 4 packages (16 cores); the default
// grid is 6 x 5 slices, 240 packages, 480 cores. In every package, core 0
// belongs to the vertical layer: its XLinks 0 and 1 go north and south to
// core 0 of the packages above and below. Core 1 belongs to the horizontal
// layer: its XLinks 0 and 1 go west and east to core 1 of the neighbouring
// packages. The two cores of a package are joined by the four on-die links,
// so a route changes layer only inside a package. XLinks 2 and 3 of each
// core are left unused. Links that would leave the grid are brought out as
// ports (edge_*), where off-grid equipment such as Ethernet bridges (on
// south links) can attach.
//
// Node identifiers pack {row, column, layer} into the low bits of the
// 16-bit identifier, row most significant. Each switch's routing table is
// computed here from its position: row bits route north/south in the
// vertical layer and cross to the other core from the horizontal layer;
// column bits do the opposite; the layer bit crosses. Since row bits come
// first, routes are dimension-ordered, vertical first, as the paper's
// routing scheme prescribes; the identifier layout is this design's way of
// expressing that scheme as longest-prefix tables.
//
// The cores are outside this design: each core's four processor links are
// top-level token streams (proc_*), indexed [row][col][core][link].
module swallow_top
  import swallow_pkg::*;
#(
  parameter int unsigned SLICES_X = 6,
  parameter int unsigned SLICES_Y = 5,
  parameter int unsigned PKG_COLS = 2 * SLICES_X,
  parameter int unsigned PKG_ROWS = 4 * SLICES_Y
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] ts_int, tt_int,   // on-die link timing
  input  logic [7:0] ts_ext, tt_ext,   // package-to-package link timing
  // processor links of every core
  input  logic   proc_in_valid  [PKG_ROWS][PKG_COLS][2][4],
  input  token_t proc_in_tok    [PKG_ROWS][PKG_COLS][2][4],
  output logic   proc_in_ready  [PKG_ROWS][PKG_COLS][2][4],
  output logic   proc_out_valid [PKG_ROWS][PKG_COLS][2][4],
  output token_t proc_out_tok   [PKG_ROWS][PKG_COLS][2][4],
  input  logic   proc_out_ready [PKG_ROWS][PKG_COLS][2][4],
  // links leaving the grid
  output logic [LINK_WIRES-1:0] edge_n_tx [PKG_COLS],
  input  logic [LINK_WIRES-1:0] edge_n_rx [PKG_COLS],
  output logic [LINK_WIRES-1:0] edge_s_tx [PKG_COLS],
  input  logic [LINK_WIRES-1:0] edge_s_rx [PKG_COLS],
  output logic [LINK_WIRES-1:0] edge_w_tx [PKG_ROWS],
  input  logic [LINK_WIRES-1:0] edge_w_rx [PKG_ROWS],
  output logic [LINK_WIRES-1:0] edge_e_tx [PKG_ROWS],
  input  logic [LINK_WIRES-1:0] edge_e_rx [PKG_ROWS],
  // events, each high in a cycle in which it happened somewhere in the grid
  output logic ev_route_local,     // a route opened onto a processor link
  output logic ev_route_internal,  // a route opened across the on-die links (layer change)
  output logic ev_route_vertical,  // a route opened north or south
  output logic ev_route_horizontal,// a route opened west or east
  output logic ev_route_close,     // an END token closed a route
  output logic ev_credit_stall,    // a link held a token back for lack of credit
  output logic ev_parallel_links   // two or more on-die links of one switch carried routes at once
);

  localparam int unsigned RB = (PKG_ROWS > 1) ? $clog2(PKG_ROWS) : 1;
  localparam int unsigned CB = (PKG_COLS > 1) ? $clog2(PKG_COLS) : 1;

  initial assert (RB + CB + 1 <= NODE_ID_W) else $error("grid too large for 16-bit node identifiers");

  function automatic node_id_t node_of(int unsigned r, int unsigned c, int unsigned layer);
    return node_id_t'((r << (CB + 1)) | (c << 1) | layer);
  endfunction

  // routing-table entry for bit k of the switch of core `layer` at (r, c)
  function automatic dir_t table_dir(int unsigned r, int unsigned c, int unsigned layer, int unsigned k);
    node_id_t me;
    me = node_of(r, c, layer);
    if (k == 0) return DIR_INTERNAL;                         // other core, same package
    if (k <= CB) begin                                       // column bits
      if (layer == 0) return DIR_INTERNAL;
      return me[k] ? DIR_WEST : DIR_EAST;
    end
    if (k <= CB + RB) begin                                  // row bits
      if (layer == 1) return DIR_INTERNAL;
      return me[k] ? DIR_NORTH : DIR_SOUTH;
    end
    return DIR_NONE;                                         // outside the grid
  endfunction

  // XLink wires of every package: [row][col][core][xlink]
  logic [LINK_WIRES-1:0] xl_tx [PKG_ROWS][PKG_COLS][2][4];
  logic [LINK_WIRES-1:0] xl_rx [PKG_ROWS][PKG_COLS][2][4];

  logic ev_local_v [PKG_ROWS][PKG_COLS], ev_int_v [PKG_ROWS][PKG_COLS], ev_vert_v [PKG_ROWS][PKG_COLS];
  logic ev_hor_v [PKG_ROWS][PKG_COLS], ev_close_v [PKG_ROWS][PKG_COLS], ev_stall_v [PKG_ROWS][PKG_COLS];
  logic ev_par_v [PKG_ROWS][PKG_COLS];

  for (genvar r = 0; r < PKG_ROWS; r++) begin : g_row
    for (genvar c = 0; c < PKG_COLS; c++) begin : g_col
      node_id_t ids [2];
      dir_t     bd  [2][NODE_ID_W];
      dir_t     xd  [2][4];
      logic [SW_PORTS-1:0] route_opened [2], route_closed [2], out_busy [2];
      logic [7:0]          link_stall [2];

      for (genvar l = 0; l < 2; l++) begin : g_layer
        assign ids[l] = node_of(r, c, l);
        for (genvar k = 0; k < NODE_ID_W; k++) begin : g_bit
          assign bd[l][k] = table_dir(r, c, l, k);
        end
      end
      assign xd[0] = '{DIR_NORTH, DIR_SOUTH, DIR_NONE, DIR_NONE};
      assign xd[1] = '{DIR_WEST,  DIR_EAST,  DIR_NONE, DIR_NONE};

      // vertical layer: core 0, XLink 0 north, XLink 1 south
      if (r == 0) begin : g_n_edge
        assign edge_n_tx[c]    = xl_tx[r][c][0][0];
        assign xl_rx[r][c][0][0] = edge_n_rx[c];
      end else begin : g_n
        assign xl_rx[r][c][0][0] = xl_tx[r-1][c][0][1];
      end
      if (r == PKG_ROWS - 1) begin : g_s_edge
        assign edge_s_tx[c]    = xl_tx[r][c][0][1];
        assign xl_rx[r][c][0][1] = edge_s_rx[c];
      end else begin : g_s
        assign xl_rx[r][c][0][1] = xl_tx[r+1][c][0][0];
      end
      // horizontal layer: core 1, XLink 0 west, XLink 1 east
      if (c == 0) begin : g_w_edge
        assign edge_w_tx[r]    = xl_tx[r][c][1][0];
        assign xl_rx[r][c][1][0] = edge_w_rx[r];
      end else begin : g_w
        assign xl_rx[r][c][1][0] = xl_tx[r][c-1][1][1];
      end
      if (c == PKG_COLS - 1) begin : g_e_edge
        assign edge_e_tx[r]    = xl_tx[r][c][1][1];
        assign xl_rx[r][c][1][1] = edge_e_rx[r];
      end else begin : g_e
        assign xl_rx[r][c][1][1] = xl_tx[r][c+1][1][0];
      end
      // unused XLinks 2 and 3: idle wires
      for (genvar l = 0; l < 2; l++) begin : g_unused
        assign xl_rx[r][c][l][2] = '0;
        assign xl_rx[r][c][l][3] = '0;
      end

      l2_package u_pkg (
        .clk, .rst_n, .ts_int, .tt_int, .ts_ext, .tt_ext,
        .node_id(ids), .bit_dir(bd), .xl_dir(xd),
        .proc_in_valid(proc_in_valid[r][c]), .proc_in_tok(proc_in_tok[r][c]), .proc_in_ready(proc_in_ready[r][c]),
        .proc_out_valid(proc_out_valid[r][c]), .proc_out_tok(proc_out_tok[r][c]), .proc_out_ready(proc_out_ready[r][c]),
        .xl_tx(xl_tx[r][c]), .xl_rx(xl_rx[r][c]),
        .route_opened, .route_closed, .out_busy, .link_stall);

      assign ev_local_v[r][c] = |{route_opened[0][3:0], route_opened[1][3:0]};
      assign ev_int_v[r][c]   = |{route_opened[0][7:4], route_opened[1][7:4]};
      assign ev_vert_v[r][c]  = |route_opened[0][9:8];
      assign ev_hor_v[r][c]   = |route_opened[1][9:8];
      assign ev_close_v[r][c] = |{route_closed[0], route_closed[1]};
      assign ev_stall_v[r][c] = |{link_stall[0], link_stall[1]};
      assign ev_par_v[r][c]   = ($countones(out_busy[0][7:4]) > 1) || ($countones(out_busy[1][7:4]) > 1);
    end
  end

  always_comb begin
    ev_route_local = 1'b0; ev_route_internal = 1'b0; ev_route_vertical = 1'b0;
    ev_route_horizontal = 1'b0; ev_route_close = 1'b0; ev_credit_stall = 1'b0; ev_parallel_links = 1'b0;
    for (int r = 0; r < PKG_ROWS; r++)
      for (int c = 0; c < PKG_COLS; c++) begin
        ev_route_local      |= ev_local_v[r][c];
        ev_route_internal   |= ev_int_v[r][c];
        ev_route_vertical   |= ev_vert_v[r][c];
        ev_route_horizontal |= ev_hor_v[r][c];
        ev_route_close      |= ev_close_v[r][c];
        ev_credit_stall     |= ev_stall_v[r][c];
        ev_parallel_links   |= ev_par_v[r][c];
      end
  end

endmodule
