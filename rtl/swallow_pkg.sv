// swallow_pkg: types and constants shared by the Swallow interconnect.
//
// A token is the unit the network moves: eight bits plus a flag that marks
// a control token. A route is opened by a three-byte header (16-bit node
// identifier, then a channel-end byte) and closed by the END control token.
// Switches pick a direction from the first bit, counted from the most
// significant end, in which the destination identifier differs from their
// own; the direction numbers, control-token codes and the node-identifier
// layout used by the lattice are this design's choices.
package swallow_pkg;

  localparam int unsigned NODE_ID_W  = 16;  // up to 2^16 nodes
  localparam int unsigned HDR_BYTES  = 3;   // three-byte route header
  localparam int unsigned DIR_W      = 4;   // 16 routing directions
  localparam int unsigned SW_PORTS   = 12;  // 12-ported switch, one per core
  localparam int unsigned LINK_WIRES = 5;   // wires per link direction

  typedef logic [NODE_ID_W-1:0] node_id_t;
  typedef logic [DIR_W-1:0]     dir_t;

  typedef struct packed {
    logic       ctrl;  // 1: control token
    logic [7:0] data;
  } token_t;

  // Control-token codes.
  localparam logic [7:0] CT_END    = 8'h01;  // closes a route
  localparam logic [3:0] CT_CREDIT = 4'hC;   // upper nibble of a credit token;
                                             // lower nibble = credits granted

  // Direction numbers used by the lattice routing tables.
  localparam dir_t DIR_LOCAL    = 4'd0;  // processor links of this core
  localparam dir_t DIR_INTERNAL = 4'd1;  // on-die links to the other core
  localparam dir_t DIR_NORTH    = 4'd2;
  localparam dir_t DIR_SOUTH    = 4'd3;
  localparam dir_t DIR_EAST     = 4'd4;
  localparam dir_t DIR_WEST     = 4'd5;
  localparam dir_t DIR_NONE     = 4'd15; // a port in no direction

  function automatic logic is_credit(token_t t);
    return t.ctrl && (t.data[7:4] == CT_CREDIT);
  endfunction

  function automatic logic is_end(token_t t);
    return t.ctrl && (t.data == CT_END);
  endfunction

endpackage
