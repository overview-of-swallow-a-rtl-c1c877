// route_lookup: direction choice of a Swallow switch.
//
// The switch compares the destination node identifier with its own, bit by
// bit from the most significant end, and routes on the longest common
// prefix: the first bit k that differs selects the direction held in
// bit_dir[k]. A destination equal to the switch's own identifier selects
// DIR_LOCAL, the links to this switch's processor. Because the switch knows
// the value of its own bit k, one table entry per bit also tells "above"
// from "below" within a field, which is what lets dimension-ordered routing
// be written as such a table. Purely combinational.
module route_lookup
  import swallow_pkg::*;
(
  input  node_id_t dest,
  input  node_id_t own_id,
  input  dir_t     bit_dir [NODE_ID_W],
  output dir_t     dir,
  output logic     is_local
);

  node_id_t diff;
  assign diff = dest ^ own_id;

  always_comb begin
    dir      = DIR_LOCAL;
    is_local = 1'b1;
    for (int k = 0; k < NODE_ID_W; k++) begin
      if (diff[k]) begin        // last match wins: the highest differing bit
        dir      = bit_dir[k];
        is_local = 1'b0;
      end
    end
  end

endmodule
