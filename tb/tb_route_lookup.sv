// tb_route_lookup: random destination/own identifiers and random per-bit
// direction tables. The expected direction is found by scanning from the
// most significant bit down and stopping at the first difference.
module tb_route_lookup;
  import swallow_pkg::*;
  node_id_t dest, own_id; dir_t bit_dir [NODE_ID_W]; dir_t dir; logic is_local;
  int checks = 0, failures = 0;
  route_lookup dut (.*);
  initial begin
    for (int n = 0; n < 2000; n++) begin
      dir_t exp; logic exp_local;
      own_id = node_id_t'($urandom);
      dest   = own_id ^ (node_id_t'($urandom) >> ($urandom % 17));
      foreach (bit_dir[k]) bit_dir[k] = dir_t'($urandom);
      #1;
      exp = DIR_LOCAL; exp_local = 1;
      for (int k = NODE_ID_W - 1; k >= 0; k--)
        if (dest[k] != own_id[k]) begin exp = bit_dir[k]; exp_local = 0; break; end
      checks++;
      if (dir != exp || is_local != exp_local) begin
        failures++; $display("FAIL dest %h own %h got %0d want %0d", dest, own_id, dir, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
