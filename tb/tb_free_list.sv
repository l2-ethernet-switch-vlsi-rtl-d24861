// tb_free_list: checks the reset order of allocations (63, 62, 61, ...),
// random allocate/free traffic against a reference multiset of free blocks
// (no block handed out twice, none lost), simultaneous allocate and free,
// the empty case with a free handed straight to an allocation, and that a
// flood-tagged block returns only after its fourth free.
`timescale 1ns/1ps
module tb_free_list;
  logic clk = 0, rst_n = 0;
  logic alloc_req_i = 0, alloc_gnt_o, free_req_i = 0, free_flood_i = 0, empty_o;
  logic [5:0] alloc_block_idx_o, free_block_idx_i = 0;
  logic [6:0] free_count_o;
  bit   is_free [64];
  int   held [$];
  int   checks = 0, failures = 0;

  free_list #(.NUM_BLOCKS(64), .FLOOD_REFS(4)) dut (.*);
  always #1 clk = ~clk;

  function automatic void chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, m); end
  endfunction

  function automatic int nfree();
    int n = 0;
    foreach (is_free[i]) n += is_free[i];
    return n;
  endfunction

  initial begin
    foreach (is_free[i]) is_free[i] = 1;
    #5 rst_n = 1;
    // first eight allocations in a row: 3F down to 38
    for (int i = 0; i < 8; i++) begin
      @(negedge clk); alloc_req_i = 1;
      #0.1 chk(alloc_gnt_o && alloc_block_idx_o == 6'(63 - i),
               $sformatf("allocation %0d returned %h", i, alloc_block_idx_o));
      is_free[alloc_block_idx_o] = 0; held.push_back(alloc_block_idx_o);
    end
    @(negedge clk); alloc_req_i = 0;
    // random traffic, plain frees
    for (int n = 0; n < 3000; n++) begin
      int k;
      @(negedge clk);
      alloc_req_i  = ($urandom_range(2) != 0);
      free_req_i   = (held.size() > 0) && ($urandom_range(2) != 0);
      free_flood_i = 0;
      k = held.size() > 0 ? $urandom_range(held.size() - 1) : 0;
      if (free_req_i) free_block_idx_i = 6'(held[k]);
      #0.1;
      chk(alloc_gnt_o == (alloc_req_i && (nfree() > 0 || free_req_i)), "grant rule");
      chk(empty_o == (nfree() == 0), "empty flag");
      chk(int'(free_count_o) == nfree(), "free count");
      if (alloc_gnt_o && alloc_block_idx_o != free_block_idx_i)
        chk(is_free[alloc_block_idx_o], $sformatf("block %0d allocated twice", alloc_block_idx_o));
      if (free_req_i) begin is_free[held[k]] = 1; held.delete(k); end
      if (alloc_gnt_o) begin is_free[alloc_block_idx_o] = 0; held.push_back(alloc_block_idx_o); end
      if (alloc_gnt_o && free_req_i) checks++;
    end
    @(negedge clk); alloc_req_i = 0; free_req_i = 0;
    // drain everything, then flood frees of one block
    while (nfree() > 0) begin
      @(negedge clk); alloc_req_i = 1; #0.1;
      is_free[alloc_block_idx_o] = 0; held.push_back(alloc_block_idx_o);
    end
    @(negedge clk); alloc_req_i = 0; #0.1;
    chk(empty_o, "not empty after allocating all");
    for (int r = 0; r < 4; r++) begin
      @(negedge clk); free_req_i = 1; free_flood_i = 1; free_block_idx_i = 6'(held[0]);
      @(negedge clk); free_req_i = 0; #0.1;
      chk(empty_o == (r < 3), $sformatf("flood free %0d: empty=%0d", r, empty_o));
    end
    // empty list: free and allocate in the same cycle pass the block through
    @(negedge clk); alloc_req_i = 1; #0.1;  // takes the one block back
    @(negedge clk); alloc_req_i = 1; free_req_i = 1; free_flood_i = 0; free_block_idx_i = 6'(held[1]);
    #0.1 chk(alloc_gnt_o && alloc_block_idx_o == 6'(held[1]), "free not bypassed to allocation on empty list");
    @(negedge clk); alloc_req_i = 0; free_req_i = 0; #0.1;
    chk(empty_o, "bypassed block also stored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100us; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
