// tb_mem_read_ctrl: builds random linked lists of blocks in a memory model
// (footer = next index or, in the last block, eop and byte count), starts the
// read controller on the first block and checks that it presents every block
// of the list in order, ends on the eop block, frees each block exactly once
// with the frame's flood tag, and never frees a block before it has been read.
// The SRAM read grant, the free grant and the consumer (re_i) are random, and
// the read data returns one cycle after the grant as from the SRAM.
`timescale 1ns/1ps
module tb_mem_read_ctrl;
  import switch_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start_i = 0, flood_i = 0, re_i = 0, data_valid_o, data_end_o, busy_o;
  blk_idx_t start_addr_i = 0, mem_raddr_o, free_block_idx_o;
  logic [WORD_W-1:0] data_o, mem_rdata_i = 0;
  logic mem_re_o, mem_gnt_i = 0, mem_rvalid_i = 0, free_req_o, free_flood_o, free_gnt_i = 0;
  logic [WORD_W-1:0] mem [64];
  int list [$], got [$], freed [$];
  int checks = 0, failures = 0, cyc = 0;
  bit want_flood;

  mem_read_ctrl dut (.*);
  always #1 clk = ~clk;

  function automatic void chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, m); end
  endfunction

  // grants and the consumer answer at the falling edge; SRAM data one cycle
  // after the read grant
  always @(negedge clk) begin
    mem_gnt_i  = mem_re_o && ($urandom_range(2) != 0);
    free_gnt_i = free_req_o && ($urandom_range(2) != 0);
    re_i       = data_valid_o && ($urandom_range(3) != 0);
  end
  always @(posedge clk) begin
    mem_rvalid_i <= mem_re_o && mem_gnt_i;
    if (mem_re_o && mem_gnt_i) mem_rdata_i <= mem[mem_raddr_o];
    if (data_valid_o && re_i) begin
      got.push_back(int'(data_o[WORD_W-1 -: 8]));        // block tag in byte 0
      chk(data_end_o == (got.size() == list.size()), "eop flag");
    end
    if (free_req_o && free_gnt_i) begin
      freed.push_back(int'(free_block_idx_o));
      chk(free_flood_o == want_flood, "flood tag on free");
      chk(got.size() >= freed.size() - 1, "block freed before it was read");
    end
  end

  task automatic run_frame(input int nblk, input bit fl);
    int pool [$];
    for (int i = 0; i < 64; i++) pool.push_back(i);
    pool.shuffle();
    list.delete(); got.delete(); freed.delete();
    for (int i = 0; i < nblk; i++) list.push_back(pool[i]);
    foreach (list[i]) begin
      footer_t ft;
      ft.eop = (i == nblk - 1);
      ft.next_idx = ft.eop ? blk_idx_t'($urandom_range(63)) : blk_idx_t'(list[i+1]);
      ft.rsvd = 0;
      mem[list[i]] = {8'(list[i]), {(WORD_W-16){1'b0}}, ft};
    end
    want_flood = fl;
    @(negedge clk); start_i = 1; start_addr_i = blk_idx_t'(list[0]); flood_i = fl;
    @(negedge clk); start_i = 0;
    #0.1 chk(busy_o, "not busy after start");
    cyc = 0;
    while (busy_o && cyc < 5000) begin @(negedge clk); cyc++; end
    chk(!busy_o, "walk did not finish");
    chk(got == list, $sformatf("blocks read %p want %p", got, list));
    chk(freed == list, $sformatf("blocks freed %p want %p", freed, list));
  endtask

  initial begin
    foreach (mem[i]) mem[i] = '0;
    #5 rst_n = 1;
    for (int k = 0; k < 60; k++) run_frame(1 + $urandom_range(k < 30 ? 5 : 40), $urandom_range(1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
