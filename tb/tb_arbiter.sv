// tb_arbiter: random requests from the four ports on all five shared
// resources (SRAM write, block allocation, SRAM read, block free, frame
// events). A reference round-robin pointer per resource predicts every grant;
// the testbench also checks that the granted port's address/data reach the
// shared resource, that a read's rvalid goes back to the port granted one
// cycle earlier, that allocation grants depend on the free list, and that a
// port requesting without pause is served within four grants.
`timescale 1ns/1ps
module tb_arbiter;
  import switch_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [3:0] mem_we_i = 0, mem_ready_o, fl_alloc_req_i = 0, fl_alloc_gnt_o;
  blk_idx_t mem_waddr_i [4], mem_raddr_i [4], free_block_idx_i [4], evt_start_i [4];
  logic [WORD_W-1:0] mem_wdata_i [4], sram_wdata_o;
  logic sram_we_o, fl_alloc_req_o, fl_alloc_gnt_i = 0, sram_re_o, sram_rvalid_i = 0;
  blk_idx_t sram_waddr_o, fl_alloc_block_idx_o, fl_alloc_block_idx_i = 0, sram_raddr_o;
  blk_idx_t fl_free_block_idx_o, start_o;
  logic [3:0] mem_re_i = 0, mem_gnt_o, mem_rvalid_o, free_req_i = 0, free_flood_i = 0, free_gnt_o;
  logic fl_free_req_o, fl_free_flood_o, eof_o, error_o;
  logic [3:0] evt_valid_i = 0, evt_error_i = 0, evt_ready_o;
  mac_t evt_dst_i [4], evt_src_i [4], dst_o, src_o;
  port_t port_o;
  int checks = 0, failures = 0;
  int ptr [5];            // reference pointers: write, alloc, read, free, event
  int wait_cnt [5][4];
  int last_rd = -1;

  arbiter dut (.*);
  always #1 clk = ~clk;

  function automatic void chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, m); end
  endfunction

  function automatic int pick(input int r, input logic [3:0] req);
    for (int k = 0; k < 4; k++) if (req[(ptr[r] + k) % 4]) return (ptr[r] + k) % 4;
    return -1;
  endfunction

  function automatic logic [3:0] oh(input int w);
    return w < 0 ? 4'b0 : 4'(1 << w);
  endfunction

  initial begin
    foreach (ptr[i]) ptr[i] = 0;
    foreach (wait_cnt[i, j]) wait_cnt[i][j] = 0;
    #5 rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      int w [5]; logic [3:0] req [5]; bit adv [5];
      @(negedge clk);
      // hold some requests steady for the fairness check
      mem_we_i = 4'($urandom) | 4'b0001; fl_alloc_req_i = 4'($urandom); mem_re_i = 4'($urandom);
      free_req_i = 4'($urandom); free_flood_i = 4'($urandom); evt_valid_i = 4'($urandom);
      evt_error_i = 4'($urandom);
      fl_alloc_gnt_i = ($urandom_range(3) != 0); fl_alloc_block_idx_i = blk_idx_t'($urandom);
      sram_rvalid_i = (last_rd >= 0);
      for (int p = 0; p < 4; p++) begin
        mem_waddr_i[p] = blk_idx_t'($urandom); mem_raddr_i[p] = blk_idx_t'($urandom);
        mem_wdata_i[p] = {16{$urandom}}; free_block_idx_i[p] = blk_idx_t'($urandom);
        evt_start_i[p] = blk_idx_t'($urandom); evt_dst_i[p] = {$urandom, $urandom}; evt_src_i[p] = {$urandom, $urandom};
      end
      #0.1;
      req[0] = mem_we_i; req[1] = fl_alloc_req_i; req[2] = mem_re_i; req[3] = free_req_i; req[4] = evt_valid_i;
      for (int r = 0; r < 5; r++) w[r] = pick(r, req[r]);
      chk(mem_ready_o == oh(w[0]) && sram_we_o == (w[0] >= 0), "write grant");
      if (w[0] >= 0) chk(sram_waddr_o == mem_waddr_i[w[0]] && sram_wdata_o == mem_wdata_i[w[0]], "write routing");
      chk(fl_alloc_req_o == (w[1] >= 0), "alloc request");
      chk(fl_alloc_gnt_o == (fl_alloc_gnt_i ? oh(w[1]) : 4'b0), "alloc grant");
      chk(fl_alloc_block_idx_o == fl_alloc_block_idx_i, "alloc index");
      chk(mem_gnt_o == oh(w[2]) && sram_re_o == (w[2] >= 0), "read grant");
      if (w[2] >= 0) chk(sram_raddr_o == mem_raddr_i[w[2]], "read routing");
      chk(mem_rvalid_o == (sram_rvalid_i ? oh(last_rd) : 4'b0), "rvalid routing");
      chk(free_gnt_o == oh(w[3]) && fl_free_req_o == (w[3] >= 0), "free grant");
      if (w[3] >= 0) chk(fl_free_block_idx_o == free_block_idx_i[w[3]] && fl_free_flood_o == free_flood_i[w[3]], "free routing");
      chk(evt_ready_o == oh(w[4]) && eof_o == (w[4] >= 0), "event grant");
      if (w[4] >= 0) chk(port_o == port_t'(w[4]) && dst_o == evt_dst_i[w[4]] && src_o == evt_src_i[w[4]] &&
                         start_o == evt_start_i[w[4]] && error_o == evt_error_i[w[4]], "event routing");
      adv[0] = 1; adv[1] = fl_alloc_gnt_i; adv[2] = 1; adv[3] = 1; adv[4] = 1;
      for (int r = 0; r < 5; r++) begin
        if (w[r] >= 0 && adv[r]) ptr[r] = (w[r] + 1) % 4;
        for (int p = 0; p < 4; p++) begin
          if (req[r][p] && !(w[r] == p && adv[r])) wait_cnt[r][p]++; else wait_cnt[r][p] = 0;
        end
      end
      // port 0 requests the write port every cycle: it must win within 4 cycles
      chk(wait_cnt[0][0] < 4, "port 0 starved on the write port");
      last_rd = w[2];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100us; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
