// tb_mem_write_ctrl: feeds frames byte by byte (one byte every four cycles,
// the GMII rate) into the write controller, with a reference free list
// (random grant delays in the second half) and a memory port whose ready is
// random. Each written block is stored; on frame_done_o the testbench walks
// the linked list from start_addr_o through the footers (next index, eop,
// byte count) and compares the bytes with what it sent. Also checks that the
// controller never takes a block it already holds, that no byte has to wait
// while allocation and memory are fast, and the error flag pass-through.
`timescale 1ns/1ps
module tb_mem_write_ctrl;
  import switch_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [7:0] data_i = 0;
  logic data_valid_i = 0, data_begin_i = 0, data_end_i = 0, data_error_i = 0, data_ready_o;
  logic fl_alloc_req_o, fl_alloc_gnt_i = 0, mem_we_o, mem_ready_i = 0, frame_done_o, frame_error_o;
  blk_idx_t fl_alloc_block_idx_i = 0, mem_addr_o, start_addr_o;
  logic [WORD_W-1:0] mem_wdata_o;
  logic [WORD_W-1:0] mem [64];
  bit   in_use [64];
  int   free_q [$];
  int   checks = 0, failures = 0, waits = 0, frames_done = 0;
  bit   slow = 0;
  byte unsigned sent [$];
  bit   sent_err;

  mem_write_ctrl dut (.*);
  always #1 clk = ~clk;

  function automatic void chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, m); end
  endfunction

  // free list and memory port
  // requests change only after a rising edge, so answering at the falling
  // edge is the same as a combinational grant
  always @(negedge clk) begin
    fl_alloc_gnt_i       = fl_alloc_req_o && free_q.size() > 0 && (!slow || ($urandom_range(3) == 0));
    fl_alloc_block_idx_i = free_q.size() > 0 ? blk_idx_t'(free_q[0]) : '0;
    mem_ready_i          = !slow || ($urandom_range(2) == 0);
  end

  always @(posedge clk) if (rst_n) begin
    if (fl_alloc_gnt_i) begin
      chk(!in_use[free_q[0]], "block allocated twice");
      in_use[free_q[0]] = 1; void'(free_q.pop_front());
    end
    if (mem_we_o && mem_ready_i) mem[mem_addr_o] = mem_wdata_o;
    if (frame_done_o) begin
      int b, n; byte unsigned got [$]; footer_t ft;
      frames_done++;
      got.delete();
      b = start_addr_o; n = 0;
      forever begin
        ft = footer_t'(mem[b][7:0]);
        for (int i = 0; i < (ft.eop ? int'(ft.next_idx) : PAYLOAD_BYTES); i++)
          got.push_back(mem[b][WORD_W-1-8*i -: 8]);
        in_use[b] = 0; free_q.push_back(b);          // give the block back
        if (ft.eop || ++n > 64) break;
        b = ft.next_idx;
      end
      chk(frame_error_o == sent_err, "error flag");
      if (!sent_err) begin
        chk(got.size() == sent.size(), $sformatf("frame of %0d bytes read back as %0d", sent.size(), got.size()));
        foreach (sent[i]) if (i < got.size()) chk(got[i] == sent[i], $sformatf("byte %0d", i));
      end
    end
  end

  task automatic send(input int len, input bit err);
    sent.delete(); sent_err = err;
    for (int i = 0; i < len; i++) begin
      byte unsigned d;
      d = 8'($urandom);
      while (!data_ready_o) begin waits++; @(negedge clk); end
      data_i = d; data_valid_i = 1; data_begin_i = (i == 0); data_end_i = 0;
      sent.push_back(d);
      @(negedge clk); data_valid_i = 0; data_begin_i = 0;
      repeat (3) @(negedge clk);
    end
    data_end_i = 1; data_error_i = err;
    repeat (40) @(negedge clk);
  endtask

  initial begin
    foreach (in_use[i]) in_use[i] = 0;
    for (int i = 63; i >= 0; i--) free_q.push_back(i);
    #5 rst_n = 1;
    @(negedge clk);
    for (int k = 0; k < 30; k++) send(1 + $urandom_range(400), 0);
    send(63, 0); send(126, 0); send(64, 0); send(127, 1);
    chk(waits == 0, $sformatf("bytes waited %0d cycles with fast memory", waits));
    chk(frames_done == 34, $sformatf("%0d frames completed", frames_done));
    slow = 1;
    for (int k = 0; k < 20; k++) send(1 + $urandom_range(400), $urandom_range(3) == 0);
    chk(frames_done == 54, $sformatf("%0d frames completed", frames_done));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
