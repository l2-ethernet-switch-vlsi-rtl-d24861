// tb_sram: writes random 512-bit words to random blocks, reads them back
// through the 1-cycle read port while other writes go on, and checks data,
// the one-cycle rvalid, and that a same-cycle read of a block being written
// returns the previous contents.
`timescale 1ns/1ps
module tb_sram;
  logic clk = 0, rst_n = 0, we = 0, re = 0, rvalid;
  logic [5:0] w_addr = 0, r_addr = 0;
  logic [511:0] wdata = 0, rdata;
  logic [511:0] model [64];
  int checks = 0, failures = 0;

  sram #(.NUM_BLOCKS(64), .WORD_W(512)) dut (.*);
  always #1 clk = ~clk;

  function automatic logic [511:0] rnd512();
    logic [511:0] v;
    for (int i = 0; i < 16; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    logic [511:0] expect_q;
    bit pend;
    #5 rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      @(posedge clk) #0.1; we = 1; w_addr = 6'(i); wdata = rnd512(); model[i] = wdata;
    end
    @(posedge clk) #0.1; we = 0;
    pend = 0;
    for (int n = 0; n < 600; n++) begin
      @(posedge clk) #0.1;
      if (pend) begin
        checks++;
        if (!rvalid || rdata !== expect_q) begin failures++; $display("FAIL read %0d", n); end
      end else begin
        checks++;
        if (rvalid) begin failures++; $display("FAIL rvalid without read"); end
      end
      re = ($urandom_range(2) != 0); r_addr = 6'($urandom);
      we = ($urandom_range(1) != 0); w_addr = ($urandom_range(4) == 0) ? r_addr : 6'($urandom);
      wdata = rnd512();
      pend = re;
      expect_q = model[r_addr];              // old contents even if written now
      #0.1;
      @(negedge clk);
      if (we) model[w_addr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100us; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
