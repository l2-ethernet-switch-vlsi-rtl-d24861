// tb_reset_sync: checks asynchronous assertion (output low immediately,
// without a clock edge) and release exactly on the second clock edge after
// the input reset is removed.
`timescale 1ns/1ps
module tb_reset_sync;
  logic clk = 0, rst_n_i = 0, rst_n_o;
  int checks = 0, failures = 0;

  reset_sync dut (.clk, .rst_n_i, .rst_n_o);
  always #1 clk = ~clk;

  task automatic chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, m); end
  endtask

  initial begin
    for (int r = 0; r < 5; r++) begin
      rst_n_i = 0;
      repeat (3) @(posedge clk);
      #0.3 rst_n_i = 1;
      @(posedge clk); #0.1 chk(rst_n_o == 0, "released after one edge");
      @(posedge clk); #0.1 chk(rst_n_o == 1, "not released after two edges");
      repeat (2 + r) @(posedge clk);
      #0.4 rst_n_i = 0;
      #0.1 chk(rst_n_o == 0, "assertion not asynchronous");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10us; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
