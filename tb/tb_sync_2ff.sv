// tb_sync_2ff: checks that each bit of the synchronizer output follows its
// input exactly two clock edges later and that reset clears both stages.
`timescale 1ns/1ps
module tb_sync_2ff;
  logic clk = 0, rst_n = 0;
  logic [2:0] d = '0, q;
  logic [2:0] h1 = '0, h2 = '0;   // reference two-stage delay line
  int checks = 0, failures = 0;

  sync_2ff #(.WIDTH(3)) dut (.clk, .rst_n, .d, .q);
  always #1 clk = ~clk;

  initial begin
    repeat (3) @(posedge clk);
    #0.2 rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      @(posedge clk);
      h2 <= h1; h1 <= d;
      #0.2;
      checks++;
      if (q !== h2) begin failures++; $display("FAIL cycle %0d: q=%b want %b", i, q, h2); end
      d = 3'($urandom);
    end
    rst_n = 0; #0.1;
    checks++;
    if (q !== '0) begin failures++; $display("FAIL: reset does not clear q"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10us; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
