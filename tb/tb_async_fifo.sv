// tb_async_fifo: random pushes on an 8 ns write clock and random pops on a
// 2 ns read clock (and then the reverse ratio), comparing the popped stream
// with a queue of the pushed bytes; also checks that the FIFO reports full
// after DEPTH pushes without pops and that a push while full is ignored.
`timescale 1ns/1ps
module tb_async_fifo;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  logic wen = 0, ren = 0, wfull, rempty;
  logic [7:0] wdata = 0, rdata;
  byte unsigned q[$];
  int checks = 0, failures = 0, pushed = 0, popped = 0;
  realtime wper = 4.0, rper = 1.0;
  bit rd_enable = 1;

  async_fifo #(.WIDTH(8), .DEPTH(16)) dut (.*);

  always #(wper) wclk = ~wclk;
  always #(rper) rclk = ~rclk;

  task automatic chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, m); end
  endtask

  // reader: pop when not empty with probability 1/2
  always @(posedge rclk) begin
    if (ren && !rempty) begin
      chk(q.size() > 0 && rdata == q[0], $sformatf("pop %0d: got %h", popped, rdata));
      if (q.size() > 0) void'(q.pop_front());
      popped++;
    end
    ren <= rd_enable && ($urandom_range(1) == 1);
  end

  always @(posedge wclk) begin
    if (wen && !wfull) begin q.push_back(wdata); pushed++; end
  end

  initial begin
    #20 wrst_n = 1; rrst_n = 1;
    repeat (500) begin
      @(posedge wclk);
      wen   <= ($urandom_range(3) != 0);
      wdata <= 8'($urandom);
    end
    @(posedge wclk) wen <= 0;
    #200;
    chk(q.size() == 0, "bytes left behind");
    // reverse clock ratio: fast writer, slow reader
    wper = 1.0; rper = 4.0;
    repeat (400) begin
      @(posedge wclk);
      wen   <= ($urandom_range(1) != 0);
      wdata <= 8'($urandom);
    end
    @(posedge wclk) wen <= 0;
    #400;
    chk(q.size() == 0, "bytes left behind (fast writer)");
    // fill without reading
    rd_enable = 0;
    #20;
    for (int i = 0; i < 20; i++) begin
      @(posedge wclk); wen <= 1; wdata <= 8'(i);
    end
    @(posedge wclk) wen <= 0;
    #20;
    chk(wfull == 1, "not full after 20 pushes");
    chk(q.size() == 16, $sformatf("accepted %0d entries, want 16", q.size()));
    rd_enable = 1;
    #400;
    chk(q.size() == 0 && rempty, "did not drain");
    chk(popped == pushed, "push/pop count mismatch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100us; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
