// tb_voq: random pushes and pops against a reference queue, at DEPTH 4 so
// the full case is reached: checks head, valid, full, the same-cycle
// push+pop on a full queue, the same-cycle bypass on an empty queue, and
// that a push into a full queue without a pop is dropped.
`timescale 1ns/1ps
module tb_voq;
  logic clk = 0, rst_n = 0;
  logic write_req_i = 0, read_req_i = 0, ptr_valid_o, full_o, drop_o;
  logic [7:0] ptr_i = 0, ptr_o;
  byte unsigned q[$];
  int checks = 0, failures = 0, n_full_rw = 0, n_bypass = 0, n_drop = 0;

  voq #(.DEPTH(4), .WIDTH(8)) dut (.*);
  always #1 clk = ~clk;

  function automatic void chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, m); end
  endfunction

  initial begin
    #5 rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      bit push_ok, pop_ok;
      @(negedge clk);
      write_req_i = ($urandom_range(2) != 0);
      read_req_i  = ($urandom_range(n % 400 < 200 ? 3 : 1) == 0);
      ptr_i = 8'($urandom);
      #0.1;
      chk(ptr_valid_o == (q.size() > 0 || write_req_i), "valid");
      chk(full_o == (q.size() == 4), "full");
      if (q.size() > 0) chk(ptr_o == q[0], "head");
      else if (write_req_i) chk(ptr_o == ptr_i, "bypass data");
      pop_ok  = read_req_i && ptr_valid_o;
      push_ok = write_req_i && (q.size() < 4 || pop_ok);
      chk(drop_o == (write_req_i && !push_ok), "drop flag");
      if (write_req_i && !push_ok) n_drop++;
      if (q.size() == 4 && write_req_i && pop_ok) n_full_rw++;
      if (q.size() == 0 && write_req_i && pop_ok) n_bypass++;
      if (push_ok) q.push_back(ptr_i);
      if (pop_ok) void'(q.pop_front());
    end
    chk(n_full_rw > 0, "full-queue push+pop never exercised");
    chk(n_bypass > 0, "empty-queue bypass never exercised");
    chk(n_drop > 0, "full-queue drop never exercised");
    $display("full r/w %0d, bypass %0d, drops %0d", n_full_rw, n_bypass, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100us; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
