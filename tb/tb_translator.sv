// tb_translator: drives frame events every cycle (random gaps) together with
// a stand-in address table that answers one cycle after each lookup. Checks
// that each event is turned, one cycle later, into the right VOQ pushes:
// own port with drop tag for errored frames, the looked-up port for known
// destinations, all four ports with the flood tag for unknown ones.
`timescale 1ns/1ps
module tb_translator;
  import switch_pkg::*;
  logic clk = 0, rst_n = 0;
  logic input_valid_i = 0, error_i = 0, read_enable_o, port_valid_i = 0, flood_o;
  mac_t mac_dst_addr_i = 0, read_address_o;
  blk_idx_t start_ptr_i = 0;
  port_t ingress_port_i = 0, address_port_i = 0;
  logic [NUM_PORTS-1:0] write_reqs_o;
  voq_entry_t start_ptrs_o [NUM_PORTS];
  int checks = 0, failures = 0, n_err = 0, n_hit = 0, n_flood = 0;
  // previous-cycle event
  bit pv = 0, perr; int pptr, pport; bit phit; int hport;

  translator dut (.*);
  always #1 clk = ~clk;

  function automatic void chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, m); end
  endfunction

  initial begin
    #5 rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      // table answer for the lookup made in the previous cycle
      phit = ($urandom_range(1) == 1); hport = $urandom_range(3);
      port_valid_i = pv && phit; address_port_i = port_t'(hport);
      input_valid_i  = ($urandom_range(3) != 0);
      error_i        = ($urandom_range(4) == 0);
      mac_dst_addr_i = {$urandom, $urandom};
      start_ptr_i    = blk_idx_t'($urandom);
      ingress_port_i = port_t'($urandom);
      #0.1;
      chk(read_enable_o == input_valid_i, "lookup enable");
      if (input_valid_i) chk(read_address_o == mac_dst_addr_i, "lookup address");
      if (!pv) chk(write_reqs_o == 0, "push without event");
      else if (perr) begin
        n_err++;
        chk(write_reqs_o == 4'(1 << pport) && start_ptrs_o[pport].drop && !start_ptrs_o[pport].flood,
            "errored frame not sent to own port with drop tag");
        chk(!flood_o, "flood on error");
      end else if (phit) begin
        n_hit++;
        chk(write_reqs_o == 4'(1 << hport) && !start_ptrs_o[hport].drop && !start_ptrs_o[hport].flood,
            $sformatf("known destination: reqs %b want port %0d", write_reqs_o, hport));
      end else begin
        n_flood++;
        chk(write_reqs_o == 4'hF && flood_o, "unknown destination not flooded");
        for (int p = 0; p < 4; p++) chk(start_ptrs_o[p].flood && !start_ptrs_o[p].drop, "flood tag");
      end
      if (pv) for (int p = 0; p < 4; p++) if (write_reqs_o[p]) chk(int'(start_ptrs_o[p].ptr) == pptr, "start block");
      pv = input_valid_i; perr = error_i; pptr = start_ptr_i; pport = ingress_port_i;
    end
    chk(n_err > 0 && n_hit > 0 && n_flood > 0, "not every route exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100us; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
