// tb_crossbar: address table and translator together. Each frame event
// carries a source and a destination address from a small pool; a reference
// learning table (same replacement rule) predicts whether the destination
// is known and on which port. Checks that each event produces, one cycle
// later, a single push to the learned port, a flood to all four ports, or a
// drop-tagged push to the ingress port for errored frames.
`timescale 1ns/1ps
module tb_crossbar;
  import switch_pkg::*;
  logic clk = 0, rst_n = 0;
  mac_t rx_mac_dst_addr_i = 0, rx_mac_src_addr_i = 0;
  blk_idx_t data_start_ptr_i = 0;
  logic eof_i = 0, error_i = 0, flood_o;
  port_t ingress_port_i = 0;
  logic [NUM_PORTS-1:0] voq_write_reqs_o;
  voq_entry_t voq_start_ptrs_o [NUM_PORTS];
  int checks = 0, failures = 0, n_hit = 0, n_flood = 0, n_err = 0;

  bit   m_v [16]; mac_t m_a [16]; int m_p [16], m_h [16];

  crossbar dut (.*);
  always #1 clk = ~clk;

  function automatic void chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, m); end
  endfunction

  function automatic int m_lookup(input mac_t a);
    int h = -1;
    for (int i = 0; i < 16; i++) if (m_v[i] && m_a[i] == a && h < 0) h = i;
    if (h >= 0) for (int i = 0; i < 16; i++)
      m_h[i] = (i == h) ? ((m_h[i] < 3) ? m_h[i] + 1 : 3) : ((m_h[i] > 0) ? m_h[i] - 1 : 0);
    return h < 0 ? -1 : m_p[h];
  endfunction

  // row a learned address goes to, chosen from the counters as they were
  // before this cycle's lookup
  function automatic int m_pick(input mac_t a);
    int w = -1, mn = 99;
    for (int i = 0; i < 16; i++) if (m_v[i] && m_a[i] == a && w < 0) w = i;
    if (w < 0) for (int i = 0; i < 16; i++) if (!m_v[i] && w < 0) w = i;
    if (w < 0) for (int i = 0; i < 16; i++) if (m_h[i] <= mn) begin mn = m_h[i]; w = i; end
    return w;
  endfunction

  function automatic void m_write(input int w, input mac_t a, input int p);
    if (!(m_v[w] && m_a[w] == a)) begin m_v[w] = 1; m_a[w] = a; m_h[w] = 1; end
    m_p[w] = p;
  endfunction

  initial begin
    for (int i = 0; i < 16; i++) begin m_v[i] = 0; m_h[i] = 1; end
    #5 rst_n = 1;
    for (int n = 0; n < 1500; n++) begin
      int want, ptr, ing, w; bit err;
      @(negedge clk);
      eof_i = 1;
      err   = ($urandom_range(9) == 0);
      error_i = err;
      ing = $urandom_range(3); ingress_port_i = port_t'(ing);
      rx_mac_dst_addr_i = 48'hAA0000 + 48'($urandom_range(n < 600 ? 12 : 24));
      rx_mac_src_addr_i = 48'hAA0000 + 48'($urandom_range(n < 600 ? 12 : 24));
      ptr = $urandom_range(63); data_start_ptr_i = blk_idx_t'(ptr);
      @(negedge clk);
      eof_i = 0;
      w = m_pick(rx_mac_src_addr_i);
      want = m_lookup(rx_mac_dst_addr_i);
      if (!err) m_write(w, rx_mac_src_addr_i, ing);
      #0.1;
      if (err) begin
        n_err++;
        chk(voq_write_reqs_o == 4'(1 << ing) && voq_start_ptrs_o[ing].drop, "error frame route");
      end else if (want >= 0) begin
        n_hit++;
        chk(voq_write_reqs_o == 4'(1 << want) && !flood_o,
            $sformatf("dst %h: reqs %b want port %0d", rx_mac_dst_addr_i, voq_write_reqs_o, want));
      end else begin
        n_flood++;
        chk(voq_write_reqs_o == 4'hF && flood_o, $sformatf("dst %h: should flood, reqs %b", rx_mac_dst_addr_i, voq_write_reqs_o));
      end
      for (int p = 0; p < 4; p++) if (voq_write_reqs_o[p]) chk(int'(voq_start_ptrs_o[p].ptr) == ptr, "start block");
    end
    chk(n_hit > 0 && n_flood > 0 && n_err > 0, "not every route exercised");
    $display("hits %0d floods %0d errors %0d", n_hit, n_flood, n_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100us; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
