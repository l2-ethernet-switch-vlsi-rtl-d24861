// tb_address_table: fills the 16 rows with 0x1001..0x1010 (rows 0..15),
// then repeats the eviction scenario of the published waveform: lookups of
// some rows, then new addresses, checking which row each one replaced.
// A behavioural reference (same rules: +1 for a hit row, -1 for the others,
// saturating 0..3, new rows at 1, victim = lowest counter, highest index)
// predicts every lookup result and every table row.
`timescale 1ns/1ps
module tb_address_table;
  logic clk = 0, rst_n = 0;
  logic read_req_i = 0, eof_i = 0, port_valid_o;
  logic [47:0] read_address_i = 0, learn_address_i = 0;
  logic [1:0] learn_port_i = 0, read_port_o;
  int checks = 0, failures = 0;

  bit          m_v [16];
  logic [47:0] m_a [16];
  int          m_p [16], m_h [16];

  address_table #(.ENTRIES(16), .HIT_W(2), .MAC_W(48), .PORT_W(2)) dut (.*);
  always #1 clk = ~clk;

  function automatic void chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, m); end
  endfunction

  function automatic int m_lookup(input logic [47:0] a);
    int h = -1;
    for (int i = 0; i < 16; i++) if (m_v[i] && m_a[i] == a && h < 0) h = i;
    if (h >= 0) for (int i = 0; i < 16; i++)
      m_h[i] = (i == h) ? ((m_h[i] < 3) ? m_h[i] + 1 : 3) : ((m_h[i] > 0) ? m_h[i] - 1 : 0);
    return h < 0 ? -1 : m_p[h];
  endfunction

  function automatic int m_learn(input logic [47:0] a, input int p);
    int w = -1, mn = 99;
    for (int i = 0; i < 16; i++) if (m_v[i] && m_a[i] == a && w < 0) w = i;
    if (w >= 0) begin m_p[w] = p; return w; end
    for (int i = 0; i < 16; i++) if (!m_v[i] && w < 0) w = i;
    if (w < 0) for (int i = 0; i < 16; i++) if (m_h[i] <= mn) begin mn = m_h[i]; w = i; end
    m_v[w] = 1; m_a[w] = a; m_p[w] = p; m_h[w] = 1;
    return w;
  endfunction

  task automatic learn(input logic [47:0] a, input int p, input int want_row);
    int w;
    @(negedge clk); eof_i = 1; learn_address_i = a; learn_port_i = 2'(p);
    @(negedge clk); eof_i = 0;
    w = m_learn(a, p);
    if (want_row >= 0) chk(w == want_row, $sformatf("reference put %h in row %0d, want %0d", a, w, want_row));
    chk(dut.valid[w] && dut.addr[w] == a && dut.port[w] == 2'(p),
        $sformatf("address %h not in row %0d", a, w));
  endtask

  task automatic lookup(input logic [47:0] a);
    int want;
    @(negedge clk); read_req_i = 1; read_address_i = a;
    @(negedge clk); read_req_i = 0;
    want = m_lookup(a);
    chk(port_valid_o == (want >= 0), $sformatf("lookup %h: valid=%0d want %0d", a, port_valid_o, want >= 0));
    if (want >= 0) chk(read_port_o == 2'(want), $sformatf("lookup %h: port %0d want %0d", a, read_port_o, want));
    for (int i = 0; i < 16; i++) chk(int'(dut.hits[i]) == m_h[i], $sformatf("row %0d counter %0d want %0d", i, dut.hits[i], m_h[i]));
  endtask

  initial begin
    for (int i = 0; i < 16; i++) begin m_v[i] = 0; m_a[i] = 0; m_p[i] = 0; m_h[i] = 1; end
    #5 rst_n = 1;
    lookup(48'h1001);                                   // miss on empty table
    for (int i = 0; i < 16; i++) learn(48'h1001 + 48'(i), i % 4, i);
    for (int i = 0; i < 16; i++) lookup(48'h1001 + 48'(i));
    lookup(48'h1010); lookup(48'h1008); lookup(48'h1009);
    learn(48'h1011, 1, -1); learn(48'h1012, 2, -1); learn(48'h1013, 3, -1); learn(48'h1014, 0, -1);
    for (int i = 0; i < 20; i++) lookup(48'h1001 + 48'($urandom_range(22)));
    for (int i = 0; i < 8; i++) learn(48'h1015 + 48'(i), i % 4, -1);
    learn(48'h1016, 3, -1);                             // known address: port update
    lookup(48'h1016);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100us; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
