// tb_ingress_port: GMII frames into one ingress port (RX MAC + write
// controller + event register), with stand-ins for the free list, the SRAM
// write port (random ready, as a 4-port arbiter would give) and the crossbar (random event ready). For every
// event the testbench walks the stored block chain and compares it with the
// frame sent, and checks the addresses and the error flag. Covers good
// frames of many lengths, a bad FCS, and a frame sent while the free list is
// empty (bytes dropped, error event, blocks still linked so they can be
// freed).
`timescale 1ns/1ps
module tb_ingress_port;
  import switch_pkg::*;
  import tb_eth_pkg::*;
  logic switch_clk = 0, switch_rst_n = 1, gmii_rx_clk_i = 0;
  logic [7:0] gmii_rx_data_i = 0;
  logic gmii_rx_dv_i = 0, gmii_rx_er_i = 0;
  logic fl_alloc_req_o, fl_alloc_gnt_i = 0, mem_we_o, mem_ready_i = 0;
  blk_idx_t fl_alloc_block_idx_i = 0, mem_addr_o, evt_start_o;
  logic [WORD_W-1:0] mem_wdata_o;
  logic evt_valid_o, evt_ready_i = 0, evt_error_o, rx_drop_o;
  mac_t evt_dst_o, evt_src_o;
  int checks = 0, failures = 0;

  logic [WORD_W-1:0] mem [64];
  int   free_q [$];
  bit   starve = 0;
  frame_t sent_q [$]; bit err_q [$];
  int   n_evt = 0, n_drop = 0, wr_wait = 0;

  ingress_port dut (.*);
  always #1 switch_clk = ~switch_clk;
  always #4 gmii_rx_clk_i = ~gmii_rx_clk_i;

  function automatic void chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, m); end
  endfunction

  always @(negedge switch_clk) begin
    fl_alloc_gnt_i       = fl_alloc_req_o && free_q.size() > 0 && !starve;
    fl_alloc_block_idx_i = free_q.size() > 0 ? blk_idx_t'(free_q[0]) : '0;
    // like a 4-way round-robin arbiter: a write waits at most 3 cycles
    mem_ready_i          = mem_we_o && (($urandom_range(2) == 0) || wr_wait == 3);
    wr_wait              = (mem_we_o && !mem_ready_i) ? wr_wait + 1 : 0;
    evt_ready_i          = evt_valid_o && ($urandom_range(3) == 0);
  end

  always @(posedge switch_clk) if (switch_rst_n) begin
    if (fl_alloc_gnt_i) void'(free_q.pop_front());
    if (mem_we_o && mem_ready_i) mem[mem_addr_o] = mem_wdata_o;
    if (rx_drop_o) n_drop++;
    if (evt_valid_o && evt_ready_i) begin
      int b, n; frame_t got, f; footer_t ft; bit e;
      n_evt++;
      got.delete();
      chk(sent_q.size() > 0, "event without a frame");
      f = sent_q.pop_front(); e = err_q.pop_front();
      b = evt_start_o; n = 0;
      forever begin
        ft = footer_t'(mem[b][7:0]);
        for (int i = 0; i < (ft.eop ? int'(ft.next_idx) : PAYLOAD_BYTES); i++) got.push_back(mem[b][WORD_W-1-8*i -: 8]);
        free_q.push_back(b);
        if (ft.eop || ++n > 64) break;
        b = ft.next_idx;
      end
      chk(evt_error_o == e, $sformatf("event error flag %0d want %0d", evt_error_o, e));
      chk(evt_dst_o == {f[0], f[1], f[2], f[3], f[4], f[5]}, "event destination");
      chk(evt_src_o == {f[6], f[7], f[8], f[9], f[10], f[11]}, "event source");
      if (!e) begin
        chk(got.size() == f.size(), $sformatf("stored %0d bytes want %0d", got.size(), f.size()));
        foreach (f[i]) if (i < got.size() && got[i] != f[i]) begin chk(0, $sformatf("byte %0d", i)); break; end
      end
    end
  end

  task automatic send(input frame_t f, input bit err);
    sent_q.push_back(f); err_q.push_back(err);
    @(posedge gmii_rx_clk_i);
    for (int i = 0; i < 8 + f.size(); i++) begin
      gmii_rx_dv_i <= 1; gmii_rx_data_i <= (i < 7) ? 8'h55 : (i == 7) ? 8'hD5 : f[i-8];
      @(posedge gmii_rx_clk_i);
    end
    gmii_rx_dv_i <= 0;
    repeat (12) @(posedge gmii_rx_clk_i);
  endtask

  initial begin
    frame_t f;
    for (int i = 63; i >= 0; i--) free_q.push_back(i);
    foreach (mem[i]) mem[i] = '0;
    #0.5 switch_rst_n = 0;
    #20 switch_rst_n = 1;
    #40;
    for (int k = 0; k < 20; k++) send(make_frame(k, 48'hA0 + 48'(k), 48'hB0 + 48'(k), 64 + $urandom_range(1400)), 0);
    f = make_frame(50, 48'h1, 48'h2, 300); f[100] ^= 8'h80; send(f, 1);
    // free list runs dry during a frame
    #2us; starve = 1;
    fork
      send(make_frame(51, 48'h1, 48'h2, 500), 1);
      begin #3us; starve = 0; end
    join
    send(make_frame(52, 48'h3, 48'h4, 200), 0);
    #5us;
    chk(n_evt == 23, $sformatf("%0d events for 23 frames", n_evt));
    chk(n_drop > 0, "no byte dropped while the free list was empty");
    // the write controller keeps two blocks allocated for the next frame
    chk(free_q.size() == 62, $sformatf("%0d blocks back in the free list", free_q.size()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
