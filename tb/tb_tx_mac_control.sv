// tb_tx_mac_control: stands in for the VOQ and the memory read controller.
// Frames of random length are cut into 64-byte blocks exactly as the write
// controller stores them (63 payload bytes, footer with next index / eop and
// byte count). Each VOQ entry's blocks are handed over with random delays.
// A monitor on the 125 MHz GMII side collects every tx_en burst and checks
// 7 x 0x55, 0xD5, then the frame bytes, no TX_ER, and at least 12 idle
// clocks between frames. Drop-tagged entries must consume all their blocks
// and send nothing. Also checks the 4:1 clock division.
`timescale 1ns/1ps
module tb_tx_mac_control;
  import switch_pkg::*;
  import tb_eth_pkg::*;
  logic switch_clk = 0, switch_rst_n = 1;
  logic voq_valid_i = 0, voq_ready_o, mem_start_o, mem_start_flood_o, mem_re_o;
  voq_entry_t voq_ptr_i = '0;
  blk_idx_t mem_start_addr_o;
  logic frame_valid_i = 0, frame_end_i = 0;
  logic [WORD_W-1:0] frame_data_i = 0;
  logic gmii_tx_clk_o, gmii_tx_en_o, gmii_tx_er_o, frame_sent_o, frame_dropped_o;
  logic [7:0] gmii_tx_data_o;
  int checks = 0, failures = 0;

  frame_t expect_q [$];          // frames that must appear on the wire, in order
  logic [WORD_W-1:0] blocks [$]; // blocks of the frame being read
  bit   busy = 0;
  int   n_sent = 0, n_dropped = 0, n_wire = 0, n_blocks_taken = 0;

  tx_mac_control #(.FIFO_DEPTH(16), .IFG_BYTES(12)) dut (.*);
  always #1 switch_clk = ~switch_clk;

  function automatic void chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, m); end
  endfunction

  function automatic void cut_blocks(input frame_t f);
    int i = 0;
    blocks.delete();
    while (1) begin
      logic [WORD_W-1:0] w; footer_t ft; int n;
      w = '0;
      n = (f.size() - i > PAYLOAD_BYTES) ? PAYLOAD_BYTES : f.size() - i;
      for (int k = 0; k < n; k++) w[WORD_W-1-8*k -: 8] = f[i+k];
      i += n;
      ft.rsvd = 0; ft.eop = (i == f.size()); ft.next_idx = ft.eop ? blk_idx_t'(n) : blk_idx_t'($urandom);
      w[7:0] = ft;
      blocks.push_back(w);
      if (ft.eop) break;
    end
  endfunction

  // memory read controller stand-in: a block becomes valid after a random
  // delay and stays until taken
  int delay = 0;
  always @(posedge switch_clk) begin
    if (mem_re_o && frame_valid_i) begin
      void'(blocks.pop_front()); n_blocks_taken++;
      frame_valid_i <= 0; delay = $urandom_range(20);
    end else if (!frame_valid_i && blocks.size() > 0) begin
      if (delay > 0) delay--;
      else begin
        frame_valid_i <= 1; frame_data_i <= blocks[0];
        frame_end_i <= blocks[0][1];   // footer eop bit
      end
    end
    if (frame_sent_o) n_sent++;
    if (frame_dropped_o) n_dropped++;
  end

  // GMII monitor
  frame_t line_q;
  int idle = 100, prev_en = 0;
  bit mon_on = 0;                // GMII-side reset has settled
  initial #40 mon_on = 1;
  always @(posedge gmii_tx_clk_o) if (mon_on) begin
    chk(!gmii_tx_er_o, "TX_ER raised");
    if (gmii_tx_en_o) begin
      if (!prev_en) begin
        chk(idle >= 12, $sformatf("inter-frame gap %0d", idle));
        line_q.delete();
      end
      line_q.push_back(gmii_tx_data_o);
      idle = 0;
    end else begin
      if (prev_en) begin
        frame_t e;
        n_wire++;
        chk(expect_q.size() > 0, "unexpected frame on the wire");
        if (expect_q.size() > 0) begin
          e = expect_q.pop_front();
          chk(line_q.size() == e.size() + 8, $sformatf("wire frame %0d bytes want %0d", line_q.size(), e.size() + 8));
          for (int i = 0; i < 7; i++) chk(line_q[i] == 8'h55, "preamble");
          chk(line_q[7] == 8'hD5, "SFD");
          for (int i = 0; i < e.size() && i + 8 < line_q.size(); i++)
            if (line_q[i+8] != e[i]) begin chk(0, $sformatf("frame byte %0d", i)); break; end
          checks++;
        end
      end
      idle++;
    end
    prev_en = gmii_tx_en_o;
  end

  task automatic push(input frame_t f, input bit drop);
    cut_blocks(f);
    if (!drop) expect_q.push_back(f);
    @(negedge switch_clk);
    voq_valid_i = 1; voq_ptr_i.ptr = blk_idx_t'($urandom); voq_ptr_i.drop = drop; voq_ptr_i.flood = 0;
    while (!voq_ready_o) @(negedge switch_clk);
    #0.1 chk(mem_start_o && mem_start_addr_o == voq_ptr_i.ptr, "entry not passed to the read controller");
    @(negedge switch_clk); voq_valid_i = 0;
    while (blocks.size() > 0) @(negedge switch_clk);
  endtask

  initial begin
    int t0, t1;
    #0.5 switch_rst_n = 0;   // a falling edge, so the GMII-side flops reset too
    #10 switch_rst_n = 1;
    // GMII clock = switch clock / 4
    @(posedge gmii_tx_clk_o); t0 = $time; @(posedge gmii_tx_clk_o); t1 = $time;
    chk(t1 - t0 == 8, $sformatf("GMII TX clock period %0d ns", t1 - t0));
    for (int k = 0; k < 25; k++) push(make_frame(k, 48'h11, 48'h22, 64 + $urandom_range(600)), 0);
    push(make_frame(90, 48'h11, 48'h22, 126), 0);   // exactly two full blocks
    push(make_frame(91, 48'h11, 48'h22, 300), 1);   // dropped
    push(make_frame(92, 48'h11, 48'h22, 64), 0);
    push(make_frame(93, 48'h11, 48'h22, 64), 1);
    push(make_frame(94, 48'h11, 48'h22, 1500), 0);
    #30us;
    chk(expect_q.size() == 0, $sformatf("%0d frames never sent", expect_q.size()));
    chk(n_wire == 28 && n_sent == 28, $sformatf("%0d frames on the wire, %0d reported sent", n_wire, n_sent));
    chk(n_dropped == 2, $sformatf("%0d frames reported dropped", n_dropped));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
