// tb_egress_port: pushes VOQ entries into the egress port (queue + TX MAC)
// and serves its block reads from a memory stand-in that holds, for each
// accepted entry, its frame cut into 64-byte blocks. Frames must leave on the
// GMII side in push order with preamble and SFD, and bursts larger than the
// queue must report drops for exactly the entries that never appear. The
// drop tag makes an entry consume its blocks silently.
`timescale 1ns/1ps
module tb_egress_port;
  import switch_pkg::*;
  import tb_eth_pkg::*;
  logic switch_clk = 0, switch_rst_n = 1;
  logic voq_write_req_i = 0, voq_drop_o, mem_start_o, mem_start_flood_o, mem_re_o;
  voq_entry_t voq_ptr_i = '0;
  blk_idx_t mem_start_addr_o;
  logic frame_valid_i = 0, frame_end_i = 0;
  logic [WORD_W-1:0] frame_data_i = 0;
  logic gmii_tx_clk_o, gmii_tx_en_o, gmii_tx_er_o, frame_sent_o, frame_dropped_o;
  logic [7:0] gmii_tx_data_o;
  int checks = 0, failures = 0;

  frame_t acc_f [$];             // accepted entries in push order: frame
  int     acc_i [$];             // and start index
  frame_t expect_q [$];
  logic [WORD_W-1:0] blocks [$];
  int n_sent = 0, n_dropped = 0, n_wire = 0, n_qdrop = 0;

  egress_port #(.VOQ_DEPTH(64)) dut (.*);
  always #1 switch_clk = ~switch_clk;

  function automatic void chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, m); end
  endfunction

  function automatic void cut_blocks(input frame_t f);
    int i = 0;
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

  // read controller stand-in
  int delay = 0;
  always @(posedge switch_clk) begin
    if (mem_start_o) begin
      chk(blocks.size() == 0, "new frame started before the previous one was read");
      chk(acc_i.size() > 0 && acc_i[0] == int'(mem_start_addr_o), "entries read out of order");
      if (acc_f.size() > 0) begin cut_blocks(acc_f[0]); void'(acc_f.pop_front()); void'(acc_i.pop_front()); end
    end
    if (mem_re_o && frame_valid_i) begin
      void'(blocks.pop_front());
      frame_valid_i <= 0; delay = $urandom_range(6);
    end else if (!frame_valid_i && blocks.size() > 0) begin
      if (delay > 0) delay--;
      else begin frame_valid_i <= 1; frame_data_i <= blocks[0]; frame_end_i <= blocks[0][1]; end
    end
    if (frame_sent_o) n_sent++;
    if (frame_dropped_o) n_dropped++;
  end

  // GMII monitor
  frame_t line_q;
  int idle = 100, prev_en = 0;
  bit mon_on = 0;
  initial #40 mon_on = 1;
  always @(posedge gmii_tx_clk_o) if (mon_on) begin
    chk(!gmii_tx_er_o, "TX_ER raised");
    if (gmii_tx_en_o) begin
      if (!prev_en) begin chk(idle >= 12, "inter-frame gap"); line_q.delete(); end
      line_q.push_back(gmii_tx_data_o); idle = 0;
    end else begin
      if (prev_en) begin
        frame_t e;
        n_wire++;
        chk(expect_q.size() > 0, "unexpected frame");
        if (expect_q.size() > 0) begin
          e = expect_q.pop_front();
          chk(line_q.size() == e.size() + 8, $sformatf("frame %0d bytes want %0d", line_q.size(), e.size() + 8));
          chk(line_q[7] == 8'hD5 && line_q[0] == 8'h55, "preamble/SFD");
          for (int i = 0; i < e.size() && i + 8 < line_q.size(); i++)
            if (line_q[i+8] != e[i]) begin chk(0, $sformatf("frame byte %0d", i)); break; end
        end
      end
      idle++;
    end
    prev_en = gmii_tx_en_o;
  end

  // push entries in consecutive cycles
  task automatic burst(input int n, input int len, input bit with_drops);
    for (int k = 0; k < n; k++) begin
      int idx; bit drop; frame_t f;
      idx = $urandom_range(63); drop = with_drops && (k % 3 == 1);
      f = make_frame(1000 + k, 48'h5, 48'h6, len + $urandom_range(40));
      @(negedge switch_clk);
      voq_write_req_i = 1; voq_ptr_i.ptr = blk_idx_t'(idx); voq_ptr_i.drop = drop; voq_ptr_i.flood = 0;
      #0.1;
      if (voq_drop_o) n_qdrop++;
      else begin
        acc_f.push_back(f); acc_i.push_back(idx);
        if (!drop) expect_q.push_back(f);
      end
    end
    @(negedge switch_clk); voq_write_req_i = 0;
  endtask

  initial begin
    #0.5 switch_rst_n = 0;
    #10 switch_rst_n = 1;
    #50;
    burst(12, 64, 1);
    wait (expect_q.size() == 0); #2us;
    chk(n_dropped == 4 && n_wire == 8, $sformatf("burst 1: %0d sent %0d dropped", n_wire, n_dropped));
    // more entries than the queue holds
    burst(64, 64, 0);
    burst(6, 64, 0);
    chk(n_qdrop > 0, "queue overflow never reported");
    wait (expect_q.size() == 0); #2us;
    chk(n_wire + n_qdrop == 8 + 70, $sformatf("%0d sent + %0d lost != 70 pushed", n_wire - 8, n_qdrop));
    chk(n_sent == n_wire, "sent count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
