// tb_eth_switch: end-to-end test of the four-port switch at its default sizes.
//
// Four GMII PHY models send frames (7 x 0x55, 0xD5, frame, inter-frame gap)
// on free-running 125 MHz RX clocks with different phases; the switch runs at
// 500 MHz. Four GMII monitors collect every transmitted frame, check the
// preamble/SFD and that TX_ER stays low, identify the frame by the id in its
// payload, compare every byte with the frame that was sent, and tick it off
// the list of frames expected on that port. A reference model of the address
// table (16 rows, 2-bit counters, same learning and eviction rules) predicts
// where each frame must appear: on every port when the destination is
// unknown, on the learned port otherwise, nowhere when the frame is bad.
//
// Phases:
//   A  all four ports at once, two frames each: the first floods (nothing
//      learned yet), the second goes to the port learned from the first set;
//   B  a frame with a wrong FCS and a frame with RX_ER: both must be dropped;
//   C  24 frames from 24 source addresses, one at a time, so the 16-row
//      table must evict; destinations mix learned and unknown addresses;
//   D  all four ports send long frames to unknown destinations at line rate:
//      the floods overfill the 4 KB memory, writers stall and RX drops bytes;
//      frames that arrive must be intact, the others must not appear at all;
//   E  after reset, the first frame on each port floods again.
// After each phase the test waits until everything has drained and checks
// that all memory blocks are back in the free list. Each mechanism (flood,
// learned route, CRC drop, eviction, allocation stall, byte drop, flood
// reference counting, simultaneous alloc/free, VOQ bypass, arbitration
// conflicts) is counted and must have happened at least once.
`timescale 1ns/1ps
module tb_eth_switch;
  import switch_pkg::*;
  import tb_eth_pkg::*;

  localparam int NP = 4;

  logic            switch_clk = 1'b0;
  logic            switch_rst_n = 1'b0;
  logic [NP-1:0]   gmii_rx_clk = '0;
  logic [7:0]      gmii_rx_data [NP];
  logic [NP-1:0]   gmii_rx_dv, gmii_rx_er;
  logic [NP-1:0]   gmii_tx_clk, gmii_tx_en, gmii_tx_er;
  logic [7:0]      gmii_tx_data [NP];

  eth_switch dut (
    .switch_clk     (switch_clk),
    .switch_rst_n   (switch_rst_n),
    .gmii_rx_clk_i  (gmii_rx_clk),
    .gmii_rx_data_i (gmii_rx_data),
    .gmii_rx_dv_i   (gmii_rx_dv),
    .gmii_rx_er_i   (gmii_rx_er),
    .gmii_tx_clk_o  (gmii_tx_clk),
    .gmii_tx_en_o   (gmii_tx_en),
    .gmii_tx_er_o   (gmii_tx_er),
    .gmii_tx_data_o (gmii_tx_data)
  );

  always #1 switch_clk = ~switch_clk;                 // 500 MHz
  for (genvar p = 0; p < NP; p++) begin : g_clk
    initial begin
      #(0.7 * p + 0.3);
      forever #4 gmii_rx_clk[p] = ~gmii_rx_clk[p];    // 125 MHz
    end
  end

  int checks = 0, failures = 0;
  function automatic void check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, msg);
    end
  endfunction

  // ---------------- frame bookkeeping ----------------
  logic [47:0] f_dst [int];
  logic [47:0] f_src [int];
  int          f_len [int];
  int          expect_cnt [NP][int];   // frames still expected per port
  bit          loose [int];            // may or may not arrive (phase D)
  int          outstanding = 0;
  int          rx_frames[NP], loose_seen = 0;
  int          next_id = 1;

  // ---------------- reference address table ----------------
  bit          m_valid [16];
  logic [47:0] m_addr  [16];
  int          m_port  [16];
  int          m_hits  [16];
  int          model_evictions = 0;

  function automatic void model_reset();
    for (int i = 0; i < 16; i++) begin
      m_valid[i] = 0; m_addr[i] = '0; m_port[i] = 0; m_hits[i] = 1;
    end
  endfunction

  // lookup (with counter update), returns port or -1
  function automatic int model_lookup(input logic [47:0] a);
    int hit;
    hit = -1;
    for (int i = 0; i < 16; i++) if (m_valid[i] && m_addr[i] == a && hit < 0) hit = i;
    if (hit < 0) return -1;
    for (int i = 0; i < 16; i++) begin
      if (i == hit) m_hits[i] = (m_hits[i] < 3) ? m_hits[i] + 1 : 3;
      else          m_hits[i] = (m_hits[i] > 0) ? m_hits[i] - 1 : 0;
    end
    return m_port[hit];
  endfunction

  function automatic void model_learn(input logic [47:0] a, input int port);
    int w, mn;
    w = -1;
    for (int i = 0; i < 16; i++) if (m_valid[i] && m_addr[i] == a && w < 0) w = i;
    if (w >= 0) begin m_port[w] = port; return; end
    for (int i = 0; i < 16; i++) if (!m_valid[i] && w < 0) w = i;
    if (w < 0) begin
      mn = 99;
      for (int i = 0; i < 16; i++) if (m_hits[i] <= mn) begin mn = m_hits[i]; w = i; end
      model_evictions++;
    end
    m_valid[w] = 1; m_addr[w] = a; m_port[w] = port; m_hits[w] = 1;
  endfunction

  // ---------------- PHY models ----------------
  task automatic rx_edge(input int p);
    case (p)
      0: @(posedge gmii_rx_clk[0]);
      1: @(posedge gmii_rx_clk[1]);
      2: @(posedge gmii_rx_clk[2]);
      default: @(posedge gmii_rx_clk[3]);
    endcase
  endtask

  task automatic phy_send(input int p, input int id, input bit bad_fcs, input bit rx_er);
    frame_t f;
    f = make_frame(id, f_dst[id], f_src[id], f_len[id]);
    if (bad_fcs) f[f.size()-1] = f[f.size()-1] ^ 8'h5A;
    for (int i = 0; i < 8 + f.size(); i++) begin
      rx_edge(p);
      gmii_rx_dv[p]   <= 1'b1;
      gmii_rx_er[p]   <= rx_er && (i == 30);
      gmii_rx_data[p] <= (i < 7) ? 8'h55 : (i == 7) ? 8'hD5 : f[i-8];
    end
    rx_edge(p);
    gmii_rx_dv[p] <= 1'b0;
    gmii_rx_er[p] <= 1'b0;
    gmii_rx_data[p] <= '0;
    repeat (12) rx_edge(p);
  endtask

  // decide where a frame must appear, then send it
  task automatic send_routed(input int p, input logic [47:0] dst, input logic [47:0] src,
                             input int len, input bit bad_fcs, input bit rx_er,
                             input bit is_loose, input bit use_model);
    int id, outp;
    id = next_id++;
    f_dst[id] = dst; f_src[id] = src; f_len[id] = len;
    if (is_loose) begin
      loose[id] = 1;
    end else if (!(bad_fcs || rx_er)) begin
      outp = use_model ? model_lookup(dst) : -1;
      if (outp < 0) begin
        for (int q = 0; q < NP; q++) begin expect_cnt[q][id] = 1; outstanding++; end
      end else begin
        expect_cnt[outp][id] = 1; outstanding++;
      end
      if (use_model) model_learn(src, p);
    end
    phy_send(p, id, bad_fcs, rx_er);
  endtask

  // ---------------- GMII monitors ----------------
  for (genvar p = 0; p < NP; p++) begin : g_mon
    frame_t cur;
    bit     prev_en = 0;
    always @(posedge gmii_tx_clk[p]) begin
      if (gmii_tx_en[p]) begin
        cur.push_back(gmii_tx_data[p]);
        if (gmii_tx_er[p]) check(0, $sformatf("port %0d: TX_ER asserted", p));
      end else if (prev_en) begin
        check_frame(p, cur);
        cur.delete();
      end
      prev_en = gmii_tx_en[p];
    end
  end

  function automatic void check_frame(input int p, input frame_t g);
    int id;
    frame_t e;
    bit ok;
    check(g.size() > 8 + 18, $sformatf("port %0d: frame too short (%0d)", p, g.size()));
    if (g.size() <= 26) return;
    ok = 1;
    for (int i = 0; i < 7; i++) if (g[i] != 8'h55) ok = 0;
    check(ok && g[7] == 8'hD5, $sformatf("port %0d: bad preamble/SFD", p));
    id = int'({g[8+14], g[8+15]});
    if (!f_len.exists(id)) begin
      check(0, $sformatf("port %0d: frame with unknown id %0d", p, id));
      return;
    end
    e = make_frame(id, f_dst[id], f_src[id], f_len[id]);
    ok = (g.size() == e.size() + 8);
    if (ok) for (int i = 0; i < e.size(); i++) if (g[i+8] != e[i]) ok = 0;
    check(ok, $sformatf("port %0d: frame %0d corrupted (got %0d bytes, want %0d)",
                        p, id, g.size() - 8, e.size()));
    rx_frames[p]++;
    if (loose.exists(id)) begin
      loose_seen++;
    end else if (expect_cnt[p].exists(id)) begin
      expect_cnt[p].delete(id);
      outstanding--;
    end else begin
      check(0, $sformatf("port %0d: frame %0d not expected here", p, id));
    end
  endfunction

  // ---------------- mechanism counters (design probes) ----------------
  int n_flood = 0, n_unicast = 0, n_crc_drop = 0, n_evict = 0, n_wait = 0,
      n_rx_drop = 0, n_ref_partial = 0, n_alloc_free = 0, n_bypass = 0,
      n_wr_conflict = 0, n_rd_conflict = 0, n_mem_empty = 0, n_alloc_before_sof = 0;

  always @(posedge switch_clk) if (switch_rst_n) begin
    if (dut.crossbar_u.flood_o) n_flood++;
    if (|dut.voq_wr && !dut.crossbar_u.flood_o && !dut.crossbar_u.translator_inst.pend_err) n_unicast++;
    if (dut.crossbar_u.address_table_u.eof_i && !dut.crossbar_u.address_table_u.lr_hit &&
        !dut.crossbar_u.address_table_u.have_empty) n_evict++;
    if (dut.fl_u.free_req_i && dut.fl_u.free_flood_i && !dut.fl_u.push) n_ref_partial++;
    if (dut.fl_u.alloc_gnt_o && dut.fl_u.push) n_alloc_free++;
    if ($countones(dut.wc_we) > 1) n_wr_conflict++;
    if ($countones(dut.rc_re) > 1) n_rd_conflict++;
    if (dut.fl_u.empty_o && dut.fl_alloc_req) n_mem_empty++;
    n_crc_drop += $countones(dut.tx_dropped);
    n_rx_drop  += $countones(dut.rx_drop);
  end
  for (genvar p = 0; p < NP; p++) begin : g_probe
    always @(posedge switch_clk) if (switch_rst_n) begin
      if (dut.g_port[p].ingress_u.mem_write_ctrl_u.state == 2'd2) n_wait++;
      if (dut.g_port[p].egress_u.voq_u.bypass && dut.g_port[p].egress_u.voq_u.do_pop) n_bypass++;
    end
  end

  // ---------------- helpers ----------------
  task automatic wait_drained(input int max_us, input string phase);
    int t;
    t = 0;
    while ((outstanding != 0 || dut.fl_count != 7'(NUM_BLOCKS - 2 * NP) ||
            (|dut.rc_busy) || (|dut.g_port[0].egress_u.voq_u.count) ||
            (|dut.g_port[1].egress_u.voq_u.count) || (|dut.g_port[2].egress_u.voq_u.count) ||
            (|dut.g_port[3].egress_u.voq_u.count)) && t < max_us * 500) begin
      @(posedge switch_clk);
      t++;
    end
    repeat (2000) @(posedge switch_clk);     // let TX and the monitors finish
    check(outstanding == 0, $sformatf("%s: %0d expected frames never arrived", phase, outstanding));
    check(dut.fl_count == 7'(NUM_BLOCKS - 2 * NP),
          $sformatf("%s: free list holds %0d blocks, expected %0d", phase, dut.fl_count, NUM_BLOCKS - 2 * NP));
    if (outstanding != 0) begin
      for (int q = 0; q < NP; q++) foreach (expect_cnt[q][id]) $display("  missing: port %0d frame %0d", q, id);
      outstanding = 0;
      for (int q = 0; q < NP; q++) expect_cnt[q].delete();
    end
  endtask

  task automatic do_reset();
    switch_rst_n = 1'b0;
    repeat (20) @(posedge switch_clk);
    switch_rst_n = 1'b1;
    repeat (40) @(posedge switch_clk);
    model_reset();
  endtask

  function automatic logic [47:0] mac(input int port, input int k);
    return 48'h0011_2233_0000 | (48'(port) << 8) | 48'(k);
  endfunction

  // ---------------- per-port phase bodies ----------------
  task automatic phase_a1(input int p);
    send_routed(p, 48'h1020_3040_5000 + 48'(p), mac(p, 0), 64 + 97 * p, 0, 0, 0, 0);
  endtask
  task automatic phase_a2(input int p);
    send_routed(p, mac((p + 1) % NP, 0), mac(p, 0), 200 + 300 * p, 0, 0, 0, 1);
  endtask
  task automatic phase_d(input int p);
    for (int k = 0; k < 3; k++)
      send_routed(p, 48'hFFFF_FFFF_0000 | 48'(16 * p + k), 48'h00AA_0000_0000 | 48'(16 * p + k),
                  700, 0, 0, 1, 0);
  endtask
  task automatic phase_e(input int p);
    send_routed(p, 48'h1020_3040_5000 + 48'(p), mac(p, 0), 70, 0, 0, 0, 0);
  endtask

  // ---------------- stimulus ----------------
  initial begin
    for (int p = 0; p < NP; p++) begin
      gmii_rx_dv[p] = 0; gmii_rx_er[p] = 0; gmii_rx_data[p] = '0;
    end
    model_reset();
    do_reset();

    // A: two frames per port in parallel; first floods, second is routed
    fork
      phase_a1(0);
      phase_a1(1);
      phase_a1(2);
      phase_a1(3);
    join
    // all four sources are now known (the model learns them here, no lookups hit)
    for (int p = 0; p < NP; p++) model_learn(mac(p, 0), p);
    repeat (400) @(posedge switch_clk);
    fork
      phase_a2(0);
      phase_a2(1);
      phase_a2(2);
      phase_a2(3);
    join
    wait_drained(200, "phase A");

    // B: bad FCS on port 0, RX_ER on port 1 (known destinations) -> dropped
    send_routed(0, mac(2, 0), mac(0, 0), 100, 1, 0, 0, 0);
    send_routed(1, mac(3, 0), mac(1, 0), 150, 0, 1, 0, 0);
    send_routed(2, mac(1, 0), mac(2, 0), 80, 0, 0, 0, 1);
    wait_drained(100, "phase B");

    // C: 24 sources one after another; the table has to evict
    for (int i = 0; i < 24; i++) begin
      logic [47:0] d;
      d = (i % 3 == 2) ? mac(i % NP == 0 ? 1 : 0, 0) :
          (i % 3 == 1 && i > 3) ? 48'h0000_0000_1000 + 48'(i - 2) : 48'hFFFF_0000_0000 | 48'(i);
      send_routed(i % NP, d, 48'h0000_0000_1000 + 48'(i), 64 + 5 * i, 0, 0, 0, 1);
      repeat (600) @(posedge switch_clk);
    end
    wait_drained(400, "phase C");
    check(n_evict == model_evictions, "eviction count differs from the reference table");
    check(n_evict > 0, "address table eviction never happened");

    // D: line-rate floods of long frames on all ports overfill the memory
    fork
      phase_d(0);
      phase_d(1);
      phase_d(2);
      phase_d(3);
    join
    wait_drained(600, "phase D");

    // E: after reset nothing is known any more -> every first frame floods
    do_reset();
    fork
      phase_e(0);
      phase_e(1);
      phase_e(2);
      phase_e(3);
    join
    wait_drained(200, "phase E");

    $display("frames received per port: %0d %0d %0d %0d, loose frames delivered: %0d",
             rx_frames[0], rx_frames[1], rx_frames[2], rx_frames[3], loose_seen);
    $display("mechanisms: flood=%0d unicast=%0d crc_drop=%0d evict=%0d (model %0d) wait=%0d rx_byte_drop=%0d",
             n_flood, n_unicast, n_crc_drop, n_evict, model_evictions, n_wait, n_rx_drop);
    $display("            flood_ref_partial=%0d alloc+free=%0d voq_bypass=%0d wr_conflict=%0d rd_conflict=%0d mem_empty=%0d",
             n_ref_partial, n_alloc_free, n_bypass, n_wr_conflict, n_rd_conflict, n_mem_empty);
    check(n_flood > 0,       "flooding never happened");
    check(n_unicast > 0,     "learned unicast route never happened");
    check(n_crc_drop >= 2,   "bad frames were not dropped by the egress drop path");
    check(n_wait > 0,        "write controller WAIT state never entered");
    check(n_rx_drop > 0,     "RX byte drop under back-pressure never happened");
    check(n_ref_partial > 0, "flood reference counting never happened");
    check(n_alloc_free > 0,  "simultaneous allocate and free never happened");
    check(n_bypass > 0,      "VOQ empty-queue bypass never happened");
    check(n_wr_conflict > 0, "SRAM write port conflict never arbitrated");
    check(n_rd_conflict > 0, "SRAM read port conflict never arbitrated");
    check(n_mem_empty > 0,   "memory never ran out");
    check(loose_seen > 0,    "no frame got through the overload phase");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #4ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
