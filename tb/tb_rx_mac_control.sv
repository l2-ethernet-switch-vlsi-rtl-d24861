// tb_rx_mac_control: sends GMII frames (preamble, SFD, frame, FCS) on a
// 125 MHz receive clock into the RX MAC running at 500 MHz, with the grant
// held high, and checks the delivered bytes, SOF on the first byte, the
// destination and source addresses, and EOF with the error flag. Covered:
// good frames, a bad FCS, RX_ER during a frame, a runt frame, a frame with the
// grant pulled low for a while (bytes dropped, frame marked bad) and a frame
// whose first byte is refused (whole frame ignored). Also checks that the
// bytes come out one per GMII clock (four switch cycles apart).
`timescale 1ns/1ps
module tb_rx_mac_control;
  import switch_pkg::*;
  import tb_eth_pkg::*;
  logic switch_clk = 0, switch_rst_n = 0, gmii_rx_clk_i = 0;
  logic [7:0] gmii_rx_data_i = 0;
  logic gmii_rx_dv_i = 0, gmii_rx_er_i = 0;
  logic [7:0] frame_data_o;
  logic frame_valid_o, frame_sof_o, frame_eof_o, frame_error_o, frame_grant_i = 1, byte_drop_o;
  mac_t mac_dst_addr_o, mac_src_addr_o;
  int checks = 0, failures = 0;
  frame_t got;
  int n_eof = 0, last_valid_t = -1, gap_bad = 0, n_drop = 0;
  bit last_err;

  rx_mac_control #(.FIFO_DEPTH(16)) dut (.*);
  always #1 switch_clk = ~switch_clk;       // 500 MHz
  always #4 gmii_rx_clk_i = ~gmii_rx_clk_i; // 125 MHz

  function automatic void chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, m); end
  endfunction

  // capture side
  bit prev_eof = 0;
  always @(posedge switch_clk) begin
    if (frame_valid_o && frame_grant_i) begin
      if (frame_sof_o) got.delete();
      got.push_back(frame_data_o);
    end
    if (byte_drop_o) n_drop++;
    if (frame_eof_o && !prev_eof) begin n_eof++; last_err = frame_error_o; end
    prev_eof <= frame_eof_o;
  end

  task automatic send(input frame_t f, input int er_at);
    @(posedge gmii_rx_clk_i);
    for (int i = 0; i < 8 + f.size(); i++) begin
      gmii_rx_dv_i   <= 1;
      gmii_rx_data_i <= (i < 7) ? 8'h55 : (i == 7) ? 8'hD5 : f[i-8];
      gmii_rx_er_i   <= (i == er_at);
      @(posedge gmii_rx_clk_i);
    end
    gmii_rx_dv_i <= 0; gmii_rx_er_i <= 0; gmii_rx_data_i <= 0;
    repeat (12) @(posedge gmii_rx_clk_i);
  endtask

  task automatic expect_frame(input frame_t f, input bit want_err, input string what);
    int e0;
    chk(n_eof > 0, {what, ": no end of frame"});
    chk(last_err == want_err, $sformatf("%s: error flag %0d want %0d", what, last_err, want_err));
    if (!want_err) begin
      chk(got.size() == f.size(), $sformatf("%s: %0d bytes want %0d", what, got.size(), f.size()));
      foreach (f[i]) if (i < got.size()) chk(got[i] == f[i], $sformatf("%s: byte %0d", what, i));
      chk(mac_dst_addr_o == {f[0], f[1], f[2], f[3], f[4], f[5]}, {what, ": destination address"});
      chk(mac_src_addr_o == {f[6], f[7], f[8], f[9], f[10], f[11]}, {what, ": source address"});
    end
  endtask

  initial begin
    frame_t f;
    #20 switch_rst_n = 1;
    #40;
    for (int k = 0; k < 6; k++) begin
      f = make_frame(k, 48'h0200_0000_0000 + 48'(k), 48'h0400_0000_0010 + 48'(k), 64 + 37 * k);
      n_eof = 0; send(f, -1); expect_frame(f, 0, $sformatf("good frame %0d", k));
    end
    f = make_frame(10, 48'h1, 48'h2, 80); f[40] ^= 8'h01;
    n_eof = 0; send(f, -1); expect_frame(f, 1, "bad FCS");
    f = make_frame(11, 48'h1, 48'h2, 80);
    n_eof = 0; send(f, 30); expect_frame(f, 1, "RX_ER");
    f = make_frame(12, 48'h1, 48'h2, 60);
    n_eof = 0; send(f, -1); expect_frame(f, 1, "runt frame");
    // grant low in the middle of the frame: bytes dropped, error
    f = make_frame(13, 48'h1, 48'h2, 200); n_eof = 0; n_drop = 0;
    fork
      send(f, -1);
      begin #600; frame_grant_i = 0; #100; frame_grant_i = 1; end
    join
    expect_frame(f, 1, "grant dropped");
    chk(n_drop > 0, "no byte drop reported");
    // first byte refused: nothing delivered, no end of frame
    f = make_frame(14, 48'h1, 48'h2, 100); n_eof = 0;
    frame_grant_i = 0;
    fork send(f, -1); begin #100; frame_grant_i = 1; end join
    chk(n_eof == 0, "refused frame produced an end of frame");
    // one more good frame afterwards
    f = make_frame(15, 48'h0A0B0C0D0E0F, 48'h010203040506, 128);
    n_eof = 0; send(f, -1); expect_frame(f, 0, "good frame after drops");
    chk(gap_bad == 0, "bytes delivered faster than the GMII rate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // delivery rate: one byte per four switch cycles inside a frame
  always @(posedge switch_clk) if (frame_valid_o) begin
    if (last_valid_t >= 0 && !frame_sof_o && ($time - last_valid_t) < 8) gap_bad++;
    last_valid_t = $time;
  end
  initial begin
    #200us; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
