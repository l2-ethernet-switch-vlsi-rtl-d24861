// ingress_port: receive path of one switch port.
//
// The RX MAC turns the GMII byte stream into frame bytes and addresses; the
// memory write controller stores the bytes as a linked list of 64-byte
// blocks. When the last block of a frame is in memory, the frame's first
// block, error flag, destination and source address are held in a one-entry
// event register (evt_valid_o) until the arbiter accepts it for the crossbar
// (evt_ready_i). A frame lasts at least 84 GMII byte times (over 300 switch
// cycles) and the arbiter serves every port within four cycles, so the
// register never needs to hold two events. Grouping RX and write control per
// port follows the published top schematic; the event register is this
// design's choice.
module ingress_port
  import switch_pkg::*;
(
  input  logic              switch_clk,
  input  logic              switch_rst_n,
  input  logic              gmii_rx_clk_i,
  input  logic [7:0]        gmii_rx_data_i,
  input  logic              gmii_rx_dv_i,
  input  logic              gmii_rx_er_i,
  // free list allocation (through the arbiter)
  output logic              fl_alloc_req_o,
  input  logic              fl_alloc_gnt_i,
  input  blk_idx_t          fl_alloc_block_idx_i,
  // SRAM write port (through the arbiter)
  output logic              mem_we_o,
  input  logic              mem_ready_i,
  output blk_idx_t          mem_addr_o,
  output logic [WORD_W-1:0] mem_wdata_o,
  // stored-frame event to the crossbar (through the arbiter)
  output logic              evt_valid_o,
  input  logic              evt_ready_i,
  output mac_t              evt_dst_o,
  output mac_t              evt_src_o,
  output blk_idx_t          evt_start_o,
  output logic              evt_error_o,
  // activity
  output logic              rx_drop_o
);
  logic [7:0] frame_data;
  logic       frame_valid, frame_sof, frame_eof, frame_error, frame_grant;
  mac_t       mac_dst, mac_src;
  logic       done, done_err;
  blk_idx_t   done_start;

  rx_mac_control rx_mac_control_u (
    .switch_clk     (switch_clk),
    .switch_rst_n   (switch_rst_n),
    .gmii_rx_clk_i  (gmii_rx_clk_i),
    .gmii_rx_data_i (gmii_rx_data_i),
    .gmii_rx_dv_i   (gmii_rx_dv_i),
    .gmii_rx_er_i   (gmii_rx_er_i),
    .frame_data_o   (frame_data),
    .frame_valid_o  (frame_valid),
    .frame_sof_o    (frame_sof),
    .frame_eof_o    (frame_eof),
    .frame_error_o  (frame_error),
    .frame_grant_i  (frame_grant),
    .mac_dst_addr_o (mac_dst),
    .mac_src_addr_o (mac_src),
    .byte_drop_o    (rx_drop_o)
  );

  mem_write_ctrl mem_write_ctrl_u (
    .clk                  (switch_clk),
    .rst_n                (switch_rst_n),
    .data_i               (frame_data),
    .data_valid_i         (frame_valid),
    .data_begin_i         (frame_sof),
    .data_end_i           (frame_eof),
    .data_error_i         (frame_error),
    .data_ready_o         (frame_grant),
    .fl_alloc_req_o       (fl_alloc_req_o),
    .fl_alloc_gnt_i       (fl_alloc_gnt_i),
    .fl_alloc_block_idx_i (fl_alloc_block_idx_i),
    .mem_we_o             (mem_we_o),
    .mem_ready_i          (mem_ready_i),
    .mem_addr_o           (mem_addr_o),
    .mem_wdata_o          (mem_wdata_o),
    .frame_done_o         (done),
    .start_addr_o         (done_start),
    .frame_error_o        (done_err)
  );

  always_ff @(posedge switch_clk or negedge switch_rst_n) begin
    if (!switch_rst_n) begin
      evt_valid_o <= 1'b0;
      evt_dst_o   <= '0;
      evt_src_o   <= '0;
      evt_start_o <= '0;
      evt_error_o <= 1'b0;
    end else begin
      if (evt_valid_o && evt_ready_i) evt_valid_o <= 1'b0;
      if (done) begin
        evt_valid_o <= 1'b1;
        evt_dst_o   <= mac_dst;
        evt_src_o   <= mac_src;
        evt_start_o <= done_start;
        evt_error_o <= done_err;
      end
    end
  end

  assert property (@(posedge switch_clk) disable iff (!switch_rst_n) done |-> !evt_valid_o || evt_ready_i)
    else $error("ingress_port: frame event overrun");
endmodule
