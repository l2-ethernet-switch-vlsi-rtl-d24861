// eth_switch: four-port store-and-forward Layer-2 Ethernet switch, GMII ports.
//
// Data path: GMII RX -> ingress_port (RX MAC + memory write controller) ->
// shared packet SRAM (64 blocks x 64 bytes) -> memory read controller ->
// egress_port (VOQ + TX MAC) -> GMII TX. A frame is written once, as a linked
// list of blocks allocated from the free list. When its last block is stored,
// the arbiter passes the frame's start block and addresses to the crossbar,
// which learns source address -> ingress port and pushes the start block into
// the VOQ of the destination port, or of all ports (flood) if the destination
// is unknown. Each egress port walks the block list, sends the bytes and frees
// the blocks; a flooded frame's blocks return to the free list only after all
// four ports have freed them. Frames that fail the CRC check are not sent;
// their blocks are freed by their own port's egress path.
//
// All logic between the GMII FIFOs runs on switch_clk (nominally 500 MHz,
// four times the 125 MHz GMII clock). switch_rst_n is asserted
// asynchronously and released synchronously in each clock domain. Every
// shared resource (SRAM write port, SRAM read port, free list allocate and
// free ports, crossbar) is shared round-robin by the arbiter.
//
// The partitioning, sizes and data flow follow the published design; see the
// individual modules for the details that are this design's choices.
// The blocks' status outputs (RX byte drops, VOQ drops, frames sent or
// dropped, free-block count, floods, read controller busy) are gathered on
// internal nets but not brought out, because the pin list is GMII only;
// lint reports them as unused. They are the place to attach statistics
// counters. The assertions in the sub-blocks use the reset in their
// disable condition, which lint reports as a reset used both synchronously
// and asynchronously; the assertions are not part of the circuit.
module eth_switch
  import switch_pkg::*;
(
  input  logic                 switch_clk,
  input  logic                 switch_rst_n,
  input  logic [NUM_PORTS-1:0] gmii_rx_clk_i,
  input  logic [7:0]           gmii_rx_data_i [NUM_PORTS],
  input  logic [NUM_PORTS-1:0] gmii_rx_dv_i,
  input  logic [NUM_PORTS-1:0] gmii_rx_er_i,
  output logic [NUM_PORTS-1:0] gmii_tx_clk_o,
  output logic [NUM_PORTS-1:0] gmii_tx_en_o,
  output logic [NUM_PORTS-1:0] gmii_tx_er_o,
  output logic [7:0]           gmii_tx_data_o [NUM_PORTS]
);
  logic rst_n;
  reset_sync switch_rst_sync_u (.clk(switch_clk), .rst_n_i(switch_rst_n), .rst_n_o(rst_n));

  // ingress side
  logic [NUM_PORTS-1:0] wc_alloc_req, wc_alloc_gnt, wc_we, wc_ready;
  blk_idx_t             wc_alloc_idx;
  blk_idx_t             wc_addr [NUM_PORTS];
  logic [WORD_W-1:0]    wc_wdata [NUM_PORTS];
  logic [NUM_PORTS-1:0] evt_valid, evt_ready, evt_error, rx_drop;
  mac_t                 evt_dst [NUM_PORTS];
  mac_t                 evt_src [NUM_PORTS];
  blk_idx_t             evt_start [NUM_PORTS];

  // egress side
  logic [NUM_PORTS-1:0] rc_re, rc_gnt, rc_rvalid, rc_free_req, rc_free_gnt, rc_free_flood;
  blk_idx_t             rc_raddr [NUM_PORTS];
  blk_idx_t             rc_free_idx [NUM_PORTS];
  logic [NUM_PORTS-1:0] tx_start, tx_start_flood, tx_re, rc_valid, rc_end, rc_busy;
  blk_idx_t             tx_start_addr [NUM_PORTS];
  logic [WORD_W-1:0]    rc_data [NUM_PORTS];
  logic [NUM_PORTS-1:0] voq_drop, tx_sent, tx_dropped;

  // shared resources
  logic              sram_we, sram_re, sram_rvalid;
  blk_idx_t          sram_waddr, sram_raddr;
  logic [WORD_W-1:0] sram_wdata, sram_rdata;
  logic              fl_alloc_req, fl_alloc_gnt, fl_free_req, fl_free_flood, fl_empty;
  blk_idx_t          fl_alloc_idx, fl_free_idx;
  logic [IDX_W:0]    fl_count;
  logic              xb_eof, xb_error, xb_flood;
  port_t             xb_port;
  mac_t              xb_dst, xb_src;
  blk_idx_t          xb_start;
  logic [NUM_PORTS-1:0] voq_wr;
  voq_entry_t        voq_entry [NUM_PORTS];

  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_port
    ingress_port ingress_u (
      .switch_clk           (switch_clk),
      .switch_rst_n         (rst_n),
      .gmii_rx_clk_i        (gmii_rx_clk_i[p]),
      .gmii_rx_data_i       (gmii_rx_data_i[p]),
      .gmii_rx_dv_i         (gmii_rx_dv_i[p]),
      .gmii_rx_er_i         (gmii_rx_er_i[p]),
      .fl_alloc_req_o       (wc_alloc_req[p]),
      .fl_alloc_gnt_i       (wc_alloc_gnt[p]),
      .fl_alloc_block_idx_i (wc_alloc_idx),
      .mem_we_o             (wc_we[p]),
      .mem_ready_i          (wc_ready[p]),
      .mem_addr_o           (wc_addr[p]),
      .mem_wdata_o          (wc_wdata[p]),
      .evt_valid_o          (evt_valid[p]),
      .evt_ready_i          (evt_ready[p]),
      .evt_dst_o            (evt_dst[p]),
      .evt_src_o            (evt_src[p]),
      .evt_start_o          (evt_start[p]),
      .evt_error_o          (evt_error[p]),
      .rx_drop_o            (rx_drop[p])
    );

    mem_read_ctrl mem_read_ctrl_u (
      .clk              (switch_clk),
      .rst_n            (rst_n),
      .start_i          (tx_start[p]),
      .start_addr_i     (tx_start_addr[p]),
      .flood_i          (tx_start_flood[p]),
      .re_i             (tx_re[p]),
      .data_o           (rc_data[p]),
      .data_valid_o     (rc_valid[p]),
      .data_end_o       (rc_end[p]),
      .busy_o           (rc_busy[p]),
      .mem_re_o         (rc_re[p]),
      .mem_raddr_o      (rc_raddr[p]),
      .mem_gnt_i        (rc_gnt[p]),
      .mem_rvalid_i     (rc_rvalid[p]),
      .mem_rdata_i      (sram_rdata),
      .free_req_o       (rc_free_req[p]),
      .free_block_idx_o (rc_free_idx[p]),
      .free_flood_o     (rc_free_flood[p]),
      .free_gnt_i       (rc_free_gnt[p])
    );

    egress_port egress_u (
      .switch_clk        (switch_clk),
      .switch_rst_n      (rst_n),
      .voq_write_req_i   (voq_wr[p]),
      .voq_ptr_i         (voq_entry[p]),
      .voq_drop_o        (voq_drop[p]),
      .mem_start_o       (tx_start[p]),
      .mem_start_addr_o  (tx_start_addr[p]),
      .mem_start_flood_o (tx_start_flood[p]),
      .mem_re_o          (tx_re[p]),
      .frame_valid_i     (rc_valid[p]),
      .frame_end_i       (rc_end[p]),
      .frame_data_i      (rc_data[p]),
      .gmii_tx_clk_o     (gmii_tx_clk_o[p]),
      .gmii_tx_en_o      (gmii_tx_en_o[p]),
      .gmii_tx_er_o      (gmii_tx_er_o[p]),
      .gmii_tx_data_o    (gmii_tx_data_o[p]),
      .frame_sent_o      (tx_sent[p]),
      .frame_dropped_o   (tx_dropped[p])
    );
  end

  arbiter arbiter_u (
    .clk                  (switch_clk),
    .rst_n                (rst_n),
    .mem_we_i             (wc_we),
    .mem_waddr_i          (wc_addr),
    .mem_wdata_i          (wc_wdata),
    .mem_ready_o          (wc_ready),
    .sram_we_o            (sram_we),
    .sram_waddr_o         (sram_waddr),
    .sram_wdata_o         (sram_wdata),
    .fl_alloc_req_i       (wc_alloc_req),
    .fl_alloc_gnt_o       (wc_alloc_gnt),
    .fl_alloc_block_idx_o (wc_alloc_idx),
    .fl_alloc_req_o       (fl_alloc_req),
    .fl_alloc_gnt_i       (fl_alloc_gnt),
    .fl_alloc_block_idx_i (fl_alloc_idx),
    .mem_re_i             (rc_re),
    .mem_raddr_i          (rc_raddr),
    .mem_gnt_o            (rc_gnt),
    .mem_rvalid_o         (rc_rvalid),
    .sram_re_o            (sram_re),
    .sram_raddr_o         (sram_raddr),
    .sram_rvalid_i        (sram_rvalid),
    .free_req_i           (rc_free_req),
    .free_block_idx_i     (rc_free_idx),
    .free_flood_i         (rc_free_flood),
    .free_gnt_o           (rc_free_gnt),
    .fl_free_req_o        (fl_free_req),
    .fl_free_block_idx_o  (fl_free_idx),
    .fl_free_flood_o      (fl_free_flood),
    .evt_valid_i          (evt_valid),
    .evt_dst_i            (evt_dst),
    .evt_src_i            (evt_src),
    .evt_start_i          (evt_start),
    .evt_error_i          (evt_error),
    .evt_ready_o          (evt_ready),
    .eof_o                (xb_eof),
    .port_o               (xb_port),
    .dst_o                (xb_dst),
    .src_o                (xb_src),
    .start_o              (xb_start),
    .error_o              (xb_error)
  );

  sram #(.NUM_BLOCKS(NUM_BLOCKS), .WORD_W(WORD_W)) sram_u (
    .clk    (switch_clk),
    .rst_n  (rst_n),
    .we     (sram_we),
    .w_addr (sram_waddr),
    .wdata  (sram_wdata),
    .re     (sram_re),
    .r_addr (sram_raddr),
    .rdata  (sram_rdata),
    .rvalid (sram_rvalid)
  );

  free_list #(.NUM_BLOCKS(NUM_BLOCKS), .FLOOD_REFS(NUM_PORTS)) fl_u (
    .clk               (switch_clk),
    .rst_n             (rst_n),
    .alloc_req_i       (fl_alloc_req),
    .alloc_gnt_o       (fl_alloc_gnt),
    .alloc_block_idx_o (fl_alloc_idx),
    .free_req_i        (fl_free_req),
    .free_block_idx_i  (fl_free_idx),
    .free_flood_i      (fl_free_flood),
    .empty_o           (fl_empty),
    .free_count_o      (fl_count)
  );

  crossbar crossbar_u (
    .clk               (switch_clk),
    .rst_n             (rst_n),
    .rx_mac_dst_addr_i (xb_dst),
    .rx_mac_src_addr_i (xb_src),
    .data_start_ptr_i  (xb_start),
    .eof_i             (xb_eof),
    .error_i           (xb_error),
    .ingress_port_i    (xb_port),
    .voq_write_reqs_o  (voq_wr),
    .voq_start_ptrs_o  (voq_entry),
    .flood_o           (xb_flood)
  );
endmodule
