// egress_port: transmit path of one switch port.
//
// The virtual output queue holds the start blocks of frames routed to this
// port; the TX MAC pops one whenever it is idle (voq_ready), fetches the
// frame through the port's memory read controller (mem_* signals, outside this
// module) and sends it on GMII. The wiring is the published egress schematic:
// VOQ head and valid into TX, TX ready back as the VOQ pop.
module egress_port
  import switch_pkg::*;
#(
  parameter int unsigned VOQ_DEPTH = 64
) (
  input  logic              switch_clk,
  input  logic              switch_rst_n,
  input  logic              voq_write_req_i,
  input  voq_entry_t        voq_ptr_i,
  output logic              voq_drop_o,
  output logic              mem_start_o,
  output blk_idx_t          mem_start_addr_o,
  output logic              mem_start_flood_o,
  output logic              mem_re_o,
  input  logic              frame_valid_i,
  input  logic              frame_end_i,
  input  logic [WORD_W-1:0] frame_data_i,
  output logic              gmii_tx_clk_o,
  output logic              gmii_tx_en_o,
  output logic              gmii_tx_er_o,
  output logic [7:0]        gmii_tx_data_o,
  output logic              frame_sent_o,
  output logic              frame_dropped_o
);
  logic       voq_ptr_valid, voq_read_req, voq_full;
  voq_entry_t voq_ptr_out;

  voq #(.DEPTH(VOQ_DEPTH), .WIDTH(VOQ_W)) voq_u (
    .clk         (switch_clk),
    .rst_n       (switch_rst_n),
    .write_req_i (voq_write_req_i),
    .ptr_i       (voq_ptr_i),
    .read_req_i  (voq_read_req),
    .ptr_o       (voq_ptr_out),
    .ptr_valid_o (voq_ptr_valid),
    .full_o      (voq_full),
    .drop_o      (voq_drop_o)
  );

  tx_mac_control tx_mac_control_u (
    .switch_clk        (switch_clk),
    .switch_rst_n      (switch_rst_n),
    .voq_valid_i       (voq_ptr_valid),
    .voq_ptr_i         (voq_ptr_out),
    .voq_ready_o       (voq_read_req),
    .mem_start_o       (mem_start_o),
    .mem_start_addr_o  (mem_start_addr_o),
    .mem_start_flood_o (mem_start_flood_o),
    .mem_re_o          (mem_re_o),
    .frame_valid_i     (frame_valid_i),
    .frame_end_i       (frame_end_i),
    .frame_data_i      (frame_data_i),
    .gmii_tx_clk_o     (gmii_tx_clk_o),
    .gmii_tx_en_o      (gmii_tx_en_o),
    .gmii_tx_er_o      (gmii_tx_er_o),
    .gmii_tx_data_o    (gmii_tx_data_o),
    .frame_sent_o      (frame_sent_o),
    .frame_dropped_o   (frame_dropped_o)
  );
endmodule
