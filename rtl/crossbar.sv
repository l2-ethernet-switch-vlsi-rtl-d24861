// crossbar: address learning and frame routing.
//
// Frames are not moved through the crossbar; only the first memory block of
// each stored frame is. For each frame event (eof_i, one per cycle at most,
// chosen by the arbiter) the address table learns source address -> ingress
// port and is searched for the destination address in the same cycle; one
// cycle later the translator pushes the start pointer into the VOQ of the
// known port, or into all VOQs with the flood tag when the destination is
// unknown. Frames with error_i set are queued with the drop tag to their
// ingress port's VOQ so their memory can be reclaimed.
// Structure (address table + translator) and port names follow the
// published crossbar schematic; error_i is this design's addition.
module crossbar
  import switch_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  mac_t                 rx_mac_dst_addr_i,
  input  mac_t                 rx_mac_src_addr_i,
  input  blk_idx_t             data_start_ptr_i,
  input  logic                 eof_i,
  input  logic                 error_i,
  input  port_t                ingress_port_i,
  output logic [NUM_PORTS-1:0] voq_write_reqs_o,
  output voq_entry_t           voq_start_ptrs_o [NUM_PORTS],
  output logic                 flood_o
);
  logic  table_read_req;
  mac_t  table_read_address;
  logic  table_port_valid;
  port_t table_read_port;

  address_table #(
    .ENTRIES(16), .HIT_W(2), .MAC_W(MAC_W), .PORT_W(PORT_W)
  ) address_table_u (
    .clk             (clk),
    .rst_n           (rst_n),
    .read_req_i      (table_read_req),
    .read_address_i  (table_read_address),
    .eof_i           (eof_i && !error_i),
    .learn_port_i    (ingress_port_i),
    .learn_address_i (rx_mac_src_addr_i),
    .port_valid_o    (table_port_valid),
    .read_port_o     (table_read_port)
  );

  translator translator_inst (
    .clk            (clk),
    .rst_n          (rst_n),
    .input_valid_i  (eof_i),
    .mac_dst_addr_i (rx_mac_dst_addr_i),
    .start_ptr_i    (data_start_ptr_i),
    .error_i        (error_i),
    .ingress_port_i (ingress_port_i),
    .read_enable_o  (table_read_req),
    .read_address_o (table_read_address),
    .port_valid_i   (table_port_valid),
    .address_port_i (table_read_port),
    .write_reqs_o   (voq_write_reqs_o),
    .start_ptrs_o   (voq_start_ptrs_o),
    .flood_o        (flood_o)
  );
endmodule
