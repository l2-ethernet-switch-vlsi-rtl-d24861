// translator: the router stage of the crossbar.
//
// Cycle 0: a frame event (input_valid_i) arrives with the frame's destination
// address, first memory block, error flag and ingress port. The translator
// asks the address table for the destination (read_enable_o/read_address_o)
// and registers the rest.
// Cycle 1: the table answers (port_valid_i, address_port_i). The translator
// pushes one VOQ entry:
//   - error frame         -> VOQ of its own ingress port, drop tag set
//   - destination known   -> VOQ of that port
//   - destination unknown -> every VOQ, flood tag set
// write_reqs_o has one bit per egress port; start_ptrs_o carries the entry
// for each port. A new event may arrive every cycle.
// Lookup-then-route-next-cycle and the flood tag follow the published design;
// the drop tag for frames with a bad CRC is this design's way of returning
// their blocks to the free list.
module translator
  import switch_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 input_valid_i,
  input  mac_t                 mac_dst_addr_i,
  input  blk_idx_t             start_ptr_i,
  input  logic                 error_i,
  input  port_t                ingress_port_i,
  output logic                 read_enable_o,
  output mac_t                 read_address_o,
  input  logic                 port_valid_i,
  input  port_t                address_port_i,
  output logic [NUM_PORTS-1:0] write_reqs_o,
  output voq_entry_t           start_ptrs_o [NUM_PORTS],
  output logic                 flood_o
);
  logic     pend;
  blk_idx_t pend_ptr;
  logic     pend_err;
  port_t    pend_port;

  assign read_enable_o  = input_valid_i;
  assign read_address_o = mac_dst_addr_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend      <= 1'b0;
      pend_ptr  <= '0;
      pend_err  <= 1'b0;
      pend_port <= '0;
    end else begin
      pend <= input_valid_i;
      if (input_valid_i) begin
        pend_ptr  <= start_ptr_i;
        pend_err  <= error_i;
        pend_port <= ingress_port_i;
      end
    end
  end

  always_comb begin
    write_reqs_o = '0;
    flood_o      = 1'b0;
    for (int p = 0; p < NUM_PORTS; p++) begin
      start_ptrs_o[p].ptr   = pend_ptr;
      start_ptrs_o[p].drop  = pend_err;
      start_ptrs_o[p].flood = 1'b0;
    end
    if (pend) begin
      if (pend_err) begin
        write_reqs_o[pend_port] = 1'b1;
      end else if (port_valid_i) begin
        write_reqs_o[address_port_i] = 1'b1;
      end else begin
        write_reqs_o = '1;
        flood_o      = 1'b1;
        for (int p = 0; p < NUM_PORTS; p++) start_ptrs_o[p].flood = 1'b1;
      end
    end
  end
endmodule
