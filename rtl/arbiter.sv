// arbiter: round-robin access to every shared resource of the switch.
//
// Five independent round-robin arbiters, each granting at most one port per
// cycle, with the grant given combinationally in the cycle of the request:
//   - SRAM write port  <- the write controllers' footer writes (mem_we_i);
//                         mem_ready_o is the grant.
//   - free-list alloc  <- the write controllers' allocation requests; the
//                         winner gets fl_alloc_gnt_o when the free list is
//                         not empty, with the block on fl_alloc_block_idx_o.
//   - SRAM read port   <- the read controllers (mem_re_i); mem_gnt_o is the
//                         grant, and one cycle later mem_rvalid_o is raised
//                         for the port that was granted.
//   - free-list free   <- the read controllers' frees (one free per cycle).
//   - crossbar         <- the ingress ports' frame events (evt_valid_i); the
//                         winner's addresses, start block and error go to the
//                         crossbar with eof_o, and evt_ready_o acknowledges.
// The resources and the round-robin policy are the published design; the
// grant timing and the event handshake are this design's choices.
module arbiter
  import switch_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // write controllers -> SRAM write port
  input  logic [NUM_PORTS-1:0] mem_we_i,
  input  blk_idx_t             mem_waddr_i [NUM_PORTS],
  input  logic [WORD_W-1:0]    mem_wdata_i [NUM_PORTS],
  output logic [NUM_PORTS-1:0] mem_ready_o,
  output logic                 sram_we_o,
  output blk_idx_t             sram_waddr_o,
  output logic [WORD_W-1:0]    sram_wdata_o,
  // write controllers -> free list allocation
  input  logic [NUM_PORTS-1:0] fl_alloc_req_i,
  output logic [NUM_PORTS-1:0] fl_alloc_gnt_o,
  output blk_idx_t             fl_alloc_block_idx_o,
  output logic                 fl_alloc_req_o,
  input  logic                 fl_alloc_gnt_i,
  input  blk_idx_t             fl_alloc_block_idx_i,
  // read controllers -> SRAM read port
  input  logic [NUM_PORTS-1:0] mem_re_i,
  input  blk_idx_t             mem_raddr_i [NUM_PORTS],
  output logic [NUM_PORTS-1:0] mem_gnt_o,
  output logic [NUM_PORTS-1:0] mem_rvalid_o,
  output logic                 sram_re_o,
  output blk_idx_t             sram_raddr_o,
  input  logic                 sram_rvalid_i,
  // read controllers -> free list free port
  input  logic [NUM_PORTS-1:0] free_req_i,
  input  blk_idx_t             free_block_idx_i [NUM_PORTS],
  input  logic [NUM_PORTS-1:0] free_flood_i,
  output logic [NUM_PORTS-1:0] free_gnt_o,
  output logic                 fl_free_req_o,
  output blk_idx_t             fl_free_block_idx_o,
  output logic                 fl_free_flood_o,
  // ingress frame events -> crossbar
  input  logic [NUM_PORTS-1:0] evt_valid_i,
  input  mac_t                 evt_dst_i [NUM_PORTS],
  input  mac_t                 evt_src_i [NUM_PORTS],
  input  blk_idx_t             evt_start_i [NUM_PORTS],
  input  logic [NUM_PORTS-1:0] evt_error_i,
  output logic [NUM_PORTS-1:0] evt_ready_o,
  output logic                 eof_o,
  output port_t                port_o,
  output mac_t                 dst_o,
  output mac_t                 src_o,
  output blk_idx_t             start_o,
  output logic                 error_o
);
  logic [NUM_PORTS-1:0] w_gnt, a_gnt, r_gnt, f_gnt, e_gnt;
  port_t                w_idx, a_idx, r_idx, f_idx, e_idx;
  logic                 w_any, a_any, r_any, f_any, e_any;
  port_t                r_idx_q;
  logic                 r_any_q;

  rr_arbiter #(.N(NUM_PORTS)) wr_rr_u (.clk, .rst_n, .req_i(mem_we_i),       .advance_i(1'b1),
                                       .gnt_o(w_gnt), .idx_o(w_idx), .valid_o(w_any));
  rr_arbiter #(.N(NUM_PORTS)) al_rr_u (.clk, .rst_n, .req_i(fl_alloc_req_i), .advance_i(fl_alloc_gnt_i),
                                       .gnt_o(a_gnt), .idx_o(a_idx), .valid_o(a_any));
  rr_arbiter #(.N(NUM_PORTS)) rd_rr_u (.clk, .rst_n, .req_i(mem_re_i),       .advance_i(1'b1),
                                       .gnt_o(r_gnt), .idx_o(r_idx), .valid_o(r_any));
  rr_arbiter #(.N(NUM_PORTS)) fr_rr_u (.clk, .rst_n, .req_i(free_req_i),     .advance_i(1'b1),
                                       .gnt_o(f_gnt), .idx_o(f_idx), .valid_o(f_any));
  rr_arbiter #(.N(NUM_PORTS)) ev_rr_u (.clk, .rst_n, .req_i(evt_valid_i),    .advance_i(1'b1),
                                       .gnt_o(e_gnt), .idx_o(e_idx), .valid_o(e_any));

  // SRAM write
  assign mem_ready_o  = w_gnt;
  assign sram_we_o    = w_any;
  assign sram_waddr_o = mem_waddr_i[w_idx];
  assign sram_wdata_o = mem_wdata_i[w_idx];

  // allocation
  assign fl_alloc_req_o       = a_any;
  assign fl_alloc_gnt_o       = fl_alloc_gnt_i ? a_gnt : '0;
  assign fl_alloc_block_idx_o = fl_alloc_block_idx_i;

  // SRAM read
  assign mem_gnt_o    = r_gnt;
  assign sram_re_o    = r_any;
  assign sram_raddr_o = mem_raddr_i[r_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_idx_q <= '0;
      r_any_q <= 1'b0;
    end else begin
      r_idx_q <= r_idx;
      r_any_q <= r_any;
    end
  end

  always_comb begin
    mem_rvalid_o = '0;
    if (sram_rvalid_i && r_any_q) mem_rvalid_o[r_idx_q] = 1'b1;
  end

  // free
  assign free_gnt_o          = f_gnt;
  assign fl_free_req_o       = f_any;
  assign fl_free_block_idx_o = free_block_idx_i[f_idx];
  assign fl_free_flood_o     = free_flood_i[f_idx];

  // crossbar
  assign evt_ready_o = e_gnt;
  assign eof_o       = e_any;
  assign port_o      = e_idx;
  assign dst_o       = evt_dst_i[e_idx];
  assign src_o       = evt_src_i[e_idx];
  assign start_o     = evt_start_i[e_idx];
  assign error_o     = evt_error_i[e_idx];

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(mem_ready_o | '0))
    else $error("arbiter: more than one write grant");
endmodule
