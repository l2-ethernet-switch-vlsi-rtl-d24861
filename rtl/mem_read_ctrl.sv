// mem_read_ctrl: memory read controller of one egress port.
//
// start_i (one cycle) gives the first block of a frame and its flood tag. The
// controller then walks the frame's linked list of blocks:
//   RD_REQ  - hold mem_re_o with the block index until the arbiter grants
//             the SRAM read port (mem_gnt_i);
//   RD_WAIT - the block arrives one cycle later with mem_rvalid_i;
//   HOLD    - present the block on data_o with data_valid_o (data_end_o when
//             its footer has eop set) until TX takes it (re_i high), and at
//             the same time free the block through the arbiter (free_req_o
//             with the flood tag until free_gnt_i).
// After both, it follows the footer's next index, or returns to IDLE after
// the eop block. The block is copied into data_o before it is freed, so a
// writer may reuse it at once. busy_o is high from start_i until the end.
// The traversal and free-as-you-read behaviour follow the published design;
// the ready/valid exchange with TX is this design's choice.
module mem_read_ctrl
  import switch_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start_i,
  input  blk_idx_t          start_addr_i,
  input  logic              flood_i,
  input  logic              re_i,
  output logic [WORD_W-1:0] data_o,
  output logic              data_valid_o,
  output logic              data_end_o,
  output logic              busy_o,
  output logic              mem_re_o,
  output blk_idx_t          mem_raddr_o,
  input  logic              mem_gnt_i,
  input  logic              mem_rvalid_i,
  input  logic [WORD_W-1:0] mem_rdata_i,
  output logic              free_req_o,
  output blk_idx_t          free_block_idx_o,
  output logic              free_flood_o,
  input  logic              free_gnt_i
);
  typedef enum logic [1:0] {IDLE, RD_REQ, RD_WAIT, HOLD} state_t;

  state_t   state;
  blk_idx_t addr;
  logic     flood_q;
  logic     taken, freed;
  logic     taken_n, freed_n;
  footer_t  ftr;

  assign ftr              = footer_t'(data_o[7:0]);
  assign mem_re_o         = (state == RD_REQ);
  assign mem_raddr_o      = addr;
  assign data_valid_o     = (state == HOLD) && !taken;
  assign data_end_o       = ftr.eop;
  assign free_req_o       = (state == HOLD) && !freed;
  assign free_block_idx_o = addr;
  assign free_flood_o     = flood_q;
  assign busy_o           = (state != IDLE);
  // block handed to TX / block returned to the free list, including this cycle
  assign taken_n          = taken || re_i;
  assign freed_n          = freed || free_gnt_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= IDLE;
      addr    <= '0;
      flood_q <= 1'b0;
      taken   <= 1'b0;
      freed   <= 1'b0;
      data_o  <= '0;
    end else begin
      unique case (state)
        IDLE: if (start_i) begin
          addr    <= start_addr_i;
          flood_q <= flood_i;
          state   <= RD_REQ;
        end
        RD_REQ: if (mem_gnt_i) state <= RD_WAIT;
        RD_WAIT: if (mem_rvalid_i) begin
          data_o <= mem_rdata_i;
          taken  <= 1'b0;
          freed  <= 1'b0;
          state  <= HOLD;
        end
        HOLD: begin
          taken <= taken_n;
          freed <= freed_n;
          if (taken_n && freed_n) begin
            if (ftr.eop) state <= IDLE;
            else begin
              addr  <= ftr.next_idx;
              state <= RD_REQ;
            end
          end
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
