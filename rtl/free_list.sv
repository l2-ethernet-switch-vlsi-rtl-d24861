// free_list: allocator of packet-memory blocks.
//
// A stack of free block indices. Reset fills it with 0..NUM_BLOCKS-1 and sets
// the stack pointer to NUM_BLOCKS, so the first allocations return the highest
// indices (3F, 3E, 3D, ... for 64 blocks). An allocation pops the top of the
// stack: alloc_gnt_o = alloc_req_i && !empty, with the index on
// alloc_block_idx_o in the same cycle, and the pop takes effect at the clock
// edge. A free pushes free_block_idx_i. Both may happen in the same cycle; the
// freed index then replaces the popped top and the pointer stays put; on an
// empty stack the freed index is handed straight to the allocation.
//
// Flooded frames are read by every egress port, so each port frees each of
// their blocks. A free with free_flood_i set only bumps the block's reference
// counter; the block goes back on the stack with the FLOOD_REFS-th such free,
// and the counter returns to 0. Plain frees return the block at once.
//
// The stack, the simultaneous alloc/free and the per-block reference counters
// follow the published design; the counter width and the equal-cycle ordering
// are this design's choices.
module free_list #(
  parameter int unsigned NUM_BLOCKS = 64,
  parameter int unsigned FLOOD_REFS = 4
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          alloc_req_i,
  output logic                          alloc_gnt_o,
  output logic [$clog2(NUM_BLOCKS)-1:0] alloc_block_idx_o,
  input  logic                          free_req_i,
  input  logic [$clog2(NUM_BLOCKS)-1:0] free_block_idx_i,
  input  logic                          free_flood_i,
  output logic                          empty_o,
  output logic [$clog2(NUM_BLOCKS):0]   free_count_o
);
  localparam int unsigned IW = $clog2(NUM_BLOCKS);
  localparam int unsigned CW = $clog2(FLOOD_REFS);

  logic [IW-1:0] stack [NUM_BLOCKS];
  logic [IW:0]   sp;
  logic [CW-1:0] refcnt [NUM_BLOCKS];
  logic          push;

  assign empty_o           = (sp == '0);
  assign free_count_o      = sp;
  assign alloc_gnt_o       = alloc_req_i && (!empty_o || push);
  assign alloc_block_idx_o = empty_o ? free_block_idx_i : stack[IW'(sp - 1'b1)];

  // a flood free returns the block only when it is the last expected reader
  assign push = free_req_i &&
                (!free_flood_i || refcnt[free_block_idx_i] == CW'(FLOOD_REFS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sp <= (IW+1)'(NUM_BLOCKS);
      for (int i = 0; i < NUM_BLOCKS; i++) begin
        stack[i]  <= IW'(i);
        refcnt[i] <= '0;
      end
    end else begin
      if (free_req_i && free_flood_i)
        refcnt[free_block_idx_i] <= push ? '0 : refcnt[free_block_idx_i] + 1'b1;
      unique case ({alloc_gnt_o, push})
        2'b10: sp <= sp - 1'b1;
        2'b01: begin
          stack[sp[IW-1:0]] <= free_block_idx_i;
          sp <= sp + 1'b1;
        end
        2'b11: if (!empty_o) stack[IW'(sp - 1'b1)] <= free_block_idx_i;
        default: ;
      endcase
    end
  end

  // a block can never be returned while the stack already holds all of them
  assert property (@(posedge clk) disable iff (!rst_n) !(push && !alloc_gnt_o && sp == (IW+1)'(NUM_BLOCKS)))
    else $error("free_list: push onto a full stack");
endmodule
