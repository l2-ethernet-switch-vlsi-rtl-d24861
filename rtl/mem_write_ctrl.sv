// mem_write_ctrl: memory write controller of one ingress port.
//
// Bytes from the RX MAC arrive at most one per four switch cycles. They are
// packed into payload_reg (byte 0 in the top bits) until 63 bytes are held or
// the frame ends, and the block is then written with a one-byte footer:
//   - full block:  {next_idx = index of the following block, eop = 0}
//   - last block:  {next_idx = number of valid bytes (0..63), eop = 1}
// To fill in the next index the controller always holds two allocations from
// the free list, one for the current block and one for the next. It asks for
// a block whenever one of the two slots is empty, also between frames, so the
// free list is rarely on the critical path; the spare block left at the end
// of a frame becomes the first block of the next frame.
//
// States: IDLE (wait for SOF), WRITE_PAYLOAD (collect bytes), WAIT (entered
// only when a needed allocation is still missing), FOOTER (write request held
// until the arbiter grants the write port, mem_ready_i). data_ready_o is low
// in WAIT and in FOOTER until the grant, which makes the RX MAC drop bytes.
// If the memory runs out while a full block waits for its next block and
// the frame ends meanwhile (RX has then dropped bytes and flagged an error),
// the block is closed as the last one of an errored frame instead, so that
// stalled ports cannot deadlock the memory.
// When the last block of a frame is written, frame_done_o pulses for one
// cycle with the frame's first block on start_addr_o and the RX error flag on
// frame_error_o.
//
// The two-block allocation, the four states, the footer contents and the
// ready behaviour follow the published design; allocating between frames,
// the byte count in the eop footer and the done pulse are this design's own.
module mem_write_ctrl
  import switch_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic [7:0]       data_i,
  input  logic             data_valid_i,
  input  logic             data_begin_i,
  input  logic             data_end_i,
  input  logic             data_error_i,
  output logic             data_ready_o,
  output logic             fl_alloc_req_o,
  input  logic             fl_alloc_gnt_i,
  input  blk_idx_t         fl_alloc_block_idx_i,
  output logic             mem_we_o,
  input  logic             mem_ready_i,
  output blk_idx_t         mem_addr_o,
  output logic [WORD_W-1:0] mem_wdata_o,
  output logic             frame_done_o,
  output blk_idx_t         start_addr_o,
  output logic             frame_error_o
);
  typedef enum logic [1:0] {IDLE, WRITE_PAYLOAD, WAIT, FOOTER} state_t;

  state_t               state;
  logic [PAYLOAD_W-1:0] payload_reg;
  logic [IDX_W-1:0]     beat_cnt;
  blk_idx_t             curr_idx, next_idx;
  logic                 frame_allocated, next_frame_allocated;
  logic                 eop_q, err_q, first_block;
  blk_idx_t             start_q;
  footer_t              footer_tmp;
  logic                 footer_done, need_ok;
  logic                 cur_v_n, nxt_v_n;
  blk_idx_t             cur_n, nxt_n;

  // what the pending footer needs: the current block, plus the next one
  // unless this is the last block of the frame
  assign need_ok = frame_allocated && (eop_q || next_frame_allocated);

  assign footer_tmp.next_idx = eop_q ? beat_cnt : next_idx;
  assign footer_tmp.eop      = eop_q;
  assign footer_tmp.rsvd     = 1'b0;

  assign mem_we_o     = (state == FOOTER);
  assign mem_addr_o   = curr_idx;
  assign mem_wdata_o  = {payload_reg, footer_tmp};
  assign footer_done  = (state == FOOTER) && mem_ready_i;
  assign data_ready_o = (state == IDLE) || (state == WRITE_PAYLOAD && !data_end_i) ||
                        (footer_done && !eop_q);

  assign fl_alloc_req_o = !frame_allocated || !next_frame_allocated;

  // The two allocation slots after this cycle: a written footer moves the
  // next block into the current slot, then a granted allocation fills the
  // first empty slot.
  always_comb begin
    cur_v_n = frame_allocated; nxt_v_n = next_frame_allocated;
    cur_n   = curr_idx;        nxt_n   = next_idx;
    if (footer_done) begin
      cur_n = next_idx; cur_v_n = next_frame_allocated; nxt_v_n = 1'b0;
    end
    if (fl_alloc_gnt_i) begin
      if (!cur_v_n) begin cur_n = fl_alloc_block_idx_i; cur_v_n = 1'b1; end
      else          begin nxt_n = fl_alloc_block_idx_i; nxt_v_n = 1'b1; end
    end
  end

  function automatic logic [PAYLOAD_W-1:0] put_byte(input logic [PAYLOAD_W-1:0] p,
                                                     input logic [IDX_W-1:0] k,
                                                     input logic [7:0] d);
    logic [PAYLOAD_W-1:0] r;
    r = p;
    r[PAYLOAD_W-1-8*k -: 8] = d;
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state                <= IDLE;
      payload_reg          <= '0;
      beat_cnt             <= '0;
      curr_idx             <= '0;
      next_idx             <= '0;
      frame_allocated      <= 1'b0;
      next_frame_allocated <= 1'b0;
      eop_q                <= 1'b0;
      err_q                <= 1'b0;
      first_block          <= 1'b0;
      start_q              <= '0;
      frame_done_o         <= 1'b0;
      start_addr_o         <= '0;
      frame_error_o        <= 1'b0;
    end else begin
      frame_done_o <= 1'b0;

      unique case (state)
        IDLE: begin
          if (data_valid_i && data_begin_i) begin
            payload_reg <= put_byte('0, '0, data_i);
            beat_cnt    <= IDX_W'(1);
            first_block <= 1'b1;
            eop_q       <= 1'b0;
            state       <= WRITE_PAYLOAD;
          end
        end
        WRITE_PAYLOAD: begin
          if (data_valid_i) begin
            payload_reg <= put_byte(payload_reg, beat_cnt, data_i);
            beat_cnt    <= beat_cnt + 1'b1;
            if (beat_cnt == IDX_W'(PAYLOAD_BYTES - 1)) begin
              eop_q <= 1'b0;
              state <= (frame_allocated && next_frame_allocated) ? FOOTER : WAIT;
            end
          end else if (data_end_i) begin
            eop_q <= 1'b1;
            err_q <= data_error_i;
            state <= frame_allocated ? FOOTER : WAIT;
          end
        end
        WAIT: begin
          if (need_ok) begin
            state <= FOOTER;
          end else if (!eop_q && data_end_i && frame_allocated) begin
            // The frame ended while no next block could be had. RX has
            // already marked it bad (it dropped bytes), so close it here,
            // in the current block, and let the drop path free it. Waiting
            // for a block instead can deadlock when every port holds part
            // of a frame and the memory is full.
            eop_q <= 1'b1;
            err_q <= 1'b1;
            state <= FOOTER;
          end
        end
        FOOTER: begin
          if (mem_ready_i) begin
            if (first_block) start_q <= curr_idx;
            first_block <= 1'b0;
            if (eop_q) begin
              frame_done_o  <= 1'b1;
              start_addr_o  <= first_block ? curr_idx : start_q;
              frame_error_o <= err_q;
              state         <= IDLE;
            end else begin
              state <= WRITE_PAYLOAD;
              if (data_valid_i) begin
                payload_reg <= put_byte('0, '0, data_i);
                beat_cnt    <= IDX_W'(1);
              end else begin
                beat_cnt    <= '0;
              end
            end
          end
        end
        default: state <= IDLE;
      endcase

      curr_idx             <= cur_n;
      next_idx             <= nxt_n;
      frame_allocated      <= cur_v_n;
      next_frame_allocated <= nxt_v_n;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) fl_alloc_gnt_i |-> fl_alloc_req_o)
    else $error("mem_write_ctrl: allocation granted without request");
endmodule
