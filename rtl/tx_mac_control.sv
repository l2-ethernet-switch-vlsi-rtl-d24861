// tx_mac_control: transmit side of one switch port.
//
// Switch clock domain. In IDLE, voq_ready_o is high; a VOQ entry is taken
// when voq_valid_i is also high. Its first block index goes to the memory read
// controller with a one-cycle mem_start_o. Nothing is sent until that first
// block has arrived (WAIT_FIRST), so that a slow memory cannot leave a gap
// inside the frame. Then 7 preamble bytes and the SFD are queued (PREAMBLE),
// followed by the stored frame bytes (DATA): 63 per block, or the count held
// in the footer of the eop block. While one block is being sent the next is
// already requested (mem_re_o) and held in a second buffer. After the frame
// IFG_BYTES idle entries are queued (IFG). An entry with the drop tag (a frame
// that failed its CRC check) is read block by block and discarded, which
// frees its memory, without any GMII activity (DROP).
//
// GMII side. gmii_tx_clk_o is switch_clk divided by 4 (125 MHz from 500 MHz).
// Bytes cross to it through an async FIFO whose entries are {tx_en, data};
// each GMII clock one entry is popped and driven on gmii_tx_en_o/data_o. If
// the FIFO runs dry inside a frame (memory underrun), gmii_tx_er_o is driven
// high with tx_en so the receiver discards the frame.
//
// Waiting for the first block before the preamble and the async FIFO to the
// GMII clock follow the published design; the clock divider, the one-block
// prefetch, the inter-frame gap, the drop path and the use of TX_ER are this
// design's choices.
module tx_mac_control
  import switch_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned IFG_BYTES  = 12
) (
  input  logic              switch_clk,
  input  logic              switch_rst_n,
  input  logic              voq_valid_i,
  input  voq_entry_t        voq_ptr_i,
  output logic              voq_ready_o,
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
  typedef enum logic [2:0] {IDLE, WAIT_FIRST, PREAMBLE, DATA, IFG, DROP} state_t;

  // ---------------- GMII TX clock ----------------
  logic [1:0] div;
  always_ff @(posedge switch_clk or negedge switch_rst_n) begin
    if (!switch_rst_n) div <= '0;
    else               div <= div + 1'b1;
  end
  assign gmii_tx_clk_o = div[1];

  logic tx_rst_n;
  reset_sync tx_rst_sync_u (.clk(gmii_tx_clk_o), .rst_n_i(switch_rst_n), .rst_n_o(tx_rst_n));

  // ---------------- switch clock domain ----------------
  state_t               state;
  voq_entry_t           ent;
  logic [PAYLOAD_W-1:0] cur_blk, nxt_blk;
  logic [IDX_W-1:0]     cur_left, nxt_cnt;
  logic                 cur_valid, cur_last, nxt_valid, nxt_last, got_last;
  logic [3:0]           cnt;
  logic                 fifo_wen, fifo_full, fifo_empty;
  logic [8:0]           fifo_wdata, fifo_rdata;
  logic                 take_blk;
  footer_t              in_ftr;

  assign in_ftr            = footer_t'(frame_data_i[7:0]);
  assign voq_ready_o       = (state == IDLE);
  assign mem_start_o       = (state == IDLE) && voq_valid_i;
  assign mem_start_addr_o  = voq_ptr_i.ptr;
  assign mem_start_flood_o = voq_ptr_i.flood;
  assign mem_re_o          = (state != IDLE) && (state != IFG) && !got_last && !nxt_valid;
  assign take_blk          = mem_re_o && frame_valid_i;

  always_comb begin
    fifo_wen   = 1'b0;
    fifo_wdata = '0;
    unique case (state)
      PREAMBLE: begin
        fifo_wen   = !fifo_full;
        fifo_wdata = {1'b1, (cnt == 4'(PREAMBLE_LEN)) ? SFD_BYTE : PREAMBLE_BYTE};
      end
      DATA: begin
        fifo_wen   = !fifo_full && cur_valid;
        fifo_wdata = {1'b1, cur_blk[PAYLOAD_W-1 -: 8]};
      end
      IFG: begin
        fifo_wen   = !fifo_full;
        fifo_wdata = {1'b0, 8'h00};
      end
      default: ;
    endcase
  end

  always_ff @(posedge switch_clk or negedge switch_rst_n) begin
    if (!switch_rst_n) begin
      state           <= IDLE;
      ent             <= '0;
      cur_blk         <= '0;
      nxt_blk         <= '0;
      cur_left        <= '0;
      nxt_cnt         <= '0;
      cur_valid       <= 1'b0;
      cur_last        <= 1'b0;
      nxt_valid       <= 1'b0;
      nxt_last        <= 1'b0;
      got_last        <= 1'b0;
      cnt             <= '0;
      frame_sent_o    <= 1'b0;
      frame_dropped_o <= 1'b0;
    end else begin
      frame_sent_o    <= 1'b0;
      frame_dropped_o <= 1'b0;

      // block arriving from the read controller goes to the second buffer
      if (take_blk) begin
        nxt_blk   <= frame_data_i[WORD_W-1 -: PAYLOAD_W];
        nxt_cnt   <= in_ftr.eop ? in_ftr.next_idx : IDX_W'(PAYLOAD_BYTES);
        nxt_last  <= in_ftr.eop;
        nxt_valid <= 1'b1;
        if (in_ftr.eop || frame_end_i) got_last <= 1'b1;
      end

      unique case (state)
        IDLE: begin
          got_last  <= 1'b0;
          cur_valid <= 1'b0;
          nxt_valid <= 1'b0;
          if (voq_valid_i) begin
            ent   <= voq_ptr_i;
            state <= WAIT_FIRST;
          end
        end
        WAIT_FIRST: begin
          if (nxt_valid) begin
            cnt   <= '0;
            state <= ent.drop ? DROP : PREAMBLE;
          end
        end
        PREAMBLE: begin
          if (fifo_wen) begin
            cnt <= cnt + 1'b1;
            if (cnt == 4'(PREAMBLE_LEN)) state <= DATA;
          end
        end
        DATA: begin
          if (cur_valid) begin
            if (fifo_wen) begin
              cur_blk  <= cur_blk << 8;
              cur_left <= cur_left - 1'b1;
              if (cur_left == IDX_W'(1)) begin
                cur_valid <= 1'b0;
                if (cur_last) begin
                  cnt   <= '0;
                  state <= IFG;
                end
              end
            end
          end else if (nxt_valid && !take_blk) begin
            nxt_valid <= 1'b0;
            if (nxt_cnt == '0) begin
              if (nxt_last) begin
                cnt   <= '0;
                state <= IFG;
              end
            end else begin
              cur_blk   <= nxt_blk;
              cur_left  <= nxt_cnt;
              cur_last  <= nxt_last;
              cur_valid <= 1'b1;
            end
          end
        end
        IFG: begin
          if (fifo_wen) begin
            cnt <= cnt + 1'b1;
            if (cnt == 4'(IFG_BYTES - 1)) begin
              frame_sent_o <= 1'b1;
              state        <= IDLE;
            end
          end
        end
        DROP: begin
          if (nxt_valid && !take_blk) begin
            nxt_valid <= 1'b0;
            if (nxt_last) begin
              frame_dropped_o <= 1'b1;
              state           <= IDLE;
            end
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  async_fifo #(.WIDTH(9), .DEPTH(FIFO_DEPTH)) tx_fifo_u (
    .wclk   (switch_clk),
    .wrst_n (switch_rst_n),
    .wen    (fifo_wen),
    .wdata  (fifo_wdata),
    .wfull  (fifo_full),
    .rclk   (gmii_tx_clk_o),
    .rrst_n (tx_rst_n),
    .ren    (!fifo_empty),
    .rdata  (fifo_rdata),
    .rempty (fifo_empty)
  );

  // ---------------- GMII TX clock domain ----------------
  logic in_frame;
  always_ff @(posedge gmii_tx_clk_o or negedge tx_rst_n) begin
    if (!tx_rst_n) begin
      gmii_tx_en_o   <= 1'b0;
      gmii_tx_er_o   <= 1'b0;
      gmii_tx_data_o <= '0;
      in_frame       <= 1'b0;
    end else if (!fifo_empty) begin
      gmii_tx_en_o   <= fifo_rdata[8];
      gmii_tx_er_o   <= 1'b0;
      gmii_tx_data_o <= fifo_rdata[7:0];
      in_frame       <= fifo_rdata[8];
    end else begin
      gmii_tx_en_o   <= in_frame;
      gmii_tx_er_o   <= in_frame;
      gmii_tx_data_o <= '0;
    end
  end
endmodule
