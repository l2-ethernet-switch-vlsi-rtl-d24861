// rx_mac_control: receive side of one switch port.
//
// GMII clock domain: every byte with RX_DV high is written into an async FIFO
// (the only logic on the GMII side, besides the reset synchronizer). RX_DV and
// RX_ER are carried into the switch domain by 2-flop synchronizers.
//
// Switch clock domain (4x the GMII rate, so the FIFO is empty between bytes):
// the FIFO is read whenever it holds a byte. While idle the module counts
// consecutive 0x55 bytes; 0xD5 after at least seven of them starts a frame.
// Every frame byte from the destination address through the FCS is then sent
// out on frame_data_o with frame_valid_o, the first one with frame_sof_o.
// Bytes 8-13 (counting the preamble as 0-6 and the SFD as 7) are latched as
// the destination address and bytes 14-19 as the source address,
// most significant byte first. The CRC-32 runs over all bytes except the last
// four: a 4-byte delay buffer holds the newest bytes, and the CRC is updated
// with the byte leaving the buffer. The frame ends when the synchronized
// RX_DV is low and the FIFO stays empty for two cycles; then frame_eof_o rises
// and frame_error_o shows whether the buffer (the received FCS) differs from
// the complemented CRC, RX_ER was seen, the frame was shorter than 64 bytes,
// or a byte had to be dropped. Both stay high until the next frame_sof_o.
//
// Back-pressure: frame_valid_o, frame_sof_o and frame_data_o come straight
// from the FIFO output, and frame_grant_i (the write controller's ready) in
// the same cycle decides whether the byte is taken. A byte offered while the
// grant is low is dropped (byte_drop_o) and the frame is marked in error; if
// the first byte of a frame cannot be delivered the whole frame is ignored.
// Because bytes come every fourth cycle, the write controller has four
// cycles to write a full block before the next byte needs a place.
//
// The FIFO, the synchronizers, preamble hunting, parse offsets, CRC check
// against a data buffer, held EOF/error and byte dropping follow the
// published design. The two-cycle end-of-frame filter, the runt check and
// the explicit drop flag are this design's choices.
module rx_mac_control
  import switch_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic       switch_clk,
  input  logic       switch_rst_n,
  input  logic       gmii_rx_clk_i,
  input  logic [7:0] gmii_rx_data_i,
  input  logic       gmii_rx_dv_i,
  input  logic       gmii_rx_er_i,
  output logic [7:0] frame_data_o,
  output logic       frame_valid_o,
  output logic       frame_sof_o,
  output logic       frame_eof_o,
  output logic       frame_error_o,
  input  logic       frame_grant_i,
  output mac_t       mac_dst_addr_o,
  output mac_t       mac_src_addr_o,
  output logic       byte_drop_o
);
  typedef enum logic [1:0] {S_HUNT, S_FRAME, S_DISCARD} state_t;

  // ---------------- GMII RX clock domain ----------------
  logic rx_rst_n;
  reset_sync rx_rst_sync_u (.clk(gmii_rx_clk_i), .rst_n_i(switch_rst_n), .rst_n_o(rx_rst_n));

  logic       fifo_full, fifo_empty;
  logic [7:0] fifo_rdata;

  async_fifo #(.WIDTH(8), .DEPTH(FIFO_DEPTH)) rx_fifo_u (
    .wclk   (gmii_rx_clk_i),
    .wrst_n (rx_rst_n),
    .wen    (gmii_rx_dv_i),
    .wdata  (gmii_rx_data_i),
    .wfull  (fifo_full),
    .rclk   (switch_clk),
    .rrst_n (switch_rst_n),
    .ren    (!fifo_empty),
    .rdata  (fifo_rdata),
    .rempty (fifo_empty)
  );

  // ---------------- switch clock domain ----------------
  logic dv_s, er_s;
  sync_2ff #(.WIDTH(2)) dv_er_sync_u (
    .clk(switch_clk), .rst_n(switch_rst_n),
    .d({gmii_rx_dv_i, gmii_rx_er_i}), .q({dv_s, er_s})
  );

  state_t      state;
  logic [2:0]  pre_cnt;
  logic [15:0] byte_cnt;     // position in the frame, SFD = 7
  logic [31:0] crc;
  logic [31:0] dbuf;         // last four bytes, newest in [31:24]
  logic [2:0]  dbuf_n;
  logic        err_acc;
  logic [1:0]  quiet_cnt;
  logic        byte_in, frame_end;
  logic [7:0]  b;

  assign byte_in     = !fifo_empty;
  assign byte_drop_o = (state == S_FRAME) && byte_in && !frame_grant_i;
  assign b         = fifo_rdata;
  assign frame_end = !dv_s && fifo_empty && quiet_cnt != 2'd0;

  // A frame byte is offered in the cycle it leaves the FIFO; frame_grant_i in
  // that same cycle decides whether it is taken.
  assign frame_valid_o = (state == S_FRAME) && byte_in;
  assign frame_sof_o   = frame_valid_o && (byte_cnt == 16'd8);
  assign frame_data_o  = b;

  always_ff @(posedge switch_clk or negedge switch_rst_n) begin
    if (!switch_rst_n) begin
      state          <= S_HUNT;
      pre_cnt        <= '0;
      byte_cnt       <= '0;
      crc            <= CRC_INIT;
      dbuf           <= '0;
      dbuf_n         <= '0;
      err_acc        <= 1'b0;
      quiet_cnt      <= '0;
      frame_eof_o    <= 1'b0;
      frame_error_o  <= 1'b0;
      mac_dst_addr_o <= '0;
      mac_src_addr_o <= '0;
    end else begin
      quiet_cnt     <= (!dv_s && fifo_empty) ? ((quiet_cnt == 2'd3) ? quiet_cnt : quiet_cnt + 1'b1) : '0;

      unique case (state)
        S_HUNT: begin
          if (byte_in) begin
            if (b == PREAMBLE_BYTE) begin
              if (pre_cnt != 3'(PREAMBLE_LEN)) pre_cnt <= pre_cnt + 1'b1;
            end else if (b == SFD_BYTE && pre_cnt == 3'(PREAMBLE_LEN)) begin
              state    <= S_FRAME;
              byte_cnt <= 16'd8;
              crc      <= CRC_INIT;
              dbuf_n   <= '0;
              err_acc  <= er_s;
              pre_cnt  <= '0;
            end else begin
              pre_cnt <= '0;
            end
          end else if (!dv_s && fifo_empty) begin
            pre_cnt <= '0;
          end
        end

        S_FRAME: begin
          if (er_s) err_acc <= 1'b1;
          if (byte_in) begin
            if (byte_cnt != '1) byte_cnt <= byte_cnt + 1'b1;
            if (byte_cnt >= 16'd8  && byte_cnt < 16'd14) mac_dst_addr_o <= {mac_dst_addr_o[MAC_W-9:0], b};
            if (byte_cnt >= 16'd14 && byte_cnt < 16'd20) mac_src_addr_o <= {mac_src_addr_o[MAC_W-9:0], b};
            dbuf <= {b, dbuf[31:8]};
            if (dbuf_n == 3'd4) crc <= crc32_byte(crc, dbuf[7:0]);
            else                dbuf_n <= dbuf_n + 1'b1;
            if (byte_cnt == 16'd8) begin
              if (frame_grant_i) begin
                frame_eof_o   <= 1'b0;
                frame_error_o <= 1'b0;
              end else begin
                state <= S_DISCARD;
              end
            end else if (!frame_grant_i) begin
              err_acc <= 1'b1;
            end
          end else if (frame_end) begin
            state         <= S_HUNT;
            frame_eof_o   <= 1'b1;
            frame_error_o <= err_acc || (dbuf != ~crc) || dbuf_n != 3'd4 ||
                             byte_cnt < 16'(8 + MIN_FRAME);
          end
        end

        S_DISCARD: begin
          if (frame_end) state <= S_HUNT;
        end

        default: state <= S_HUNT;
      endcase
    end
  end
endmodule
