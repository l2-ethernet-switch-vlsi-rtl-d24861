// switch_pkg: constants and types shared by the 4-port L2 switch.
//
// The switch stores frames in a shared packet memory of NUM_BLOCKS blocks of
// BLOCK_BYTES bytes. Each block carries PAYLOAD_BYTES bytes of frame data and a
// one-byte footer. The memory word is {payload byte 0 .. byte 62, footer}, so
// payload byte k sits in bits [511-8k -: 8] and the footer in bits [7:0].
// The footer holds the 6-bit index of the next block of the frame, an
// end-of-packet flag and one reserved bit. In a block whose eop flag is set
// there is no next block, so this design reuses the next-index field for the
// number of valid payload bytes in that block (0..63).
//
// A VOQ entry is the first block of a frame plus two tags: flood (the frame
// was sent to every egress port, so its blocks are freed only after all ports
// read them) and drop (the frame failed its CRC check; the egress port frees
// its blocks without transmitting).
//
// The sizes (4 ports, 64 x 64-byte blocks, 63 payload bytes, 6-bit next
// index, 16-entry address table with 2-bit counters) are the published ones;
// the footer bit order, the byte count in the eop block and the drop tag are
// this design's own choices.
package switch_pkg;

  localparam int unsigned NUM_PORTS     = 4;
  localparam int unsigned PORT_W        = $clog2(NUM_PORTS);
  localparam int unsigned NUM_BLOCKS    = 64;
  localparam int unsigned IDX_W         = $clog2(NUM_BLOCKS);
  localparam int unsigned BLOCK_BYTES   = 64;
  localparam int unsigned PAYLOAD_BYTES = BLOCK_BYTES - 1;
  localparam int unsigned WORD_W        = 8 * BLOCK_BYTES;
  localparam int unsigned PAYLOAD_W     = 8 * PAYLOAD_BYTES;
  localparam int unsigned MAC_W         = 48;

  // Ethernet framing constants
  localparam logic [7:0] PREAMBLE_BYTE = 8'h55;
  localparam logic [7:0] SFD_BYTE      = 8'hD5;
  localparam int unsigned PREAMBLE_LEN = 7;
  localparam int unsigned MIN_FRAME    = 64;   // DA..FCS
  localparam logic [31:0] CRC_INIT     = 32'hFFFF_FFFF;

  typedef logic [IDX_W-1:0]  blk_idx_t;
  typedef logic [PORT_W-1:0] port_t;
  typedef logic [MAC_W-1:0]  mac_t;

  typedef struct packed {
    logic [IDX_W-1:0] next_idx;  // next block, or byte count when eop
    logic             eop;
    logic             rsvd;
  } footer_t;

  typedef struct packed {
    logic     drop;
    logic     flood;
    blk_idx_t ptr;
  } voq_entry_t;

  localparam int unsigned VOQ_W = $bits(voq_entry_t);

  // Reflected CRC-32 (IEEE 802.3, polynomial 0x04C11DB7) updated with one byte,
  // least significant bit first as the bits appear on the wire.
  function automatic logic [31:0] crc32_byte(input logic [31:0] crc, input logic [7:0] d);
    logic [31:0] c;
    c = crc;
    for (int i = 0; i < 8; i++) begin
      if (c[0] ^ d[i]) c = (c >> 1) ^ 32'hEDB8_8320;
      else             c = c >> 1;
    end
    return c;
  endfunction

endpackage
