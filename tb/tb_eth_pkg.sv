// tb_eth_pkg: frame generation and reference CRC for the switch testbenches.
//
// A test frame is identified by an integer id. Its bytes (destination address
// through FCS) are a pure function of (id, dst, src, len): the 16-bit id sits
// in the first two payload bytes, the other payload bytes are (id*7 + i), and
// the FCS is the IEEE 802.3 CRC-32 computed here bit by bit, MSB-first on the
// non-reflected polynomial with explicit bit reversal, independently of the
// design's own CRC function.
package tb_eth_pkg;

  typedef byte unsigned frame_t[$];

  function automatic logic [31:0] reflect32(input logic [31:0] v);
    logic [31:0] r;
    for (int i = 0; i < 32; i++) r[i] = v[31-i];
    return r;
  endfunction

  // CRC over the frame bytes, wire order (LSB of each byte first)
  function automatic logic [31:0] ref_crc(input frame_t f);
    logic [31:0] c;
    c = 32'hFFFF_FFFF;
    foreach (f[k]) begin
      for (int i = 0; i < 8; i++) begin
        logic fb;
        fb = c[31] ^ f[k][i];
        c  = {c[30:0], 1'b0};
        if (fb) c = c ^ 32'h04C1_1DB7;
      end
    end
    return ~reflect32(c);
  endfunction

  // len = bytes from DA through FCS
  function automatic frame_t make_frame(input int id, input logic [47:0] dst,
                                        input logic [47:0] src, input int len);
    frame_t f;
    logic [31:0] fcs;
    for (int i = 5; i >= 0; i--) f.push_back(dst[8*i +: 8]);
    for (int i = 5; i >= 0; i--) f.push_back(src[8*i +: 8]);
    f.push_back(8'h08);
    f.push_back(8'h00);
    f.push_back(id[15:8]);
    f.push_back(id[7:0]);
    for (int i = 16; i < len - 4; i++) f.push_back(8'((id * 7 + i) & 'hFF));
    fcs = ref_crc(f);
    for (int i = 0; i < 4; i++) f.push_back(fcs[8*i +: 8]);
    return f;
  endfunction

endpackage
