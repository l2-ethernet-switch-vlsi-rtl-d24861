// async_fifo: dual-clock FIFO with Gray-coded pointers.
//
// Moves WIDTH-bit entries from the wclk domain to the rclk domain. Each side
// keeps a binary pointer and its Gray code, one bit wider than the address;
// the Gray pointer of the other side is brought over by two flip-flops.
// wfull is computed in the write domain, rempty in the read domain, both
// conservatively (a pointer seen late only makes the FIFO look fuller/emptier).
// rdata shows the head entry whenever rempty is low (first-word fall-through);
// ren pops it. A push to a full FIFO or a pop of an empty one is ignored.
// DEPTH must be a power of two. The RX path uses it from the GMII RX clock to
// the switch clock, the TX path from the switch clock to the GMII TX clock.
// The Gray-pointer structure is the usual one and this design's choice; the
// published design only states that an asynchronous FIFO is used.
module async_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             wen,
  input  logic [WIDTH-1:0] wdata,
  output logic             wfull,
  input  logic             rclk,
  input  logic             rrst_n,
  input  logic             ren,
  output logic [WIDTH-1:0] rdata,
  output logic             rempty
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2;   // read pointer in write domain
  logic [AW:0] wgray_r1, wgray_r2;   // write pointer in read domain
  logic [AW:0] wbin_next, rbin_next;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // write side
  assign wfull     = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
  assign wbin_next = wbin + (AW+1)'(wen && !wfull);

  always_ff @(posedge wclk) begin
    if (wen && !wfull) mem[wbin[AW-1:0]] <= wdata;
  end

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      wbin     <= wbin_next;
      wgray    <= bin2gray(wbin_next);
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
    end
  end

  // read side
  assign rempty    = (rgray == wgray_r2);
  assign rdata     = mem[rbin[AW-1:0]];
  assign rbin_next = rbin + (AW+1)'(ren && !rempty);

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      rbin     <= rbin_next;
      rgray    <= bin2gray(rbin_next);
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
    end
  end
endmodule
