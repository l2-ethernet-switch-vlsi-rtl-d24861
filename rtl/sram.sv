// sram: shared packet memory, NUM_BLOCKS words of WORD_W bits.
//
// One write port and one read port, each with one cycle of latency: a write
// presented with we is stored at the clock edge; a read presented with re
// returns rdata, with rvalid high, in the following cycle. A read of the block
// written in the same cycle returns the old contents. The default size, 64
// blocks of 64 bytes (4 KB) built from registers with 1R1W ports, is the
// published one; the write-then-read ordering is this design's choice.
module sram #(
  parameter int unsigned NUM_BLOCKS = 64,
  parameter int unsigned WORD_W     = 512
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          we,
  input  logic [$clog2(NUM_BLOCKS)-1:0] w_addr,
  input  logic [WORD_W-1:0]             wdata,
  input  logic                          re,
  input  logic [$clog2(NUM_BLOCKS)-1:0] r_addr,
  output logic [WORD_W-1:0]             rdata,
  output logic                          rvalid
);
  logic [WORD_W-1:0] mem [NUM_BLOCKS];

  always_ff @(posedge clk) begin
    if (we) mem[w_addr] <= wdata;
    if (re) rdata <= mem[r_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rvalid <= 1'b0;
    else        rvalid <= re;
  end
endmodule
