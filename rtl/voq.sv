// voq: virtual output queue of one egress port.
//
// A FIFO of DEPTH entries, each the first memory block of a stored frame with
// its flood and drop tags. ptr_o/ptr_valid_o show the head; read_req_i pops
// it when ptr_valid_o is high (the egress TX ready signal). write_req_i
// pushes ptr_i. Two same-cycle cases keep the crossbar-to-TX path at full
// rate: on an empty queue a push is visible on ptr_o in the same cycle and
// can be popped at once (bypass), and on a full queue a push and a pop in
// the same cycle both take effect. A push into a full queue without a pop is
// lost and reported on drop_o. Both same-cycle cases are from the published
// design; the depth (64, one per memory block, which makes overflow
// impossible in the switch) is this design's choice.
module voq #(
  parameter int unsigned DEPTH = 64,
  parameter int unsigned WIDTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             write_req_i,
  input  logic [WIDTH-1:0] ptr_i,
  input  logic             read_req_i,
  output logic [WIDTH-1:0] ptr_o,
  output logic             ptr_valid_o,
  output logic             full_o,
  output logic             drop_o
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    rd_ptr, wr_ptr;
  logic [AW:0]      count;
  logic             empty, do_pop, do_push, bypass;

  assign empty       = (count == '0);
  assign full_o      = (count == (AW+1)'(DEPTH));
  assign bypass      = empty && write_req_i;
  assign ptr_valid_o = !empty || write_req_i;
  assign ptr_o       = empty ? ptr_i : mem[rd_ptr];
  assign do_pop      = read_req_i && ptr_valid_o;
  assign do_push     = write_req_i && (!full_o || do_pop);
  assign drop_o      = write_req_i && !do_push;

  always_ff @(posedge clk) begin
    if (do_push && !(bypass && do_pop)) mem[wr_ptr] <= ptr_i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else if (bypass && do_pop) begin
      // entry passes straight through, nothing stored
    end else begin
      if (do_push) wr_ptr <= (wr_ptr == AW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= (rd_ptr == AW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end
endmodule
