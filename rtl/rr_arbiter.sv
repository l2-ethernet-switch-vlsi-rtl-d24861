// rr_arbiter: round-robin arbiter for N requesters.
//
// gnt_o is a one-hot grant (or zero when nothing requests), computed
// combinationally from req_i and a priority pointer. When advance_i is high
// and something is granted, the pointer moves to the requester after the
// winner, so every requester is served within N grants. Used by the switch
// arbiter for each shared resource.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req_i,
  input  logic                 advance_i,
  output logic [N-1:0]         gnt_o,
  output logic [$clog2(N)-1:0] idx_o,
  output logic                 valid_o
);
  logic [$clog2(N)-1:0] ptr;

  always_comb begin
    gnt_o   = '0;
    idx_o   = '0;
    valid_o = 1'b0;
    for (int k = 0; k < N; k++) begin
      int unsigned j;
      j = (int'(ptr) + k) % N;
      if (!valid_o && req_i[j]) begin
        valid_o  = 1'b1;
        idx_o    = j[$clog2(N)-1:0];
        gnt_o[j] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (advance_i && valid_o) ptr <= (idx_o == $clog2(N)'(N-1)) ? '0 : idx_o + 1'b1;
  end
endmodule
