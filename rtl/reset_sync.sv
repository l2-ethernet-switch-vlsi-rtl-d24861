// reset_sync: active-low reset synchronizer.
//
// Assertion of rst_n_i reaches rst_n_o at once (asynchronously); de-assertion
// passes two flip-flops clocked by clk, so the target domain leaves reset on
// its own clock edge. One instance is used per clock domain (each GMII RX
// clock, the derived GMII TX clock and the switch clock), as the published
// design does for the write side of its RX FIFO.
module reset_sync (
  input  logic clk,
  input  logic rst_n_i,
  output logic rst_n_o
);
  logic stage1;

  always_ff @(posedge clk or negedge rst_n_i) begin
    if (!rst_n_i) begin
      stage1  <= 1'b0;
      rst_n_o <= 1'b0;
    end else begin
      stage1  <= 1'b1;
      rst_n_o <= stage1;
    end
  end
endmodule
