// sync_2ff: two-flip-flop synchronizer.
//
// Carries a slowly changing signal (GMII RX_DV and RX_ER) into the clock domain
// of clk. Output q follows d two clock edges later; both stages reset to 0
// asynchronously. The paper's RX path uses exactly this 2-stage synchronizer
// for data valid and error; WIDTH lets one instance carry several unrelated
// level signals (each bit is synchronized on its own).
module sync_2ff #(
  parameter int unsigned WIDTH = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);
  logic [WIDTH-1:0] meta;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      meta <= '0;
      q    <= '0;
    end else begin
      meta <= d;
      q    <= meta;
    end
  end
endmodule
