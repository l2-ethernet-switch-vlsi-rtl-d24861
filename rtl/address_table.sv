// address_table: fully associative MAC address -> port table (address learn table).
//
// ENTRIES rows of {valid, MAC address, port, HIT_W-bit hit counter}.
//
// Lookup: read_req_i with read_address_i. One cycle later port_valid_o tells
// whether the address was found and read_port_o gives its port. A hit
// increments the counter of that row and decrements all other rows
// (saturating at the maximum and at 0), so unused rows drift down to 0.
//
// Learning: eof_i with learn_address_i (a frame's source address) and
// learn_port_i (its ingress port). A known address gets its port updated.
// An unknown one is written into the lowest-numbered empty row, or, when the
// table is full, it evicts the row with the smallest counter (the highest
// index among equals). A newly learned row starts with counter value 1 so it
// is not the next victim straight away. Learning and lookup may happen in
// the same cycle; the lookup sees the table as it was before that cycle.
//
// 16 rows, 2-bit counters, increment-on-read / decrement-others and the
// initial value 1 are the published design; saturation and tie-breaking are
// this design's choices (the tie-breaking matches the published waveform).
module address_table #(
  parameter int unsigned ENTRIES = 16,
  parameter int unsigned HIT_W   = 2,
  parameter int unsigned MAC_W   = 48,
  parameter int unsigned PORT_W  = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              read_req_i,
  input  logic [MAC_W-1:0]  read_address_i,
  input  logic              eof_i,
  input  logic [PORT_W-1:0] learn_port_i,
  input  logic [MAC_W-1:0]  learn_address_i,
  output logic              port_valid_o,
  output logic [PORT_W-1:0] read_port_o
);
  localparam int unsigned EW = $clog2(ENTRIES);
  localparam logic [HIT_W-1:0] HIT_MAX = '1;

  logic              valid [ENTRIES];
  logic [MAC_W-1:0]  addr  [ENTRIES];
  logic [PORT_W-1:0] port  [ENTRIES];
  logic [HIT_W-1:0]  hits  [ENTRIES];

  logic          rd_hit;
  logic [EW-1:0] rd_idx;
  logic          lr_hit;
  logic [EW-1:0] lr_idx;
  logic          have_empty;
  logic [EW-1:0] empty_idx;
  logic [EW-1:0] victim_idx;
  logic [EW-1:0] wr_idx;

  always_comb begin
    rd_hit = 1'b0; rd_idx = '0;
    lr_hit = 1'b0; lr_idx = '0;
    have_empty = 1'b0; empty_idx = '0;
    victim_idx = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (valid[i] && addr[i] == read_address_i && !rd_hit) begin
        rd_hit = 1'b1; rd_idx = EW'(i);
      end
      if (valid[i] && addr[i] == learn_address_i && !lr_hit) begin
        lr_hit = 1'b1; lr_idx = EW'(i);
      end
      if (!valid[i] && !have_empty) begin
        have_empty = 1'b1; empty_idx = EW'(i);
      end
      if (hits[i] <= hits[victim_idx]) victim_idx = EW'(i);
    end
    wr_idx = lr_hit ? lr_idx : (have_empty ? empty_idx : victim_idx);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      port_valid_o <= 1'b0;
      read_port_o  <= '0;
      for (int i = 0; i < ENTRIES; i++) begin
        valid[i] <= 1'b0;
        addr[i]  <= '0;
        port[i]  <= '0;
        hits[i]  <= HIT_W'(1);
      end
    end else begin
      port_valid_o <= read_req_i && rd_hit;
      if (read_req_i && rd_hit) read_port_o <= port[rd_idx];
      if (read_req_i && rd_hit) begin
        for (int i = 0; i < ENTRIES; i++) begin
          if (EW'(i) == rd_idx) begin
            if (hits[i] != HIT_MAX) hits[i] <= hits[i] + 1'b1;
          end else if (hits[i] != '0) begin
            hits[i] <= hits[i] - 1'b1;
          end
        end
      end
      if (eof_i) begin
        port[wr_idx] <= learn_port_i;
        if (!lr_hit) begin
          valid[wr_idx] <= 1'b1;
          addr[wr_idx]  <= learn_address_i;
          hits[wr_idx]  <= HIT_W'(1);
        end
      end
    end
  end
endmodule
