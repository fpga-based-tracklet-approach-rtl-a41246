// pair_scanner: issues every (slot, i, j) combination, one per clock, for a list of slots.
//
// A slot is a pair of bins (a virtual-module pair for the tracklet engine, a virtual module
// seen by both projections and stubs for the match engine) holding cnt_a and cnt_b entries.
// After `start` the scanner walks the non-empty slots in increasing order and, inside each,
// all i < cnt_a, j < cnt_b (j fastest). Empty slots cost no cycles: the next slot is found
// with a priority search over the non-empty mask. `enable` low freezes the walk (used to end
// it when the step's time window closes); `busy` falls after the last combination.
module pair_scanner #(
  parameter int NSLOT = 8,
  parameter int CW    = 5,
  localparam int SW   = (NSLOT > 1) ? $clog2(NSLOT) : 1
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     start,
  input  logic                     enable,
  input  logic [NSLOT-1:0][CW-1:0] cnt_a,
  input  logic [NSLOT-1:0][CW-1:0] cnt_b,
  output logic                     valid,
  output logic [SW-1:0]            slot,
  output logic [CW-1:0]            i,
  output logic [CW-1:0]            j
);
  logic [NSLOT-1:0] nonempty;
  logic             busy;
  logic [SW-1:0]    s;
  logic [CW-1:0]    ii, jj;
  logic             found_first, found_next;
  logic [SW-1:0]    first_slot, next_slot;

  always_comb begin
    for (int k = 0; k < NSLOT; k++) nonempty[k] = (cnt_a[k] != '0) && (cnt_b[k] != '0);
    found_first = 1'b0; first_slot = '0;
    for (int k = NSLOT - 1; k >= 0; k--)
      if (nonempty[k]) begin found_first = 1'b1; first_slot = SW'(k); end
    found_next = 1'b0; next_slot = '0;
    for (int k = NSLOT - 1; k >= 0; k--)
      if (nonempty[k] && k > int'(s)) begin found_next = 1'b1; next_slot = SW'(k); end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0; s <= '0; ii <= '0; jj <= '0;
    end else if (start) begin
      busy <= found_first; s <= first_slot; ii <= '0; jj <= '0;
    end else if (busy && enable) begin
      if (jj + 1'b1 < cnt_b[s]) jj <= jj + 1'b1;
      else begin
        jj <= '0;
        if (ii + 1'b1 < cnt_a[s]) ii <= ii + 1'b1;
        else begin
          ii <= '0;
          s <= next_slot;
          busy <= found_next;
        end
      end
    end
  end

  assign valid = busy && enable;
  assign slot  = s;
  assign i     = ii;
  assign j     = jj;
endmodule
