// projection_transceiver: splits the projections of one layer between this sector and its
// two neighbours, and accepts the neighbours' projections.
//
// A track with pT > 2 GeV crosses at most two sectors, so a projection can only land in this
// sector or the next one on either side. During its 36-cycle window the transceiver reads
// the layer's projection memory one entry per clock. A projection with phi < 0 is sent on the
// link to the lower ("minus") neighbour, one with phi >= one sector on the link to the upper
// ("plus") neighbour, both with phi re-expressed in that neighbour's coordinates; the others
// stay here. Every result appears LATENCY = 13 cycles after its read. Link words carry the
// event number. Projections arriving from the neighbours are written straight into the
// output memory, marked with the side they came from so their matches can be returned.
// Output write ports: 0 = local, 1 = from minus neighbour, 2 = from plus neighbour.
// The serial links themselves (about 76 cycles) are outside this block.
module projection_transceiver
  import tracklet_pkg::*;
#(
  parameter int LATENCY = LAT_PT,
  parameter int CW      = 6
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              start,
  output logic [7:0]        rd_evt,
  output logic [4:0]        rd_addr,
  input  logic [CW-1:0]     rd_cnt,
  input  proj_t             rd_data,
  output logic              clr,
  output logic [7:0]        clr_evt,
  output logic              tx_minus_en,
  output projlink_t         tx_minus,
  output logic              tx_plus_en,
  output projlink_t         tx_plus,
  input  logic              rx_minus_en,
  input  projlink_t         rx_minus,
  input  logic              rx_plus_en,
  input  projlink_t         rx_plus,
  output logic [2:0]        wr_en,
  output logic [2:0][7:0]   wr_evt,
  output proj_t [2:0]       wr_data
);
  logic       active, first;
  logic [7:0] cyc, evt;
  step_ctrl #(.STEP(STEP_CYCLES), .EW(8)) u_ctrl (
    .clk, .rst, .start, .active, .cyc, .evt, .first);

  logic [5:0] addr;
  logic       issue, v1;
  logic [7:0] e1;
  assign issue   = active && (CW'(addr) < rd_cnt) && (addr < 6'd32);
  assign rd_evt  = evt;
  assign rd_addr = addr[4:0];
  assign clr     = first;
  assign clr_evt = evt;

  always_ff @(posedge clk) begin
    if (rst || start) addr <= '0;
    else if (issue) addr <= addr + 1'b1;
    if (rst) v1 <= 1'b0;
    else v1 <= issue;
    e1 <= evt;
  end

  logic  to_minus, to_plus;
  proj_t p;
  always_comb begin
    p = rd_data;
    to_minus = rd_data.phi < 0;
    to_plus  = rd_data.phi >= 14'(SECTOR_PHI);
    if (to_minus) p.phi = rd_data.phi + 14'(SECTOR_PHI);
    if (to_plus)  p.phi = rd_data.phi - 14'(SECTOR_PHI);
  end

  localparam int DW = 3 + 8 + $bits(proj_t);
  logic [DW-1:0] pipe_in, pipe_out;
  logic          d_loc, d_minus, d_plus;
  logic [7:0]    d_evt;
  proj_t         d_p;
  assign pipe_in = {v1 && !to_minus && !to_plus, v1 && to_minus, v1 && to_plus, e1, p};
  delay_line #(.W(DW), .D(LATENCY - 1)) u_dly (
    .clk, .rst, .din(pipe_in), .dout(pipe_out));
  assign {d_loc, d_minus, d_plus, d_evt, d_p} = pipe_out;

  assign tx_minus_en = d_minus;
  assign tx_plus_en  = d_plus;
  always_comb begin
    tx_minus.evt = d_evt; tx_minus.proj = d_p;
    tx_plus.evt  = d_evt; tx_plus.proj  = d_p;
    wr_en   = {rx_plus_en, rx_minus_en, d_loc};
    wr_evt  = {rx_plus.evt, rx_minus.evt, d_evt};
    wr_data[0] = d_p;
    wr_data[1] = rx_minus.proj; wr_data[1].src = SRC_MINUS;
    wr_data[2] = rx_plus.proj;  wr_data[2].src = SRC_PLUS;
  end
endmodule
