// match_transceiver: returns matches to the sector that owns the tracklet.
//
// During its 36-cycle window the transceiver reads the layer's match memory one match per
// clock. A match of a local tracklet is written to the track fit's match memory; a match of
// a tracklet that a neighbour projected into this sector is sent back on the link to that
// neighbour. Each result appears LATENCY = 12 cycles after its read. Matches arriving from
// the neighbours belong to local tracklets; they are written to the track-fit memory with
// the stub marked as lying in that neighbour's sector (so that stubs of different sectors
// never look identical to the duplicate removal). Link words carry the event number.
// Output write ports: 0 = local, 1 = from minus neighbour, 2 = from plus neighbour; the
// owner of the memory selects the (seed, tracklet index) bin from the match.
module match_transceiver
  import tracklet_pkg::*;
#(
  parameter int LATENCY = LAT_MT,
  parameter int CW      = 6
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              start,
  output logic [7:0]        rd_evt,
  output logic [4:0]        rd_addr,
  input  logic [CW-1:0]     rd_cnt,
  input  match_t            rd_data,
  output logic              clr,
  output logic [7:0]        clr_evt,
  output logic              tx_minus_en,
  output matchlink_t        tx_minus,
  output logic              tx_plus_en,
  output matchlink_t        tx_plus,
  input  logic              rx_minus_en,
  input  matchlink_t        rx_minus,
  input  logic              rx_plus_en,
  input  matchlink_t        rx_plus,
  output logic [2:0]        wr_en,
  output logic [2:0][7:0]   wr_evt,
  output match_t [2:0]      wr_data
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

  localparam int DW = 3 + 8 + $bits(match_t);
  logic [DW-1:0] pipe_in, pipe_out;
  logic          d_loc, d_minus, d_plus;
  logic [7:0]    d_evt;
  match_t        d_m;
  assign pipe_in = {v1 && rd_data.src == SRC_LOCAL, v1 && rd_data.src == SRC_MINUS,
                    v1 && rd_data.src == SRC_PLUS, e1, rd_data};
  delay_line #(.W(DW), .D(LATENCY - 1)) u_dly (
    .clk, .rst, .din(pipe_in), .dout(pipe_out));
  assign {d_loc, d_minus, d_plus, d_evt, d_m} = pipe_out;

  assign tx_minus_en = d_minus;
  assign tx_plus_en  = d_plus;
  always_comb begin
    tx_minus.evt = d_evt; tx_minus.m = d_m;
    tx_plus.evt  = d_evt; tx_plus.m  = d_m;
    wr_en  = {rx_plus_en, rx_minus_en, d_loc};
    wr_evt = {rx_plus.evt, rx_minus.evt, d_evt};
    wr_data[0] = d_m;
    wr_data[1] = rx_minus.m; wr_data[1].src = SRC_LOCAL;
    wr_data[1].sid = {SRC_MINUS, rx_minus.m.sid[SIDXW-1:0]};
    wr_data[2] = rx_plus.m;  wr_data[2].src = SRC_LOCAL;
    wr_data[2].sid = {SRC_PLUS, rx_plus.m.sid[SIDXW-1:0]};
  end
endmodule
