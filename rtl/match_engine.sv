// match_engine: pairs projections with the stubs of the same virtual module in one layer.
//
// The engine walks the virtual modules that hold both projections and stubs and, in each,
// every projection/stub combination, one per clock (pair_scanner; empty VMs cost nothing),
// until the 36-cycle window closes. A combination is kept as a match candidate when the
// stub lies inside a coarse window around the projection, twice the final window used by
// the match calculator in both phi and z. Candidates (projection plus stub) are written
// LATENCY = 6 cycles after the combination was read. The coarse pre-selection is this
// design's simplification of the paper's "search windows".
module match_engine
  import tracklet_pkg::*;
#(
  parameter int LAYER   = 0,
  parameter int LATENCY = LAT_ME,
  parameter int CW      = 5
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   start,
  output logic [7:0]             rd_evt,
  input  logic [NVM-1:0][CW-1:0] pj_cnt,
  output logic [2:0]             pj_bin,
  output logic [3:0]             pj_addr,
  input  proj_t                  pj_data,
  input  logic [NVM-1:0][CW-1:0] st_cnt,
  output logic [2:0]             st_bin,
  output logic [3:0]             st_addr,
  input  vmstub_t                st_data,
  output logic                   clr,
  output logic [7:0]             clr_evt,
  output logic                   wr_en,
  output logic [7:0]             wr_evt,
  output cand_t                  wr_data
);
  logic       active, first;
  logic [7:0] cyc, evt;
  step_ctrl #(.STEP(STEP_CYCLES), .EW(8)) u_ctrl (
    .clk, .rst, .start, .active, .cyc, .evt, .first);

  logic          sv;
  logic [2:0]    slot;
  logic [CW-1:0] si, sj;
  pair_scanner #(.NSLOT(NVM), .CW(CW)) u_scan (
    .clk, .rst, .start(first), .enable(active), .cnt_a(pj_cnt), .cnt_b(st_cnt),
    .valid(sv), .slot, .i(si), .j(sj));

  assign rd_evt  = evt;
  assign pj_bin  = slot;
  assign st_bin  = slot;
  assign pj_addr = si[3:0];
  assign st_addr = sj[3:0];
  assign clr     = first;
  assign clr_evt = evt;

  logic       v1;
  logic [7:0] e1;
  always_ff @(posedge clk) begin
    if (rst) v1 <= 1'b0;
    else v1 <= sv;
    e1 <= evt;
  end

  logic  pass;
  cand_t c;
  always_comb begin
    automatic int dphi = int'(st_data.stub.phi) - int'(pj_data.phi);
    automatic int dz   = int'(st_data.stub.z) - int'(pj_data.z);
    pass = v1 && (iabs(dphi) <= 2 * PHIWIN) && (iabs(dz) <= 2 * ZWIN_MM[LAYER]);
    c.proj = pj_data;
    c.stub = st_data;
  end

  localparam int DW = 1 + 8 + $bits(cand_t);
  logic [DW-1:0] pipe_in, pipe_out;
  assign pipe_in = {pass, e1, c};
  delay_line #(.W(DW), .D(LATENCY - 1)) u_dly (
    .clk, .rst, .din(pipe_in), .dout(pipe_out));
  assign {wr_en, wr_evt, wr_data} = pipe_out;
endmodule
