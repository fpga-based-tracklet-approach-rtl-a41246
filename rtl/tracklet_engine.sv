// tracklet_engine: selects the stub pairs of one seeding layer pair that may form a track.
//
// The engine walks every allowed pair of virtual modules (inner layer VM, outer layer VM)
// and, inside each, every combination of an inner and an outer stub, one combination per
// clock (pair_scanner skips empty VM pairs at no cost). A VM pair is allowed when the phi
// slices differ by at most one. A stub pair is kept when it is consistent with a track of
// pT > 2 GeV from the beam line with |z0| < 15 cm:
//   |phi_in - phi_out| <= KMAX_LSB * (R_out - R_in)
//   |z_in * R_out - z_out * R_in| < Z0MAX_MM * (R_out - R_in)
// (straight line in r-z through the two stubs, extrapolated to r = 0). Kept pairs are
// written to the stub-pair memory LATENCY cycles (5) after the combination was read. The
// walk stops at the end of the 36-cycle window (truncation). The pair cuts follow the
// paper's seeding conditions; VM pair table and integer form are this design's choices.
module tracklet_engine
  import tracklet_pkg::*;
#(
  parameter int SEED    = 0,
  parameter int LATENCY = LAT_TE,
  parameter int CW      = 5
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   start,
  output logic [7:0]             rd_evt,
  input  logic [NVM-1:0][CW-1:0] in_cnt,
  output logic [2:0]             in_bin,
  output logic [3:0]             in_addr,
  input  vmstub_t                in_data,
  input  logic [NVM-1:0][CW-1:0] out_cnt,
  output logic [2:0]             out_bin,
  output logic [3:0]             out_addr,
  input  vmstub_t                out_data,
  output logic                   clr,
  output logic [7:0]             clr_evt,
  output logic                   wr_en,
  output logic [7:0]             wr_evt,
  output stubpair_t              wr_data
);
  localparam int RIN  = R_CM[SEED_IN[SEED]];
  localparam int ROUT = R_CM[SEED_OUT[SEED]];
  localparam int DR   = ROUT - RIN;
  localparam int NP   = NVM * NVM;

  logic       active, first;
  logic [7:0] cyc, evt;
  step_ctrl #(.STEP(STEP_CYCLES), .EW(8)) u_ctrl (
    .clk, .rst, .start, .active, .cyc, .evt, .first);

  // slot p = inner VM (p / NVM), outer VM (p % NVM); disallowed pairs get count 0
  logic [NP-1:0][CW-1:0] cnt_a, cnt_b;
  always_comb begin
    for (int p = 0; p < NP; p++) begin
      automatic int iv = p / NVM;
      automatic int ov = p % NVM;
      automatic bit ok = iabs((iv >> 1) - (ov >> 1)) <= 1;
      cnt_a[p] = ok ? in_cnt[iv] : '0;
      cnt_b[p] = ok ? out_cnt[ov] : '0;
    end
  end

  logic       sv;
  logic [5:0] slot;
  logic [CW-1:0] si, sj;
  pair_scanner #(.NSLOT(NP), .CW(CW)) u_scan (
    .clk, .rst, .start(first), .enable(active), .cnt_a, .cnt_b,
    .valid(sv), .slot, .i(si), .j(sj));

  assign rd_evt   = evt;
  assign in_bin   = slot[5:3];
  assign out_bin  = slot[2:0];
  assign in_addr  = si[3:0];
  assign out_addr = sj[3:0];
  assign clr      = first;
  assign clr_evt  = evt;

  logic       v1;
  logic [7:0] e1;
  always_ff @(posedge clk) begin
    if (rst) v1 <= 1'b0;
    else v1 <= sv;
    e1 <= evt;
  end

  logic pass;
  always_comb begin
    automatic int dphi = int'(in_data.stub.phi) - int'(out_data.stub.phi);
    automatic int zc   = int'(in_data.stub.z) * ROUT - int'(out_data.stub.z) * RIN;
    pass = (iabs(dphi) <= KMAX_LSB * DR) && (iabs(zc) < Z0MAX_MM * DR);
  end

  stubpair_t pr;
  always_comb begin
    pr.inner = in_data;
    pr.outer = out_data;
  end

  logic [1+8+$bits(stubpair_t)-1:0] pipe_in, pipe_out;
  assign pipe_in = {v1 && pass, e1, pr};
  delay_line #(.W($bits(pipe_in)), .D(LATENCY - 1)) u_dly (
    .clk, .rst, .din(pipe_in), .dout(pipe_out));
  assign {wr_en, wr_evt, wr_data} = pipe_out;
endmodule
