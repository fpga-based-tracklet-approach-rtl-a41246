// tracklet_calculator: computes the tracklet parameters of a stub pair and its projections.
//
// For each stub pair (one per clock during the 36-cycle window) the calculator solves the
// track through the two stubs and the beam line, in the small-angle form of a helix:
//   phi(r) = phi0 - k*r      k  = (phi_in - phi_out) / (R_out - R_in)   (k = rinv/2)
//   z(r)   = z0   + t*r      t  = (z_out - z_in)     / (R_out - R_in)
// The division is a multiplication by the per-seed constant 2^16/(R_out - R_in); k and t
// are kept in Q8. Tracklets with |k| > KMAX (pT < 2 GeV) or |z0| >= 15 cm are rejected.
// Accepted tracklets get consecutive indices within the event (at most NTRK, the rest is
// truncated), are written to the tracklet memory (for the final fit) and are projected to
// the four layers not used by the seed; a projection is written to the projection memory of
// its layer when its phi lies within one sector of this one and z is representable.
// Results appear LATENCY = 43 cycles after the pair was read. The formulas are standard
// tracking practice; the paper names the step and its latency but gives no equations.
module tracklet_calculator
  import tracklet_pkg::*;
#(
  parameter int SEED    = 0,
  parameter int LATENCY = LAT_TC,
  parameter int CW      = 7
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic                          start,
  output logic [7:0]                    rd_evt,
  output logic [5:0]                    rd_addr,
  input  logic [CW-1:0]                 rd_cnt,
  input  stubpair_t                     rd_data,
  output logic                          clr,
  output logic [7:0]                    clr_evt,
  output logic                          tl_en,
  output logic [7:0]                    tl_evt,
  output tracklet_t                     tl_data,
  output logic [NLAYER-1:0]             pj_en,
  output proj_t [NLAYER-1:0]            pj_data
);
  localparam int RIN  = R_CM[SEED_IN[SEED]];
  localparam int ROUT = R_CM[SEED_OUT[SEED]];
  localparam int INV  = int'(div_round(65536, longint'(ROUT - RIN)));

  logic       active, first;
  logic [7:0] cyc, evt;
  step_ctrl #(.STEP(STEP_CYCLES), .EW(8)) u_ctrl (
    .clk, .rst, .start, .active, .cyc, .evt, .first);

  logic [6:0] addr;
  logic       issue, v1;
  logic [7:0] e1;
  logic [TIDXW:0] ntl;      // tracklets accepted so far in this event

  assign issue   = active && (CW'(addr) < rd_cnt) && (addr < 7'd64);
  assign rd_evt  = evt;
  assign rd_addr = addr[5:0];
  assign clr     = first;
  assign clr_evt = evt;

  // ---- parameter calculation on the data read in the previous cycle ----
  int k, phi0, t, z0;
  logic pass;
  tracklet_t tl;
  proj_t [NLAYER-1:0] pj;
  logic [NLAYER-1:0] pjv;
  always_comb begin
    automatic int dphi = int'(rd_data.inner.stub.phi) - int'(rd_data.outer.stub.phi);
    automatic int dz   = int'(rd_data.outer.stub.z) - int'(rd_data.inner.stub.z);
    k    = (dphi * INV) >>> 8;
    phi0 = int'(rd_data.inner.stub.phi) + ((k * RIN) >>> 8);
    t    = (dz * INV) >>> 8;
    z0   = int'(rd_data.inner.stub.z) - ((t * RIN) >>> 8);
    pass = v1 && (iabs(k) <= KMAX_Q8) && (iabs(z0) < Z0MAX_MM) && (ntl < (TIDXW+1)'(NTRK));
    tl.idx_in  = rd_data.inner.idx;
    tl.idx_out = rd_data.outer.idx;
    tl.k       = 16'(k);
    tl.phi0    = 14'(phi0);
    tl.t       = 16'(t);
    tl.z0      = ZW'(z0);
    for (int l = 0; l < NLAYER; l++) begin
      automatic int pphi = phi0 - ((k * R_CM[l]) >>> 8);
      automatic int pz   = z0 + ((t * R_CM[l]) >>> 8);
      pj[l].src   = SRC_LOCAL;
      pj[l].seed  = 2'(SEED);
      pj[l].tidx  = ntl[TIDXW-1:0];
      pj[l].layer = 3'(l);
      pj[l].phi   = 14'(pphi);
      pj[l].z     = ZW'(pz);
      pjv[l] = pass && (l != SEED_IN[SEED]) && (l != SEED_OUT[SEED]) &&
               (pphi >= -SECTOR_PHI) && (pphi < 2 * SECTOR_PHI) &&
               (pz >= -(1 << (ZW-1))) && (pz < (1 << (ZW-1)));
    end
  end

  always_ff @(posedge clk) begin
    if (rst || start) addr <= '0;
    else if (issue) addr <= addr + 1'b1;
    if (rst) v1 <= 1'b0;
    else v1 <= issue;
    e1 <= evt;
    if (rst || first) ntl <= '0;
    else if (pass) ntl <= ntl + 1'b1;
  end

  localparam int PW = 1 + 8 + $bits(tracklet_t) + NLAYER + NLAYER * $bits(proj_t);
  logic [PW-1:0] pipe_in, pipe_out;
  assign pipe_in = {pass, e1, tl, pjv, pj};
  delay_line #(.W(PW), .D(LATENCY - 1)) u_dly (
    .clk, .rst, .din(pipe_in), .dout(pipe_out));
  assign {tl_en, tl_evt, tl_data, pj_en, pj_data} = pipe_out;
endmodule
