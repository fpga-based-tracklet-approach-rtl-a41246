// track_fit: linearized least-squares fit of the tracklets of one seed.
//
// During its 36-cycle window the fit reads one tracklet per clock, together with the match
// (if any) found for it in each of the four layers the seed projects to; those matches sit
// in per-layer memories indexed by tracklet. A tracklet with at least MINMATCH matches
// becomes a track. The residuals of the matched stubs (the two seed stubs have residual
// zero) are fitted with a straight line in r, separately in r-phi and r-z, and the line
// corrects the tracklet parameters:
//   phi0 += sum_j A_j dphi_j   k  -= sum_j B_j dphi_j   z0 += sum_j A_j dz_j   t += sum_j B_j dz_j
// A_j and B_j are the derivatives of the least-squares intercept and slope with respect to
// the residual at radius r_j; they depend only on the seed and on which layers were hit, so
// they are computed at elaboration for all 16 hit patterns (Q12 for A, Q16 for B):
//   D = N*S_rr - S_r^2,  A_j = (S_rr - r_j*S_r)/D,  B_j = (N*r_j - S_r)/D
// over the N radii used. The track carries the corrected parameters, the hit pattern and
// the identity of the stub in every hit layer. Tracks appear LATENCY = 26 cycles after
// their tracklet was read. The paper specifies a linearized chi2 fit with pre-calculated
// derivatives; equal weights, the straight-line model and the output format are this
// design's choices, and no chi2 value is produced.
module track_fit
  import tracklet_pkg::*;
#(
  parameter int SEED     = 0,
  parameter int LATENCY  = LAT_TF,
  parameter int MINMATCH = 1,
  parameter int CW       = 6
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        start,
  output logic [7:0]                  rd_evt,
  output logic [TIDXW-1:0]            rd_addr,
  input  logic [CW-1:0]               tl_cnt,
  input  tracklet_t                   tl_data,
  input  logic [3:0][NTRK-1:0]        fm_hit,     // per projected layer: bin holds a match
  input  match_t [3:0]                fm_data,
  output logic                        first,
  output logic                        trk_en,
  output track_t                      trk
);
  localparam int RIN  = R_CM[SEED_IN[SEED]];
  localparam int ROUT = R_CM[SEED_OUT[SEED]];

  function automatic longint coef(input int mask, input int j, input bit slope);
    longint n = 2, sr = longint'(RIN + ROUT), srr = longint'(RIN * RIN + ROUT * ROUT), d, rj;
    for (int q = 0; q < 4; q++)
      if (mask[q]) begin
        n++; sr += longint'(R_CM[proj_layer(SEED, q)]);
        srr += longint'(R_CM[proj_layer(SEED, q)] * R_CM[proj_layer(SEED, q)]);
      end
    d  = n * srr - sr * sr;
    rj = longint'(R_CM[proj_layer(SEED, j)]);
    if (slope) return div_round((n * rj - sr) * 65536, d);
    return div_round((srr - rj * sr) * 4096, d);
  endfunction

  logic signed [31:0] ca [16][4];
  logic signed [31:0] cb [16][4];
  for (genvar m = 0; m < 16; m++) begin : g_m
    for (genvar j = 0; j < 4; j++) begin : g_j
      localparam int CA = int'(coef(m, j, 1'b0));
      localparam int CB = int'(coef(m, j, 1'b1));
      assign ca[m][j] = CA;
      assign cb[m][j] = CB;
    end
  end

  logic       active;
  logic [7:0] cyc, evt;
  step_ctrl #(.STEP(STEP_CYCLES), .EW(8)) u_ctrl (
    .clk, .rst, .start, .active, .cyc, .evt, .first);

  logic [5:0] addr;
  logic       issue, v1;
  logic [3:0] hit1;
  assign issue   = active && (CW'(addr) < tl_cnt) && (addr < 6'(NTRK));
  assign rd_evt  = evt;
  assign rd_addr = addr[TIDXW-1:0];

  always_ff @(posedge clk) begin
    if (rst || start) addr <= '0;
    else if (issue) addr <= addr + 1'b1;
    if (rst) v1 <= 1'b0;
    else v1 <= issue;
    for (int j = 0; j < 4; j++) hit1[j] <= fm_hit[j][addr[TIDXW-1:0]];
  end

  logic [TIDXW-1:0] addr1;
  always_ff @(posedge clk) addr1 <= addr[TIDXW-1:0];

  track_t tr;
  logic   ok;
  always_comb begin
    automatic longint sap = 0, sbp = 0, saz = 0, sbz = 0;
    automatic int nm = 0;
    for (int j = 0; j < 4; j++)
      if (hit1[j]) begin
        nm++;
        sap += longint'(ca[hit1][j]) * longint'(fm_data[j].dphi);
        sbp += longint'(cb[hit1][j]) * longint'(fm_data[j].dphi);
        saz += longint'(ca[hit1][j]) * longint'(fm_data[j].dz);
        sbz += longint'(cb[hit1][j]) * longint'(fm_data[j].dz);
      end
    ok = v1 && (nm >= MINMATCH);
    tr.seed = 2'(SEED);
    tr.tidx = addr1;
    tr.k    = 16'(longint'(tl_data.k) - (sbp >>> 8));
    tr.phi0 = 14'(longint'(tl_data.phi0) + (sap >>> 12));
    tr.t    = 16'(longint'(tl_data.t) + (sbz >>> 8));
    tr.z0   = ZW'(longint'(tl_data.z0) + (saz >>> 12));
    tr.hit  = '0;
    tr.sid  = '0;
    tr.hit[SEED_IN[SEED]]  = 1'b1;
    tr.hit[SEED_OUT[SEED]] = 1'b1;
    tr.sid[SEED_IN[SEED]]  = {SRC_LOCAL, tl_data.idx_in};
    tr.sid[SEED_OUT[SEED]] = {SRC_LOCAL, tl_data.idx_out};
    for (int j = 0; j < 4; j++)
      if (hit1[j]) begin
        tr.hit[proj_layer(SEED, j)] = 1'b1;
        tr.sid[proj_layer(SEED, j)] = fm_data[j].sid;
      end
  end


  localparam int DW = 1 + $bits(track_t);
  logic [DW-1:0] pipe_in, pipe_out;
  assign pipe_in = {ok, tr};
  delay_line #(.W(DW), .D(LATENCY - 1)) u_dly (
    .clk, .rst, .din(pipe_in), .dout(pipe_out));
  assign {trk_en, trk} = pipe_out;
endmodule
