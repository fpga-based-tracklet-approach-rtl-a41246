// tb_tracklet_calculator: builds stub pairs from tracks with known parameters (curvature k,
// phi0, slope t, z0) on the layer radii of seed 1 (layers 3 and 4), runs the calculator
// and checks the recovered parameters and the projections to layers 1, 2, 5 and 6 against
// the true track positions (within rounding tolerance), the rejection of a low-pT pair and
// of a pair with |z0| > 15 cm, consecutive tracklet indices, and the 43-cycle latency.
module tb_tracklet_calculator;
  import tracklet_pkg::*;
  localparam int S = 1;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic start = 0;
  logic [7:0] rd_evt, clr_evt, tl_evt;
  logic [5:0] rd_addr;
  logic [6:0] rd_cnt;
  stubpair_t rd_data;
  logic clr, tl_en;
  tracklet_t tl_data;
  logic [NLAYER-1:0] pj_en;
  proj_t [NLAYER-1:0] pj_data;
  stubpair_t arr [64];
  // true parameters of each pair (k in phi LSB per cm, t in mm per cm)
  real tk [64], tphi0 [64], tt [64], tz0 [64];
  bit good [64];

  tracklet_calculator #(.SEED(S)) dut (.*);
  always_ff @(posedge clk) rd_data <= arr[rd_addr];

  function automatic int srand(input int lo, input int hi);
    int r;
    r = $urandom_range(0, hi - lo);
    return lo + r;
  endfunction

  function automatic real rabs(input real v);
    return v < 0.0 ? -v : v;
  endfunction

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int nw = 0, t0 = -1, ngood = 0;
  int good_idx [$];
  always @(posedge clk) if (!rst) begin
    if (start) t0 = cyc;
    if (tl_en) begin
      automatic int n = good_idx[nw];
      check(tl_data.idx_in == arr[n].inner.idx && tl_data.idx_out == arr[n].outer.idx, "stub indices");
      check(rabs(real'(tl_data.k) / 256.0 - tk[n]) < 0.6, $sformatf("k %0d vs %f", tl_data.k, tk[n] * 256));
      check(rabs(real'(tl_data.z0) - tz0[n]) < 5.0, $sformatf("z0 %0d vs %f (pair %0d, t %f k %f)", int'(tl_data.z0), tz0[n], n, tt[n], tk[n]));
      check(rabs(real'(tl_data.phi0) - tphi0[n]) < 40.0, $sformatf("phi0 %0d vs %f", tl_data.phi0, tphi0[n]));
      check(cyc == t0 + 1 + n + LAT_TC, $sformatf("tracklet %0d timing", nw));
      for (int l = 0; l < NLAYER; l++) begin
        automatic bit proj_l = (l != SEED_IN[S] && l != SEED_OUT[S]);
        check(pj_en[l] == proj_l, $sformatf("projection enable layer %0d", l));
        if (proj_l) begin
          automatic real ephi = tphi0[n] - tk[n] * R_CM[l];
          automatic real ez = tz0[n] + tt[n] * R_CM[l];
          check(rabs(real'(pj_data[l].phi) - ephi) < 60.0 && rabs(real'(pj_data[l].z) - ez) < 8.0,
                $sformatf("projection layer %0d: %0d,%0d vs %f,%f", l, pj_data[l].phi, pj_data[l].z, ephi, ez));
          check(pj_data[l].tidx == 5'(nw) && pj_data[l].seed == 2'(S) && pj_data[l].layer == 3'(l)
                && pj_data[l].src == SRC_LOCAL, "projection identity");
        end
      end
      nw++;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 12; n++) begin
      automatic real k = srand(-20, 20) * 1.0;     // |k| <= 20 < 52 LSB/cm, stubs stay in the sector
      automatic real p0 = 1500.0 + $urandom_range(0, 1000);
      automatic real t = srand(-800, 800) / 100.0; // mm per cm
      automatic real z0 = srand(-100, 100) * 1.0;   // mm
      if (n == 4) k = 70.0;                                       // pT below 2 GeV
      if (n == 7) z0 = 220.0;                                     // |z0| > 15 cm
      tk[n] = k; tphi0[n] = p0; tt[n] = t; tz0[n] = z0;
      arr[n].inner.stub.layer = 3'(SEED_IN[S]);
      arr[n].inner.stub.phi = 12'($rtoi(p0 - k * R_CM[SEED_IN[S]] + 0.5));
      arr[n].inner.stub.z = 12'($rtoi(z0 + t * R_CM[SEED_IN[S]] + (z0 + t * R_CM[SEED_IN[S]] < 0 ? -0.5 : 0.5)));
      arr[n].inner.idx = 6'(n);
      arr[n].outer.stub.layer = 3'(SEED_OUT[S]);
      arr[n].outer.stub.phi = 12'($rtoi(p0 - k * R_CM[SEED_OUT[S]] + 0.5));
      arr[n].outer.stub.z = 12'($rtoi(z0 + t * R_CM[SEED_OUT[S]] + (z0 + t * R_CM[SEED_OUT[S]] < 0 ? -0.5 : 0.5)));
      arr[n].outer.idx = 6'(n + 20);
      good[n] = !(n == 4 || n == 7);
      if (good[n]) good_idx.push_back(n);
    end
    rd_cnt = 12;
    repeat (3) @(posedge clk); #1 rst = 0;
    repeat (2) @(posedge clk); #1 start = 1;
    @(posedge clk); #1 start = 0;
    repeat (100) @(posedge clk);
    check(nw == 10, $sformatf("%0d tracklets, expected 10", nw));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
