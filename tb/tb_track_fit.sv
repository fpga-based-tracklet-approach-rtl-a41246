// tb_track_fit: builds tracklets of seed 0 from tracks with known parameters, gives each a
// random subset of matches in layers 3-6 whose residuals are the true track position minus
// the tracklet projection plus a small offset, and checks the fitted parameters against a
// floating-point least-squares fit computed here, the hit pattern, the stub identities,
// the MINMATCH rule and the 26-cycle latency.
module tb_track_fit;
  import tracklet_pkg::*;
  localparam int S = 0;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic start = 0, first, trk_en;
  logic [7:0] rd_evt;
  logic [TIDXW-1:0] rd_addr;
  logic [5:0] tl_cnt;
  tracklet_t tl_data;
  logic [3:0][NTRK-1:0] fm_hit;
  match_t [3:0] fm_data;
  track_t trk;
  tracklet_t tls [NTRK];
  match_t ms [4][NTRK];
  real ek [NTRK], ephi0 [NTRK], et [NTRK], ez0 [NTRK];

  track_fit #(.SEED(S)) dut (.*);
  always_ff @(posedge clk) begin
    tl_data <= tls[rd_addr];
    for (int q = 0; q < 4; q++) fm_data[q] <= ms[q][rd_addr];
  end

  function automatic real rabs(input real v);
    return v < 0.0 ? -v : v;
  endfunction

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int nw = 0, t0 = -1, ptr = 0, nexp = 0;
  always @(posedge clk) if (!rst) begin
    if (start) t0 = cyc;
    if (trk_en) begin
      while (ptr < NTRK && fm_hit[0][ptr] + fm_hit[1][ptr] + fm_hit[2][ptr] + fm_hit[3][ptr] == 0) ptr++;
      check(trk.tidx == 5'(ptr) && trk.seed == 2'(S), "track identity");
      check(cyc == t0 + 1 + ptr + LAT_TF, "timing");
      check(rabs(real'(trk.k) - ek[ptr]) < 4.0, $sformatf("k %0d vs %f", trk.k, ek[ptr]));
      check(rabs(real'(trk.phi0) - ephi0[ptr]) < 2.0, $sformatf("phi0 %0d vs %f", trk.phi0, ephi0[ptr]));
      check(rabs(real'(trk.t) - et[ptr]) < 4.0, $sformatf("t %0d vs %f", trk.t, et[ptr]));
      check(rabs(real'(trk.z0) - ez0[ptr]) < 2.0, $sformatf("z0 %0d vs %f", trk.z0, ez0[ptr]));
      check(trk.hit[0] && trk.hit[1] && trk.sid[0] == {SRC_LOCAL, tls[ptr].idx_in}, "seed stubs");
      for (int q = 0; q < 4; q++)
        check(trk.hit[q + 2] == fm_hit[q][ptr] && (!fm_hit[q][ptr] || trk.sid[q + 2] == ms[q][ptr].sid), "match stubs");
      ptr++; nw++;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 20; n++) begin
      // tracklet as measured, and residuals of a line y = a + b r (phi) and c + d r (z)
      automatic real a = $urandom_range(0, 20), b = $urandom_range(0, 40) / 100.0;
      automatic real c = $urandom_range(0, 10), d = $urandom_range(0, 20) / 100.0;
      real sr, srr, sy, sry, sz, srz, nn, den, fa, fb, fc, fd;
      tls[n].idx_in = 6'(n); tls[n].idx_out = 6'(n + 1);
      tls[n].k = 16'(n * 100); tls[n].phi0 = 14'(1000 + n); tls[n].t = 16'(n * 50); tls[n].z0 = 12'(n);
      // least-squares reference: seed points residual 0, matched points residual on the line
      nn = 2; sr = R_CM[0] + R_CM[1]; srr = R_CM[0] * R_CM[0] + R_CM[1] * R_CM[1];
      sy = 0; sry = 0; sz = 0; srz = 0;
      for (int q = 0; q < 4; q++) begin
        automatic int r = R_CM[q + 2];
        automatic int yp = $rtoi(a + b * r), yz = $rtoi(c + d * r);
        fm_hit[q][n] = (n == 5) ? 1'b0 : 1'($urandom_range(0, 1));
        ms[q][n] = '0;
        ms[q][n].tidx = 5'(n); ms[q][n].sid = 8'(40 + q);
        ms[q][n].dphi = 12'(yp); ms[q][n].dz = 12'(yz);
        if (fm_hit[q][n]) begin
          nn += 1; sr += r; srr += r * r; sy += yp; sry += r * yp; sz += yz; srz += r * yz;
        end
      end
      den = nn * srr - sr * sr;
      fb = (nn * sry - sr * sy) / den; fa = (sy - fb * sr) / nn;
      fd = (nn * srz - sr * sz) / den; fc = (sz - fd * sr) / nn;
      ek[n] = real'(tls[n].k) - fb * 256.0; ephi0[n] = real'(tls[n].phi0) + fa;
      et[n] = real'(tls[n].t) + fd * 256.0; ez0[n] = real'(tls[n].z0) + fc;
      if (fm_hit[0][n] | fm_hit[1][n] | fm_hit[2][n] | fm_hit[3][n]) nexp++;
    end
    for (int n = 20; n < NTRK; n++) for (int q = 0; q < 4; q++) fm_hit[q][n] = 1'b0;
    tl_cnt = 20;
    repeat (3) @(posedge clk); #1 rst = 0;
    repeat (2) @(posedge clk); #1 start = 1;
    @(posedge clk); #1 start = 0;
    repeat (STEP_CYCLES + LAT_TF + 4) @(posedge clk);
    check(nw == nexp && nexp > 5, $sformatf("%0d tracks, expected %0d", nw, nexp));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
