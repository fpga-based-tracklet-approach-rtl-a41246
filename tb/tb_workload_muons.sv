// tb_workload_muons: single-muon events through one sector processor, without and with
// background stubs, at the default parameters.
//
// Each event holds one muon-like track (pT of about 10 GeV or more, random phi0, z0 and
// tan(lambda), kept inside the sector so no neighbour is needed) turned into one stub per
// layer. The first batch has no other stubs (no pileup). The second batch adds 5 random
// background stubs per layer, so an event carries 36 stubs, the most the single input port
// reads in one 150 ns window, and the muon stubs arrive in random order among them. Events
// enter back to back, one every 36 cycles. For every event the testbench counts whether the
// muon was found (a track within 20 phi-LSB in phi0 and 6 mm in z0, assigned to the event
// by its output time) and how many other tracks came out, and it collects the z0 and
// curvature residuals. It checks a high efficiency in both batches, a z0 resolution of a few
// mm, and few extra tracks at zero background, and prints the figures.
module tb_workload_muons;
  import tracklet_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  localparam int NEV  = 40;          // events per batch
  localparam int NBKG = 5;           // background stubs per layer in the second batch
  localparam int LAT_FIRST = (STEP_CYCLES - 1 + LAT_INPUT) + (STEP_CYCLES + LAT_LR) + (STEP_CYCLES + LAT_VMR) +
                             (STEP_CYCLES + LAT_TE) + (STEP_CYCLES + LAT_TC) + (STEP_CYCLES + LAT_PT + LINK_CYCLES) +
                             (STEP_CYCLES + LAT_PR) + (STEP_CYCLES + LAT_ME) + (STEP_CYCLES + LAT_MC) +
                             (STEP_CYCLES + LAT_MT + LINK_CYCLES) + 1 + LAT_TF + LAT_DR + LAT_OUT;

  logic in_start = 0, in_valid = 0;
  stub_t in_stub = '0;
  logic [NLAYER-1:0] ptm_en, ptp_en, mtm_en, mtp_en;
  projlink_t [NLAYER-1:0] ptm, ptp;
  matchlink_t [NLAYER-1:0] mtm, mtp;
  logic [NSEED-1:0] out_en;
  track_t [NSEED-1:0] out_trk;
  logic [15:0] n_dup, n_overflow;

  sector_processor dut (
    .clk, .rst, .in_start, .in_valid, .in_stub,
    .pt_tx_minus_en(ptm_en), .pt_tx_minus(ptm), .pt_tx_plus_en(ptp_en), .pt_tx_plus(ptp),
    .pt_rx_minus_en('0), .pt_rx_minus('0), .pt_rx_plus_en('0), .pt_rx_plus('0),
    .mt_tx_minus_en(mtm_en), .mt_tx_minus(mtm), .mt_tx_plus_en(mtp_en), .mt_tx_plus(mtp),
    .mt_rx_minus_en('0), .mt_rx_minus('0), .mt_rx_plus_en('0), .mt_rx_plus('0),
    .out_en, .out_trk, .n_dup, .n_overflow);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic real rabs(input real v);
    return v < 0.0 ? -v : v;
  endfunction

  function automatic int srand(input int lo, input int hi);
    return lo + int'($urandom_range(0, hi - lo));
  endfunction

  localparam int NTOT = 2 * NEV;
  real mk [NTOT], mphi0 [NTOT], mt [NTOT], mz0 [NTOT];
  int  t_start [NTOT];
  bit  found [NTOT];
  int  n_extra [NTOT];
  real sum_dz2 = 0.0, sum_dk2 = 0.0;
  int  n_res = 0;

  always @(posedge clk) if (!rst) begin
    for (int s = 0; s < NSEED; s++)
      if (out_en[s]) begin
        automatic track_t tr = out_trk[s];
        automatic int e = -1;
        for (int k = 0; k < NTOT; k++)
          if (t_start[k] > 0 && cyc >= t_start[k] + LAT_FIRST && cyc < t_start[k] + LAT_FIRST + STEP_CYCLES) e = k;
        check(e >= 0, $sformatf("track at cycle %0d outside every event's output window", cyc));
        if (e >= 0) begin
          if (!found[e] && rabs(real'(tr.phi0) - mphi0[e]) < 20.0 && rabs(real'(tr.z0) - mz0[e]) < 6.0) begin
            found[e] = 1;
            sum_dz2 += (real'(tr.z0) - mz0[e]) ** 2;
            sum_dk2 += (real'(tr.k) / 256.0 - mk[e]) ** 2;
            n_res++;
          end else n_extra[e]++;
        end
      end
  end

  initial begin
    repeat (2 * NTOT * STEP_CYCLES + 3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    stub_t ev [$];
    int nfound [2], nextra [2];
    for (int e = 0; e < NTOT; e++) begin t_start[e] = 0; found[e] = 0; n_extra[e] = 0; end
    repeat (4) @(posedge clk); #1 rst = 0;
    repeat (3) @(posedge clk);
    for (int e = 0; e < NTOT; e++) begin
      ev.delete();
      mk[e] = real'(srand(-1000, 1000)) / 100.0;
      mphi0[e] = real'(srand(1200, 2900));
      mt[e] = real'(srand(-1200, 1200)) / 100.0;
      mz0[e] = real'(srand(-100, 100));
      for (int l = 0; l < NLAYER; l++) begin
        automatic stub_t s;
        automatic real zr = mz0[e] + mt[e] * R_CM[l];
        s.layer = 3'(l);
        s.phi = 12'($rtoi(mphi0[e] - mk[e] * R_CM[l] + 0.5));
        s.z = 12'($rtoi(zr + 2048.5) - 2048);
        ev.push_back(s);
      end
      if (e >= NEV)
        for (int l = 0; l < NLAYER; l++)
          for (int b = 0; b < NBKG; b++) begin
            automatic stub_t s;
            s.layer = 3'(l); s.phi = 12'($urandom); s.z = 12'(srand(-12 * R_CM[l], 12 * R_CM[l]));
            ev.push_back(s);
          end
      ev.shuffle();
      for (int c = 0; c < STEP_CYCLES; c++) begin
        in_start = (c == 0);
        if (c == 0) t_start[e] = cyc;
        in_valid = (c < ev.size());
        in_stub = in_valid ? ev[c] : '0;
        @(posedge clk); #1;
      end
    end
    in_start = 0; in_valid = 0;
    repeat (LAT_FIRST + STEP_CYCLES + 20) @(posedge clk);

    nfound = '{0, 0}; nextra = '{0, 0};
    for (int e = 0; e < NTOT; e++) begin
      nfound[e / NEV] += int'(found[e]);
      nextra[e / NEV] += n_extra[e];
    end
    $display("no background:   muon found in %0d of %0d events, %0d other tracks", nfound[0], NEV, nextra[0]);
    $display("%0d stubs/layer: muon found in %0d of %0d events, %0d other tracks", NBKG, nfound[1], NEV, nextra[1]);
    $display("residuals of found muons: z0 rms %0.2f mm, k rms %0.3f phi-LSB/cm; duplicates removed %0d, memory overflows %0d",
             $sqrt(sum_dz2 / (n_res > 0 ? n_res : 1)), $sqrt(sum_dk2 / (n_res > 0 ? n_res : 1)), n_dup, n_overflow);
    check(nfound[0] * 100 >= 90 * NEV, "efficiency without background at least 90%");
    check(nfound[1] * 100 >= 75 * NEV, "efficiency with background at least 75%");
    check(nextra[0] * 10 <= NEV, "at most one extra track per ten events without background");
    check(n_res > 0 && sum_dz2 / n_res < 9.0, "z0 resolution (rms) below 3 mm");
    check(n_dup > 0, "duplicate removal active");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
