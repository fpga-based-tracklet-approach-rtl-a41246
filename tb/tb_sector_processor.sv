// tb_sector_processor: end-to-end test of the track finder, at its default parameters.
//
// Three sector processors stand for a central sector and its two neighbours, joined by
// link models that delay every word by LINK_CYCLES (as on the demonstrator). Tracks with
// known parameters are turned into stubs; each stub goes to the sector whose phi range
// holds it. Five events enter back to back (a new event every 36 cycles, the 42-stub event
// needing 42 cycles):
//   e0  three tracks inside the central sector
//   e1  one track inside, one crossing into the upper neighbour (projections sent out and
//       matches returned)
//   e2  one track crossing from the lower neighbour (projections received, matches sent back)
//   e3  36 noise stubs in layer 1 arriving before one track: the layer router's window
//       closes before the track's stubs are read (truncation), VM memories overflow
//   e4  two tracks inside again
// The central sector's output is checked event by event: the number of tracks after
// duplicate removal, each track's hit pattern and parameters against the generated track,
// and the fixed latency from the event's first input cycle to its first track. Every
// mechanism (neighbour exchange in both directions, duplicate removal, truncation, memory
// overflow, back-to-back events) is counted and must have happened at least once.
module tb_sector_processor;
  import tracklet_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // first-track latency from in_start, derived from the step schedule:
  // step starts (36 + latency each, +link on the transceivers), +1 into the fit window,
  // fit, duplicate removal and output register
  localparam int LAT_FIRST = (STEP_CYCLES - 1 + LAT_INPUT) + (STEP_CYCLES + LAT_LR) + (STEP_CYCLES + LAT_VMR) +
                             (STEP_CYCLES + LAT_TE) + (STEP_CYCLES + LAT_TC) + (STEP_CYCLES + LAT_PT + LINK_CYCLES) +
                             (STEP_CYCLES + LAT_PR) + (STEP_CYCLES + LAT_ME) + (STEP_CYCLES + LAT_MC) +
                             (STEP_CYCLES + LAT_MT + LINK_CYCLES) + 1 + LAT_TF + LAT_DR + LAT_OUT;

  // ---------------------------------------------------------------- three sectors
  logic [2:0] in_start = '0, in_valid = '0;
  stub_t [2:0] in_stub;
  logic [2:0][NLAYER-1:0] ptm_en, ptp_en, ptrm_en, ptrp_en, mtm_en, mtp_en, mtrm_en, mtrp_en;
  projlink_t [2:0][NLAYER-1:0] ptm, ptp, ptrm, ptrp;
  matchlink_t [2:0][NLAYER-1:0] mtm, mtp, mtrm, mtrp;
  logic [2:0][NSEED-1:0] out_en;
  track_t [2:0][NSEED-1:0] out_trk;
  logic [2:0][15:0] n_dup, n_overflow;

  for (genvar s = 0; s < 3; s++) begin : g_sec
    sector_processor u_sp (
      .clk, .rst, .in_start(in_start[s]), .in_valid(in_valid[s]), .in_stub(in_stub[s]),
      .pt_tx_minus_en(ptm_en[s]), .pt_tx_minus(ptm[s]), .pt_tx_plus_en(ptp_en[s]), .pt_tx_plus(ptp[s]),
      .pt_rx_minus_en(ptrm_en[s]), .pt_rx_minus(ptrm[s]), .pt_rx_plus_en(ptrp_en[s]), .pt_rx_plus(ptrp[s]),
      .mt_tx_minus_en(mtm_en[s]), .mt_tx_minus(mtm[s]), .mt_tx_plus_en(mtp_en[s]), .mt_tx_plus(mtp[s]),
      .mt_rx_minus_en(mtrm_en[s]), .mt_rx_minus(mtrm[s]), .mt_rx_plus_en(mtrp_en[s]), .mt_rx_plus(mtrp[s]),
      .out_en(out_en[s]), .out_trk(out_trk[s]), .n_dup(n_dup[s]), .n_overflow(n_overflow[s]));
  end

  // links: sector s "plus" side <-> sector s+1 "minus" side, LINK_CYCLES each way
  localparam int PLW = NLAYER * (1 + $bits(projlink_t));
  localparam int MLW = NLAYER * (1 + $bits(matchlink_t));
  for (genvar s = 0; s < 2; s++) begin : g_link
    delay_line #(.W(PLW), .D(LINK_CYCLES)) u_pu (.clk, .rst, .din({ptp_en[s], ptp[s]}), .dout({ptrm_en[s+1], ptrm[s+1]}));
    delay_line #(.W(PLW), .D(LINK_CYCLES)) u_pd (.clk, .rst, .din({ptm_en[s+1], ptm[s+1]}), .dout({ptrp_en[s], ptrp[s]}));
    delay_line #(.W(MLW), .D(LINK_CYCLES)) u_mu (.clk, .rst, .din({mtp_en[s], mtp[s]}), .dout({mtrm_en[s+1], mtrm[s+1]}));
    delay_line #(.W(MLW), .D(LINK_CYCLES)) u_md (.clk, .rst, .din({mtm_en[s+1], mtm[s+1]}), .dout({mtrp_en[s], mtrp[s]}));
  end
  assign ptrm_en[0] = '0; assign ptrm[0] = '0; assign mtrm_en[0] = '0; assign mtrm[0] = '0;
  assign ptrp_en[2] = '0; assign ptrp[2] = '0; assign mtrp_en[2] = '0; assign mtrp[2] = '0;

  function automatic real rabs(input real v);
    return v < 0.0 ? -v : v;
  endfunction

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------------------------------------------------------- generated tracks
  // global phi: central sector covers [0, 4096); k in phi LSB per cm, t in mm per cm
  typedef struct {
    int evt; real k; real phi0; real t; real z0; bit expect_central;
  } gtrack_t;
  gtrack_t gt [$];
  stub_t  evq [3][5][$];         // per sector, per event: stubs in arrival order
  int     t_start [5];

  task automatic add_track(input int e, input real k, input real phi0g, input real t, input real z0,
                           input bit exp_c);
    gtrack_t g;
    g.evt = e; g.k = k; g.phi0 = phi0g; g.t = t; g.z0 = z0; g.expect_central = exp_c;
    gt.push_back(g);
    for (int l = 0; l < NLAYER; l++) begin
      automatic real pg = phi0g - k * R_CM[l];
      automatic int pi = $rtoi(pg + 4096.0 + 0.5) - 4096;
      automatic real zr = z0 + t * R_CM[l];
      automatic int zi = $rtoi(zr + (zr < 0 ? -0.5 : 0.5));
      automatic int sec = (pi < 0) ? 0 : (pi >= SECTOR_PHI ? 2 : 1);
      automatic stub_t s;
      s.layer = 3'(l); s.phi = 12'(pi - (sec - 1) * SECTOR_PHI); s.z = 12'(zi);
      evq[sec][e].push_back(s);
    end
  endtask

  // ---------------------------------------------------------------- output monitor
  int n_out [5];
  int first_out [5];
  int cnt_remote_hits = 0, cnt_b2b = 0;
  int cnt_pt_out = 0, cnt_pt_in = 0, cnt_mt_out = 0, cnt_mt_in = 0;
  always @(posedge clk) if (!rst) begin
    for (int l = 0; l < NLAYER; l++) begin
      cnt_pt_out += int'(ptm_en[1][l]) + int'(ptp_en[1][l]);
      cnt_pt_in  += int'(ptrm_en[1][l]) + int'(ptrp_en[1][l]);
      cnt_mt_out += int'(mtm_en[1][l]) + int'(mtp_en[1][l]);
      cnt_mt_in  += int'(mtrm_en[1][l]) + int'(mtrp_en[1][l]);
    end
    for (int s = 0; s < NSEED; s++)
      if (out_en[1][s]) begin
        automatic track_t tr = out_trk[1][s];
        automatic int e = -1;
        automatic bit found = 0;
        for (int k = 0; k < 5; k++)
          if (t_start[k] > 0 && cyc >= t_start[k] + LAT_FIRST && cyc < t_start[k] + LAT_FIRST + STEP_CYCLES) e = k;
        check(e >= 0, $sformatf("track at cycle %0d outside every event's output window", cyc));
        if (e >= 0) begin
          n_out[e]++;
          for (int l = 0; l < NLAYER; l++)
            if (tr.hit[l] && tr.sid[l][SIDXW+1:SIDXW] != 2'(SRC_LOCAL)) cnt_remote_hits++;
          if (first_out[e] < 0) first_out[e] = cyc;
          foreach (gt[g])
            if (gt[g].evt == e && gt[g].expect_central &&
                rabs(real'(tr.phi0) - gt[g].phi0) < 20.0 && rabs(real'(tr.z0) - gt[g].z0) < 6.0) begin
              found = 1;
              check(rabs(real'(tr.k) / 256.0 - gt[g].k) < 0.5, $sformatf("event %0d k %f vs %f", e, real'(tr.k) / 256.0, gt[g].k));
              check(rabs(real'(tr.t) / 256.0 - gt[g].t) < 0.2, $sformatf("event %0d t %f vs %f", e, real'(tr.t) / 256.0, gt[g].t));
              check($countones(tr.hit) >= 4, $sformatf("event %0d hits %b", e, tr.hit));
            end
          check(found, $sformatf("event %0d: output track phi0 %0d z0 %0d matches a generated track", e, tr.phi0, tr.z0));
        end
      end
  end

  // ---------------------------------------------------------------- watchdog
  initial begin
    repeat (4000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------------------------------------------------------- stimulus
  initial begin
    int exp_n [5];
    for (int e = 0; e < 5; e++) begin n_out[e] = 0; first_out[e] = -1; t_start[e] = 0; end
    // e0: three tracks inside the central sector, in different phi slices, both z halves
    add_track(0,  2.0,  512.0, 3.0,  20.0, 1);
    add_track(0, -2.5, 1536.0, -4.0, -30.0, 1);
    add_track(0,  1.5, 2560.0, 6.0,  60.0, 1);
    // e1: one inside, one leaving through the upper edge after layer 3
    add_track(1,  0.0, 3584.0, 2.0,  10.0, 1);
    add_track(1, -3.0, 3900.0, 1.0,  40.0, 1);
    // e2: one entering through the lower edge: layers 1-3 in the lower neighbour
    add_track(2, -3.0, -180.0, -2.0, -25.0, 1);
    // e3: 36 noise stubs in layer 1, phi slice 0, then one track in slice 3 (lost)
    for (int i = 0; i < STEP_CYCLES; i++) begin
      automatic stub_t s;
      s.layer = 3'd0; s.phi = 12'($urandom_range(0, 1000)); s.z = 12'($urandom_range(0, 400)) - 12'd200;
      evq[1][3].push_back(s);
    end
    add_track(3, 0.5, 3500.0, 1.0, 15.0, 0);
    // e4: two tracks inside
    add_track(4, -1.0, 700.0, 5.0, 35.0, 1);
    add_track(4, 1.0, 2700.0, -5.0, -45.0, 1);
    exp_n = '{3, 2, 1, 0, 2};

    repeat (4) @(posedge clk); #1 rst = 0;
    repeat (3) @(posedge clk);
    for (int e = 0; e < 5; e++) begin
      automatic int len = STEP_CYCLES;
      for (int s = 0; s < 3; s++) if (evq[s][e].size() > len) len = evq[s][e].size();
      for (int c = 0; c < len; c++) begin
        #1;
        in_start = (c == 0) ? 3'b111 : 3'b000;
        if (c == 0) t_start[e] = cyc;
        for (int s = 0; s < 3; s++) begin
          in_valid[s] = (c < evq[s][e].size());
          in_stub[s] = in_valid[s] ? evq[s][e][c] : '0;
        end
        @(posedge clk);
      end
    end
    #1 in_start = '0; in_valid = '0;
    repeat (LAT_FIRST + STEP_CYCLES + 20) @(posedge clk);

    for (int e = 0; e < 5; e++) begin
      check(n_out[e] == exp_n[e], $sformatf("event %0d: %0d tracks out, expected %0d", e, n_out[e], exp_n[e]));
      if (exp_n[e] > 0) check(first_out[e] - t_start[e] == LAT_FIRST,
                              $sformatf("event %0d first track after %0d cycles, expected %0d", e, first_out[e] - t_start[e], LAT_FIRST));
    end
    // mechanisms
    $display("mechanisms: projections out %0d in %0d, matches out %0d in %0d, duplicates removed %0d, overflows %0d, truncated event stubs %0d",
             cnt_pt_out, cnt_pt_in, cnt_mt_out, cnt_mt_in, n_dup[1], n_overflow[1], evq[1][3].size() - STEP_CYCLES);
    $display("first-track latency %0d cycles = %0d ns at 240 MHz (without input/output links)", LAT_FIRST, LAT_FIRST * 25 / 6);
    for (int e = 1; e < 5; e++) if (t_start[e] - t_start[e-1] <= STEP_CYCLES + 6) cnt_b2b++;
    $display("back-to-back event starts %0d, fitted hits on neighbour stubs %0d", cnt_b2b, cnt_remote_hits);
    check(cnt_b2b == 4, "events entered back to back");
    check(cnt_remote_hits > 0, "tracks carry hits matched in a neighbour sector");
    check(cnt_pt_out > 0, "projections sent to a neighbour");
    check(cnt_pt_in > 0, "projections received from a neighbour");
    check(cnt_mt_out > 0, "matches returned to a neighbour");
    check(cnt_mt_in > 0, "matches received from a neighbour");
    check(n_dup[1] > 0, "duplicate tracks removed");
    check(n_overflow[1] > 0, "memory overflow (truncation) seen");
    check(evq[1][3].size() > STEP_CYCLES, "input event longer than the step window (truncation)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
