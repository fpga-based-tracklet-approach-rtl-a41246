// tb_tracklet_engine: fills the virtual modules of layers 1 and 2 with random stubs plus a
// few stub pairs from genuine straight tracks, runs one window of the engine for seed 0 and
// compares the accepted stub pairs with a reference list built here: every combination of
// allowed VM pairs (phi slices at most one apart), in scan order, truncated to the
// combinations the engine can try in its window, filtered by the pT and z0 conditions.
module tb_tracklet_engine;
  import tracklet_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic start = 0;
  logic [7:0] rd_evt, clr_evt, wr_evt;
  logic [NVM-1:0][4:0] in_cnt, out_cnt;
  logic [2:0] in_bin, out_bin;
  logic [3:0] in_addr, out_addr;
  vmstub_t in_data, out_data;
  logic clr, wr_en;
  stubpair_t wr_data;
  vmstub_t inm [NVM][16];
  vmstub_t outm [NVM][16];

  tracklet_engine #(.SEED(0)) dut (.*);
  always_ff @(posedge clk) begin
    in_data  <= inm[in_bin][in_addr];
    out_data <= outm[out_bin][out_addr];
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  stubpair_t exp_q [$];
  int nw = 0, t0 = -1, last_w = 0;
  always @(posedge clk) if (!rst) begin
    if (start) t0 = cyc;
    if (wr_en) begin
      if (nw < exp_q.size())
        check(wr_data == exp_q[nw], $sformatf("pair %0d", nw));
      nw++;
      last_w = cyc;
    end
  end

  function automatic vmstub_t mk(input int layer, input int phi, input int z, input int idx);
    vmstub_t v;
    v.stub.layer = 3'(layer); v.stub.phi = 12'(phi); v.stub.z = 12'(z); v.idx = 6'(idx);
    return v;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int ni [NVM], no [NVM];
    int budget, tried, npass;
    for (int v = 0; v < NVM; v++) begin ni[v] = 0; no[v] = 0; end
    // three genuine tracks (phi slope below the pT limit, z0 small)
    for (int k = 0; k < 3; k++) begin
      automatic int phi1 = 300 + 1200 * k, z1 = -100 + 120 * k;
      automatic int phi2 = phi1 - 20 * (R_CM[1] - R_CM[0]) / 10;
      automatic int z2 = z1 * R_CM[1] / R_CM[0];
      automatic vmstub_t a = mk(0, phi1, z1, k), b = mk(1, phi2, z2, k);
      inm[vm_of(a.stub.phi, a.stub.z)][ni[vm_of(a.stub.phi, a.stub.z)]++] = a;
      outm[vm_of(b.stub.phi, b.stub.z)][no[vm_of(b.stub.phi, b.stub.z)]++] = b;
    end
    // random stubs
    for (int k = 0; k < 6; k++) begin
      automatic vmstub_t a = mk(0, $urandom_range(0, 4095), $urandom_range(0, 400) - 200, 10 + k);
      vmstub_t b = mk(1, $urandom_range(0, 4095), $urandom_range(0, 600) - 300, 10 + k);
      inm[vm_of(a.stub.phi, a.stub.z)][ni[vm_of(a.stub.phi, a.stub.z)]++] = a;
      outm[vm_of(b.stub.phi, b.stub.z)][no[vm_of(b.stub.phi, b.stub.z)]++] = b;
    end
    for (int v = 0; v < NVM; v++) begin in_cnt[v] = 5'(ni[v]); out_cnt[v] = 5'(no[v]); end
    // reference: scan order slot = iv*8+ov, i, j; one combination per cycle, 35 cycles
    budget = STEP_CYCLES - 1; tried = 0; npass = 0;
    for (int iv = 0; iv < NVM; iv++)
      for (int ov = 0; ov < NVM; ov++)
        if (iabs(iv / 2 - ov / 2) <= 1)
          for (int i = 0; i < ni[iv]; i++)
            for (int j = 0; j < no[ov]; j++) begin
              if (tried < budget) begin
                automatic int dphi = int'(inm[iv][i].stub.phi) - int'(outm[ov][j].stub.phi);
                automatic int zc = int'(inm[iv][i].stub.z) * R_CM[1] - int'(outm[ov][j].stub.z) * R_CM[0];
                if (iabs(dphi) <= KMAX_LSB * (R_CM[1] - R_CM[0]) &&
                    iabs(zc) < Z0MAX_MM * (R_CM[1] - R_CM[0])) begin
                  automatic stubpair_t p; p.inner = inm[iv][i]; p.outer = outm[ov][j];
                  exp_q.push_back(p);
                end
              end
              tried++;
            end
    repeat (3) @(posedge clk); #1 rst = 0;
    repeat (2) @(posedge clk); #1 start = 1;
    @(posedge clk); #1 start = 0;
    repeat (80) @(posedge clk);
    check(nw == exp_q.size(), $sformatf("%0d pairs accepted, expected %0d (of %0d tried)", nw, exp_q.size(), tried));
    check(exp_q.size() >= 3, "genuine pairs present");
    check(last_w <= t0 + STEP_CYCLES + LAT_TE, "all writes inside window + latency");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
