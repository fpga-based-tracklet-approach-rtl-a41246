// tb_match_engine: fills the VM projection and VM stub memories of layer 4 (a 2S layer) with
// projections and stubs, some placed close to a projection, runs one window and compares
// the candidates with a reference list: all projection/stub combinations of the same VM in
// scan order, limited to the combinations that fit in the window, inside the coarse window.
module tb_match_engine;
  import tracklet_pkg::*;
  localparam int LAY = 4;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic start = 0;
  logic [7:0] rd_evt, clr_evt, wr_evt;
  logic [NVM-1:0][4:0] pj_cnt, st_cnt;
  logic [2:0] pj_bin, st_bin;
  logic [3:0] pj_addr, st_addr;
  proj_t pj_data;
  vmstub_t st_data;
  logic clr, wr_en;
  cand_t wr_data;
  proj_t pm [NVM][16];
  vmstub_t sm [NVM][16];

  match_engine #(.LAYER(LAY)) dut (.*);
  always_ff @(posedge clk) begin
    pj_data <= pm[pj_bin][pj_addr];
    st_data <= sm[st_bin][st_addr];
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  cand_t exp_q [$];
  int nw = 0, t0 = -1;
  always @(posedge clk) if (!rst) begin
    if (start) t0 = cyc;
    if (wr_en) begin
      if (nw < exp_q.size()) check(wr_data == exp_q[nw], $sformatf("candidate %0d", nw));
      nw++;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int np [NVM], ns [NVM];
    int tried;
    for (int v = 0; v < NVM; v++) begin np[v] = 0; ns[v] = 0; end
    for (int k = 0; k < 6; k++) begin
      automatic proj_t p = '0;
      automatic vmstub_t s;
      automatic int vm;
      p.tidx = 5'(k); p.layer = 3'(LAY);
      p.phi = 14'($urandom_range(100, 3900)); p.z = 12'($urandom_range(0, 1000)) - 12'd500;
      vm = vm_of(p.phi[11:0], p.z);
      pm[vm][np[vm]++] = p;
      // one stub near the projection, one far away in phi, one random
      for (int q = 0; q < 3; q++) begin
        s.stub.layer = 3'(LAY); s.idx = 6'(k * 3 + q);
        s.stub.phi = 12'(int'(p.phi) + (q == 0 ? 30 : (q == 1 ? 95 : -7)));
        s.stub.z = (q == 2) ? 12'($urandom_range(0, 1000)) - 12'd500 : p.z + 12'd40;
        vm = vm_of(s.stub.phi, s.stub.z);
        sm[vm][ns[vm]++] = s;
      end
    end
    for (int v = 0; v < NVM; v++) begin pj_cnt[v] = 5'(np[v]); st_cnt[v] = 5'(ns[v]); end
    tried = 0;
    for (int v = 0; v < NVM; v++)
      if (np[v] > 0 && ns[v] > 0)
        for (int i = 0; i < np[v]; i++)
          for (int j = 0; j < ns[v]; j++) begin
            if (tried < STEP_CYCLES - 1) begin
              automatic int dphi = int'(sm[v][j].stub.phi) - int'(pm[v][i].phi);
              automatic int dz = int'(sm[v][j].stub.z) - int'(pm[v][i].z);
              if ((dphi < 0 ? -dphi : dphi) <= 2 * PHIWIN && (dz < 0 ? -dz : dz) <= 2 * ZWIN_MM[LAY]) begin
                automatic cand_t c;
                c.proj = pm[v][i]; c.stub = sm[v][j];
                exp_q.push_back(c);
              end
            end
            tried++;
          end
    repeat (3) @(posedge clk); #1 rst = 0;
    repeat (2) @(posedge clk); #1 start = 1;
    @(posedge clk); #1 start = 0;
    repeat (STEP_CYCLES + LAT_ME + 4) @(posedge clk);
    check(nw == exp_q.size(), $sformatf("%0d candidates, expected %0d (%0d tried)", nw, exp_q.size(), tried));
    check(exp_q.size() >= 3, "candidates present");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
