// tb_duplicate_removal: streams tracks of two events through duplicate removal. Tracks are
// built from a small pool of stubs so that some share 3 or more stubs with an earlier track
// (of the same cycle or of an earlier cycle) and some share fewer. A reference list built
// here decides which survive; the test checks the surviving tracks, the 6-cycle latency,
// the duplicate count and that a new event starts with an empty list.
module tb_duplicate_removal;
  import tracklet_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic clr = 0;
  logic [NSEED-1:0] in_en = '0, out_en;
  track_t [NSEED-1:0] in_trk, out_trk;
  logic [15:0] n_dup;

  duplicate_removal dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic int shared(input track_t a, input track_t b);
    int n = 0;
    for (int l = 0; l < NLAYER; l++) if (a.hit[l] && b.hit[l] && a.sid[l] == b.sid[l]) n++;
    return n;
  endfunction

  // expected output per input cycle (relative to the event start)
  logic [NSEED-1:0] exp_en [64];
  track_t [NSEED-1:0] exp_trk [64];
  int t_in [64];
  int nin = 0, ndup_exp = 0;

  int nout_cycles = 0;
  always @(posedge clk) if (!rst) begin
    for (int k = 0; k < nin; k++)
      if (cyc == t_in[k] + LAT_DR) begin
        check(out_en == exp_en[k], $sformatf("cycle %0d survivors %b expected %b", k, out_en, exp_en[k]));
        for (int s = 0; s < NSEED; s++) if (exp_en[k][s]) check(out_trk[s] == exp_trk[k][s], "track data");
        nout_cycles++;
      end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    track_t kept [$];
    repeat (3) @(posedge clk); #1 rst = 0;
    @(negedge clk);
    for (int e = 0; e < 2; e++) begin
      kept.delete();
      for (int c = 0; c < 12; c++) begin
        automatic logic [NSEED-1:0] keep = '0;
        for (int s = 0; s < NSEED; s++) begin
          automatic bit dup = 0;
          in_trk[s] = '0;
          in_trk[s].seed = 2'(s); in_trk[s].tidx = 5'(c);
          in_trk[s].k = 16'($urandom);
          for (int l = 0; l < NLAYER; l++) begin
            in_trk[s].hit[l] = 1'($urandom_range(0, 3) != 0);
            in_trk[s].sid[l] = 8'($urandom_range(0, 2));    // small stub pool -> sharing
          end
          in_en[s] = 1'($urandom_range(0, 3) != 0);
          if (in_en[s]) begin
            foreach (kept[k]) if (shared(in_trk[s], kept[k]) >= NSHARED) dup = 1;
            if (!dup) begin kept.push_back(in_trk[s]); keep[s] = 1'b1; end
            else ndup_exp++;
          end
        end
        exp_en[nin] = keep; exp_trk[nin] = in_trk;
        clr = (c == 0);
        t_in[nin] = cyc;          // inputs are applied after a falling edge
        nin++;
        @(negedge clk);
        clr = 0;
      end
      in_en = '0;
      repeat (10) @(negedge clk);
    end
    check(nout_cycles == nin, "all cycles checked");
    check(int'(n_dup) == ndup_exp && ndup_exp > 3, $sformatf("duplicates %0d expected %0d", n_dup, ndup_exp));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
