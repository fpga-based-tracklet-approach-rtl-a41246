// tb_match_calculator: feeds candidates of layer 1 (a PS layer) with chosen residuals and
// checks that a match is written only for candidates inside the phi and z windows, only
// for the first accepted stub of each projection, with the right residuals and identity,
// 16 cycles after the read; a second event checks that the bitmap is cleared.
module tb_match_calculator;
  import tracklet_pkg::*;
  localparam int LAY = 1;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic start = 0;
  logic [7:0] rd_evt, clr_evt, wr_evt;
  logic [5:0] rd_addr;
  logic [6:0] rd_cnt;
  cand_t rd_data;
  logic clr, wr_en;
  match_t wr_data;
  cand_t arr [64];
  int edphi [64], edz [64];
  bit acc [64];

  match_calculator #(.LAYER(LAY)) dut (.*);
  always_ff @(posedge clk) rd_data <= arr[rd_addr];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int nw = 0, t0 = -1, ptr = 0;
  always @(posedge clk) if (!rst) begin
    if (start) begin t0 = cyc; ptr = 0; end
    if (wr_en) begin
      while (ptr < 64 && !acc[ptr]) ptr++;
      check(ptr < 64 && wr_data.dphi == 12'(edphi[ptr]) && wr_data.dz == 12'(edz[ptr]) &&
            wr_data.tidx == arr[ptr].proj.tidx && wr_data.src == arr[ptr].proj.src &&
            wr_data.sid == {SRC_LOCAL, arr[ptr].stub.idx} && wr_data.layer == 3'(LAY),
            $sformatf("match for candidate %0d", ptr));
      check(cyc == t0 + 1 + ptr + LAT_MC, "timing");
      ptr++; nw++;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    bit seen [int];
    int nacc = 0, nrep = 0;
    for (int i = 0; i < 20; i++) begin
      automatic int dphi = $urandom_range(0, 120);
      automatic int dz = $urandom_range(0, 30);
      automatic int id;
      dphi = dphi - 60; dz = dz - 15;
      arr[i] = '0;
      arr[i].proj.tidx = 5'(i % 4);
      arr[i].proj.src = (i % 2) ? SRC_MINUS : SRC_LOCAL;
      arr[i].proj.seed = 2'(i % 3 == 0 ? 1 : 2);
      arr[i].proj.phi = 14'(2000);
      arr[i].proj.z = 12'(100);
      arr[i].stub.idx = 6'(i);
      arr[i].stub.stub.phi = 12'(2000 + dphi);
      arr[i].stub.stub.z = 12'(100 + dz);
      edphi[i] = dphi; edz[i] = dz;
      id = int'(arr[i].proj.src) * 1000 + int'(arr[i].proj.seed) * 100 + int'(arr[i].proj.tidx);
      acc[i] = (dphi <= PHIWIN && dphi >= -PHIWIN && dz <= ZWIN_MM[LAY] && dz >= -ZWIN_MM[LAY]) && !seen.exists(id);
      if (acc[i]) begin seen[id] = 1; nacc++; end
      else if (seen.exists(id) && dphi <= PHIWIN && dphi >= -PHIWIN && dz <= ZWIN_MM[LAY] && dz >= -ZWIN_MM[LAY]) nrep++;
    end
    for (int i = 20; i < 64; i++) acc[i] = 0;
    rd_cnt = 20;
    repeat (3) @(posedge clk); #1 rst = 0;
    for (int e = 0; e < 2; e++) begin
      nw = 0;
      repeat (2) @(posedge clk); #1 start = 1;
      @(posedge clk); #1 start = 0;
      repeat (STEP_CYCLES + LAT_MC + 2) @(posedge clk);
      check(nw == nacc && nacc > 2 && nrep > 0, $sformatf("event %0d: %0d matches, expected %0d", e, nw, nacc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
