// tb_projection_router: routes 30 random projections and checks that each is written,
// unchanged and in order, to the virtual module of its phi slice and z half, 5 cycles after
// it was read; a second event checks the event number and the page clear.
module tb_projection_router;
  import tracklet_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic start = 0;
  logic [7:0] rd_evt, clr_evt, wr_evt;
  logic [5:0] rd_addr;
  logic [6:0] rd_cnt;
  proj_t rd_data, wr_data;
  logic clr, wr_en;
  logic [2:0] wr_vm;
  proj_t arr [64];

  projection_router dut (.*);
  always_ff @(posedge clk) rd_data <= arr[rd_addr];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int nw = 0, t0 = -1, ev = 0, nclr = 0;
  always @(posedge clk) if (!rst) begin
    if (start) t0 = cyc;
    if (clr) begin check(clr_evt == 8'(ev), "clear event number"); nclr++; end
    if (wr_en) begin
      automatic int vm = (int'(arr[nw].phi) >> 10) * 2 + (arr[nw].z < 0 ? 1 : 0);
      check(wr_data == arr[nw] && int'(wr_vm) == vm, $sformatf("projection %0d vm %0d expected %0d", nw, wr_vm, vm));
      check(cyc == t0 + 1 + nw + LAT_PR && wr_evt == 8'(ev), "timing and event");
      nw++;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 64; i++) begin
      arr[i] = '0;
      arr[i].phi = 14'($urandom_range(0, SECTOR_PHI - 1));
      arr[i].z = 12'($urandom);
      arr[i].tidx = 5'(i);
    end
    rd_cnt = 30;
    repeat (3) @(posedge clk); #1 rst = 0;
    for (int e = 0; e < 2; e++) begin
      ev = e; nw = 0;
      repeat (2) @(posedge clk); #1 start = 1;
      @(posedge clk); #1 start = 0;
      repeat (STEP_CYCLES + LAT_PR + 2) @(posedge clk);
      check(nw == 30, $sformatf("event %0d: %0d projections routed", e, nw));
    end
    check(nclr == 2, "one clear per event");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
