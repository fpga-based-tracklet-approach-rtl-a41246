// tb_vm_router: routes 20 stubs of one layer and checks that each lands in the virtual
// module given by its top two phi bits and the sign of z, tagged with its index, and is
// written 4 cycles after the cycle it was read.
module tb_vm_router;
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
  stub_t rd_data;
  logic clr, wr_en;
  logic [2:0] wr_vm;
  vmstub_t wr_data;
  stub_t arr [64];

  vm_router dut (.*);
  always_ff @(posedge clk) rd_data <= arr[rd_addr];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int t0 = -1, nw = 0;
  always @(posedge clk) if (!rst) begin
    if (start) t0 = cyc;
    if (wr_en) begin
      automatic int exp_vm = (int'(arr[nw].phi) / 1024) * 2 + (arr[nw].z < 0 ? 1 : 0);
      check(wr_data.stub == arr[nw] && wr_data.idx == 6'(nw), $sformatf("stub %0d data/index", nw));
      check(int'(wr_vm) == exp_vm, $sformatf("stub %0d vm %0d expected %0d", nw, wr_vm, exp_vm));
      check(cyc == t0 + 1 + nw + LAT_VMR, $sformatf("stub %0d timing", nw));
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
      arr[i].layer = 3'd2;
      arr[i].phi = 12'($urandom);
      arr[i].z = 12'($urandom);
    end
    rd_cnt = 20;
    repeat (3) @(posedge clk); #1 rst = 0;
    repeat (2) @(posedge clk); #1 start = 1;
    @(posedge clk); #1 start = 0;
    repeat (60) @(posedge clk);
    check(nw == 20, $sformatf("%0d stubs routed, expected 20", nw));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
