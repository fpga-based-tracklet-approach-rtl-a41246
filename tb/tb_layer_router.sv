// tb_layer_router: feeds 40 stubs of random layer to the layer router and checks that the
// first 36 (one per cycle of the 150 ns window) come out in order, on the right layer, one
// cycle after they were read, and that the remaining 4 are truncated.
module tb_layer_router;
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
  stub_t rd_data, wr_stub;
  logic clr, wr_en;
  logic [2:0] wr_layer;
  stub_t arr [64];

  layer_router dut (.*);
  always_ff @(posedge clk) rd_data <= arr[rd_addr];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int t0 = -1, nw = 0, nclr = 0;
  always @(posedge clk) if (!rst) begin
    if (start) t0 = cyc;
    if (clr) begin
      nclr++;
      check(cyc == t0 + 1 && clr_evt == 0, "clear at first window cycle");
    end
    if (wr_en) begin
      check(wr_stub == arr[nw], $sformatf("stub %0d data", nw));
      check(wr_layer == arr[nw].layer, "layer select");
      check(cyc == t0 + 1 + nw + 1, $sformatf("stub %0d written at %0d, expected %0d", nw, cyc, t0 + 2 + nw));
      check(wr_evt == 0, "event number");
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
      arr[i].layer = 3'($urandom_range(0, 5));
      arr[i].phi = 12'($urandom);
      arr[i].z = 12'($urandom);
    end
    rd_cnt = 40;
    repeat (3) @(posedge clk); #1 rst = 0;
    repeat (2) @(posedge clk); #1 start = 1;
    @(posedge clk); #1 start = 0;
    repeat (60) @(posedge clk);
    check(nw == STEP_CYCLES, $sformatf("%0d stubs routed, expected 36 (truncation)", nw));
    check(nclr == 1, "one clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
