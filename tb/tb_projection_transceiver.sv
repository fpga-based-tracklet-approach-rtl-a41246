// tb_projection_transceiver: reads 12 projections with phi below, inside and above the
// sector and checks that each leaves on the right path (local memory, minus link, plus
// link) with phi moved into the receiving sector's coordinates, 13 cycles after its read;
// also checks that projections received from both neighbours are written with their source
// marked and their own event number as page.
module tb_projection_transceiver;
  import tracklet_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic start = 0;
  logic [7:0] rd_evt, clr_evt;
  logic [4:0] rd_addr;
  logic [5:0] rd_cnt;
  proj_t rd_data;
  logic clr, tx_minus_en, tx_plus_en, rx_minus_en = 0, rx_plus_en = 0;
  projlink_t tx_minus, tx_plus, rx_minus, rx_plus;
  logic [2:0] wr_en;
  logic [2:0][7:0] wr_evt;
  proj_t [2:0] wr_data;
  proj_t arr [32];

  projection_transceiver dut (.*);
  always_ff @(posedge clk) rd_data <= arr[rd_addr];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int nout = 0, nloc = 0, nm = 0, np = 0, nrx = 0, t0 = -1;
  always @(posedge clk) if (!rst) begin
    if (start) t0 = cyc;
    if (wr_en[0] || tx_minus_en || tx_plus_en) begin
      automatic proj_t p = arr[nout];
      automatic int ph = int'(p.phi);
      check(cyc == t0 + 1 + nout + LAT_PT, $sformatf("projection %0d timing", nout));
      if (ph < 0) begin
        check(tx_minus_en && !tx_plus_en && !wr_en[0], "to minus neighbour");
        check(int'(tx_minus.proj.phi) == ph + SECTOR_PHI && tx_minus.proj.tidx == p.tidx && tx_minus.evt == 0, "minus phi");
        nm++;
      end else if (ph >= SECTOR_PHI) begin
        check(tx_plus_en && !tx_minus_en && !wr_en[0], "to plus neighbour");
        check(int'(tx_plus.proj.phi) == ph - SECTOR_PHI && tx_plus.proj.z == p.z, "plus phi");
        np++;
      end else begin
        check(wr_en[0] && !tx_minus_en && !tx_plus_en && wr_data[0] == p, "kept local");
        nloc++;
      end
      nout++;
    end
    if (wr_en[1]) begin
      check(wr_data[1].src == SRC_MINUS && wr_evt[1] == 8'd5 && wr_data[1].tidx == 5'd9, "received from minus");
      nrx++;
    end
    if (wr_en[2]) begin
      check(wr_data[2].src == SRC_PLUS && wr_evt[2] == 8'd6 && wr_data[2].phi == 14'd77, "received from plus");
      nrx++;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 32; i++) begin
      arr[i] = '0;
      arr[i].tidx = 5'(i);
      arr[i].layer = 3'd3;
      arr[i].z = 12'(i * 7);
      case (i % 3)
        0: arr[i].phi = 14'(-(i * 50 + 1));
        1: arr[i].phi = 14'(i * 100);
        default: arr[i].phi = 14'(SECTOR_PHI + i * 20);
      endcase
    end
    rx_minus = '0; rx_plus = '0;
    rd_cnt = 12;
    repeat (3) @(posedge clk); #1 rst = 0;
    repeat (2) @(posedge clk); #1 start = 1;
    @(posedge clk); #1 start = 0;
    repeat (5) @(posedge clk);
    #1 rx_minus_en = 1; rx_minus.evt = 8'd5; rx_minus.proj.tidx = 5'd9; rx_minus.proj.src = SRC_LOCAL;
    rx_plus_en = 1; rx_plus.evt = 8'd6; rx_plus.proj.phi = 14'd77;
    @(posedge clk); #1 rx_minus_en = 0; rx_plus_en = 0;
    repeat (60) @(posedge clk);
    check(nout == 12 && nloc == 4 && nm == 4 && np == 4, $sformatf("split %0d/%0d/%0d", nloc, nm, np));
    check(nrx == 2, "two received");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
