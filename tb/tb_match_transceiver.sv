// tb_match_transceiver: reads matches owned by this sector and by both neighbours and
// checks that local ones go to the track-fit memory port, the others back on the link to
// their owner, 12 cycles after the read; received matches must come out with the stub
// marked as lying in the sending neighbour's sector.
module tb_match_transceiver;
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
  match_t rd_data;
  logic clr, tx_minus_en, tx_plus_en, rx_minus_en = 0, rx_plus_en = 0;
  matchlink_t tx_minus, tx_plus, rx_minus, rx_plus;
  logic [2:0] wr_en;
  logic [2:0][7:0] wr_evt;
  match_t [2:0] wr_data;
  match_t arr [32];

  match_transceiver dut (.*);
  always_ff @(posedge clk) rd_data <= arr[rd_addr];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int nout = 0, nl = 0, nm = 0, np = 0, nrx = 0, t0 = -1;
  always @(posedge clk) if (!rst) begin
    if (start) t0 = cyc;
    if (wr_en[0] || tx_minus_en || tx_plus_en) begin
      automatic match_t m = arr[nout];
      check(cyc == t0 + 1 + nout + LAT_MT, "timing");
      case (m.src)
        SRC_MINUS: begin check(tx_minus_en && !wr_en[0] && tx_minus.m == m && tx_minus.evt == 0, "back to minus"); nm++; end
        SRC_PLUS:  begin check(tx_plus_en && !wr_en[0] && tx_plus.m == m, "back to plus"); np++; end
        default:   begin check(wr_en[0] && !tx_minus_en && !tx_plus_en && wr_data[0] == m, "local"); nl++; end
      endcase
      nout++;
    end
    if (wr_en[1]) begin
      check(wr_data[1].sid == {SRC_MINUS, 6'd17} && wr_data[1].src == SRC_LOCAL && wr_evt[1] == 8'd3 &&
            wr_data[1].dphi == 12'd5, "received from minus"); nrx++;
    end
    if (wr_en[2]) begin
      check(wr_data[2].sid == {SRC_PLUS, 6'd18} && wr_data[2].tidx == 5'd4, "received from plus"); nrx++;
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
      arr[i].src = src_e'(i % 3);
      arr[i].tidx = 5'(i);
      arr[i].dz = 12'(i);
    end
    rx_minus = '0; rx_plus = '0;
    rd_cnt = 15;
    repeat (3) @(posedge clk); #1 rst = 0;
    repeat (2) @(posedge clk); #1 start = 1;
    @(posedge clk); #1 start = 0;
    repeat (4) @(posedge clk);
    #1 rx_minus_en = 1; rx_minus.evt = 8'd3; rx_minus.m.src = SRC_PLUS; rx_minus.m.sid = 8'd17;
    rx_minus.m.dphi = 12'd5;
    rx_plus_en = 1; rx_plus.m.src = SRC_MINUS; rx_plus.m.sid = 8'd18; rx_plus.m.tidx = 5'd4;
    @(posedge clk); #1 rx_minus_en = 0; rx_plus_en = 0;
    repeat (60) @(posedge clk);
    check(nout == 15 && nl == 5 && nm == 5 && np == 5, "split");
    check(nrx == 2, "received");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
