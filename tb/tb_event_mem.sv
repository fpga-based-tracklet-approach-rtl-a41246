// tb_event_mem: self-checking test of the paged, binned append memory.
// Writes through two ports (including two appends to one bin in one cycle), reads every
// entry back, checks the per-bin counts, the overflow drop at DEPTH and the page clear.
module tb_event_mem;
  localparam int W = 16, NPAGE = 4, NBIN = 4, DEPTH = 4, NW = 2;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clr; logic [1:0] clr_page;
  logic [NW-1:0] wr_en; logic [NW-1:0][1:0] wr_page; logic [NW-1:0][1:0] wr_bin;
  logic [NW-1:0][W-1:0] wr_data;
  logic [1:0] rd_page, rd_bin, rd_addr; logic [W-1:0] rd_data;
  logic [NBIN-1:0][2:0] cnt_all; logic [15:0] overflows;

  event_mem #(.W(W), .NPAGE(NPAGE), .NBIN(NBIN), .DEPTH(DEPTH), .NW(NW)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wr(input int p0, b0, d0, input bit e1, input int p1, b1, d1);
    wr_en = {e1, 1'b1}; wr_page = {2'(p1), 2'(p0)}; wr_bin = {2'(b1), 2'(b0)};
    wr_data = {16'(d1), 16'(d0)};
    @(posedge clk); #1; wr_en = '0;
  endtask

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    clr = 0; clr_page = 0; wr_en = 0; wr_page = 0; wr_bin = 0; wr_data = 0;
    rd_page = 0; rd_bin = 0; rd_addr = 0;
    repeat (3) @(posedge clk); #1 rst = 0;
    // page 1: bin 2 gets 0x11, then 0x22 and 0x33 in one cycle (port order), bin 0 gets 0x44
    wr(1, 2, 'h11, 0, 0, 0, 0);
    wr(1, 2, 'h22, 1, 1, 2, 'h33);
    wr(1, 0, 'h44, 1, 2, 3, 'h55);        // second port to page 2
    rd_page = 1; #1;
    check(cnt_all[2] == 3 && cnt_all[0] == 1 && cnt_all[1] == 0 && cnt_all[3] == 0, "counts page 1");
    rd_page = 2; #1; check(cnt_all[3] == 1, "count page 2");
    begin
      int exp [3] = '{'h11, 'h22, 'h33};
      for (int a = 0; a < 3; a++) begin
        rd_page = 1; rd_bin = 2; rd_addr = 2'(a);
        @(posedge clk); #1;
        check(rd_data == 16'(exp[a]), $sformatf("data bin2 addr%0d = %h", a, rd_data));
      end
    end
    // overflow: bin 2 of page 1 has 3, two more writes -> one stored, one dropped
    wr(1, 2, 'h66, 0, 0, 0, 0);
    wr(1, 2, 'h77, 0, 0, 0, 0);
    rd_page = 1; #1;
    check(cnt_all[2] == 4, "count saturates at DEPTH");
    check(overflows == 1, "one overflow counted");
    rd_bin = 2; rd_addr = 3; @(posedge clk); #1; check(rd_data == 16'h66, "last stored entry");
    // clear page 1 only
    clr = 1; clr_page = 1; @(posedge clk); #1 clr = 0;
    rd_page = 1; #1; check(cnt_all == '0, "page 1 cleared");
    rd_page = 2; #1; check(cnt_all[3] == 1, "page 2 kept");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
