// event_mem: the memory between two processing steps of the tracklet pipeline.
//
// Each processing step writes its results into memories that the next step reads one
// event later. Because a step keeps writing for its latency after the next event has
// started, and some readers sit several steps downstream, the memory holds NPAGE events
// (page = event number mod NPAGE). Inside a page the data are split into NBIN bins (a
// layer, a virtual module, a tracklet index...), each an append-only list of up to DEPTH
// entries with its own entry count. Writes to a full bin are dropped and counted in
// `overflows` (truncation). NW write ports may append in the same cycle; ports writing the
// same bin get consecutive addresses in port order.
//
// Interface: `clr` resets the counts of `clr_page` (the writer does this when it starts a
// new event). Read: data of (rd_page, rd_bin, rd_addr) appear on rd_data one cycle later;
// `cnt_all` gives the entry counts of every bin of rd_page combinationally.
// The paper states only that steps communicate through memories; paging, bins and counts
// are this design's choices.
module event_mem #(
  parameter int W     = 32,
  parameter int NPAGE = 4,
  parameter int NBIN  = 1,
  parameter int DEPTH = 64,
  parameter int NW    = 1,
  localparam int PW   = (NPAGE > 1) ? $clog2(NPAGE) : 1,
  localparam int BW   = (NBIN > 1) ? $clog2(NBIN) : 1,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int CW   = $clog2(DEPTH + 1)
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     clr,
  input  logic [PW-1:0]            clr_page,
  input  logic [NW-1:0]            wr_en,
  input  logic [NW-1:0][PW-1:0]    wr_page,
  input  logic [NW-1:0][BW-1:0]    wr_bin,
  input  logic [NW-1:0][W-1:0]     wr_data,
  input  logic [PW-1:0]            rd_page,
  input  logic [BW-1:0]            rd_bin,
  input  logic [AW-1:0]            rd_addr,
  output logic [W-1:0]             rd_data,
  output logic [NBIN-1:0][CW-1:0]  cnt_all,
  output logic [15:0]              overflows
);

  logic [W-1:0]  mem [NPAGE][NBIN][DEPTH];
  logic [CW-1:0] cnt [NPAGE][NBIN];

  // address of every write port: current count plus earlier ports to the same bin
  logic [NW-1:0][CW:0] waddr;
  logic [NW-1:0]       wok;
  always_comb begin
    for (int w = 0; w < NW; w++) begin
      waddr[w] = (CW+1)'(cnt[wr_page[w]][wr_bin[w]]);
      for (int v = 0; v < w; v++)
        if (wr_en[v] && wr_page[v] == wr_page[w] && wr_bin[v] == wr_bin[w]) waddr[w] = waddr[w] + 1'b1;
      wok[w] = wr_en[w] && (waddr[w] < (CW+1)'(DEPTH));
    end
  end

  always_ff @(posedge clk) begin
    for (int w = 0; w < NW; w++)
      if (wok[w]) mem[wr_page[w]][wr_bin[w]][waddr[w][AW-1:0]] <= wr_data[w];
    rd_data <= mem[rd_page][rd_bin][rd_addr];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int p = 0; p < NPAGE; p++)
        for (int b = 0; b < NBIN; b++) cnt[p][b] <= '0;
      overflows <= '0;
    end else begin
      for (int w = 0; w < NW; w++) begin
        if (wok[w]) cnt[wr_page[w]][wr_bin[w]] <= waddr[w][CW-1:0] + 1'b1;
        else if (wr_en[w]) overflows <= overflows + 1'b1;
      end
      if (clr)
        for (int b = 0; b < NBIN; b++) cnt[clr_page][b] <= '0;
    end
  end

  always_comb
    for (int b = 0; b < NBIN; b++) cnt_all[b] = cnt[rd_page][b];

endmodule
