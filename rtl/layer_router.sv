// layer_router: sorts the stubs of one event by detector layer.
//
// During its 36-cycle window the router reads the input memory one stub per cycle, in
// arrival order, and writes each stub into the memory of its layer (wr_layer selects it).
// Stubs still unread when the window closes are dropped (truncation). A stub read in
// window cycle c is written in cycle c+LATENCY (1 cycle, as in the demonstrator). The
// router clears its output page at the first cycle of each window. Event numbers are
// 8 bit; the memories use the low bits as page number.
module layer_router
  import tracklet_pkg::*;
#(
  parameter int LATENCY = LAT_LR,
  parameter int CW      = 7
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  output logic [7:0]    rd_evt,
  output logic [5:0]    rd_addr,
  input  logic [CW-1:0] rd_cnt,
  input  stub_t         rd_data,
  output logic          clr,
  output logic [7:0]    clr_evt,
  output logic          wr_en,
  output logic [7:0]    wr_evt,
  output logic [2:0]    wr_layer,
  output stub_t         wr_stub
);
  logic       active, first;
  logic [7:0] cyc, evt;
  logic [6:0] addr;
  logic       issue, v1;
  logic [7:0] e1;

  step_ctrl #(.STEP(STEP_CYCLES), .EW(8)) u_ctrl (
    .clk, .rst, .start, .active, .cyc, .evt, .first);

  assign issue = active && (CW'(addr) < rd_cnt);
  assign rd_evt = evt;
  assign rd_addr = addr[5:0];
  assign clr = first;
  assign clr_evt = evt;

  always_ff @(posedge clk) begin
    if (rst || start) addr <= '0;
    else if (issue) addr <= addr + 1'b1;
    if (rst) v1 <= 1'b0;
    else v1 <= issue;
    e1 <= evt;
  end

  // result of the read in cycle c+1, delayed to c+LATENCY
  logic [1+8+3+$bits(stub_t)-1:0] pipe_in, pipe_out;
  assign pipe_in = {v1, e1, rd_data.layer, rd_data};
  delay_line #(.W($bits(pipe_in)), .D(LATENCY - 1)) u_dly (
    .clk, .rst, .din(pipe_in), .dout(pipe_out));
  assign {wr_en, wr_evt, wr_layer, wr_stub} = pipe_out;
endmodule
