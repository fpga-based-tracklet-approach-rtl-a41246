// projection_router: sorts the projections of one layer into virtual modules.
//
// During its 36-cycle window the router reads the layer's projection memory (local
// projections and those received from the neighbours) one per clock and writes each into
// the bin of the virtual module it points to, using the same phi/z slicing as the stubs
// (tracklet_pkg::vm_of), so that the match engine only compares projections with stubs of
// the same virtual module. Writes happen LATENCY = 5 cycles after the read.
module projection_router
  import tracklet_pkg::*;
#(
  parameter int LATENCY = LAT_PR,
  parameter int CW      = 7
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  output logic [7:0]    rd_evt,
  output logic [5:0]    rd_addr,
  input  logic [CW-1:0] rd_cnt,
  input  proj_t         rd_data,
  output logic          clr,
  output logic [7:0]    clr_evt,
  output logic          wr_en,
  output logic [7:0]    wr_evt,
  output logic [2:0]    wr_vm,
  output proj_t         wr_data
);
  logic       active, first;
  logic [7:0] cyc, evt;
  step_ctrl #(.STEP(STEP_CYCLES), .EW(8)) u_ctrl (
    .clk, .rst, .start, .active, .cyc, .evt, .first);

  logic [6:0] addr;
  logic       issue, v1;
  logic [7:0] e1;
  assign issue   = active && (CW'(addr) < rd_cnt) && (addr < 7'd64);
  assign rd_evt  = evt;
  assign rd_addr = addr[5:0];
  assign clr     = first;
  assign clr_evt = evt;

  always_ff @(posedge clk) begin
    if (rst || start) addr <= '0;
    else if (issue) addr <= addr + 1'b1;
    if (rst) v1 <= 1'b0;
    else v1 <= issue;
    e1 <= evt;
  end

  localparam int DW = 1 + 8 + 3 + $bits(proj_t);
  logic [DW-1:0] pipe_in, pipe_out;
  assign pipe_in = {v1, e1, vm_of(rd_data.phi[PHIW-1:0], rd_data.z), rd_data};
  delay_line #(.W(DW), .D(LATENCY - 1)) u_dly (
    .clk, .rst, .din(pipe_in), .dout(pipe_out));
  assign {wr_en, wr_evt, wr_vm, wr_data} = pipe_out;
endmodule
