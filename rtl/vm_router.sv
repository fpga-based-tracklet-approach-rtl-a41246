// vm_router: sorts the stubs of one layer into virtual modules.
//
// A virtual module (VM) is a slice of the layer in phi and z (here 4 phi slices x 2 z
// halves, see tracklet_pkg::vm_of). One router serves one layer. During its 36-cycle window
// it reads the layer memory one stub per cycle and writes the stub, tagged with its index in
// the layer memory (its identity for the rest of the chain), into the VM bin of its
// output memories; the same write port feeds the copy read by the tracklet engines and the
// copy read by the match engines. Unread stubs at the end of the window are dropped. A stub
// read in cycle c is written in cycle c+LATENCY (4 cycles, as in the demonstrator).
module vm_router
  import tracklet_pkg::*;
#(
  parameter int LATENCY = LAT_VMR,
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
  output logic [2:0]    wr_vm,
  output vmstub_t       wr_data
);
  logic       active, first;
  logic [7:0] cyc, evt;
  logic [6:0] addr;
  logic       issue, v1;
  logic [7:0] e1;
  logic [5:0] a1;

  step_ctrl #(.STEP(STEP_CYCLES), .EW(8)) u_ctrl (
    .clk, .rst, .start, .active, .cyc, .evt, .first);

  assign issue = active && (CW'(addr) < rd_cnt) && (addr < 7'd64);
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
    a1 <= addr[5:0];
  end

  vmstub_t vs;
  always_comb begin
    vs.stub = rd_data;
    vs.idx  = a1;
  end

  logic [1+8+3+$bits(vmstub_t)-1:0] pipe_in, pipe_out;
  assign pipe_in = {v1, e1, vm_of(rd_data.phi, rd_data.z), vs};
  delay_line #(.W($bits(pipe_in)), .D(LATENCY - 1)) u_dly (
    .clk, .rst, .din(pipe_in), .dout(pipe_out));
  assign {wr_en, wr_evt, wr_vm, wr_data} = pipe_out;
endmodule
