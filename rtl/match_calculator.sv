// match_calculator: computes projection-stub residuals and accepts matches in one layer.
//
// For each candidate from the match engine (one per clock during the 36-cycle window) the
// calculator forms the residuals dphi = phi_stub - phi_proj and dz = z_stub - z_proj and
// accepts the stub when |dphi| <= PHIWIN and |dz| <= ZWIN_MM[LAYER]. Only the first
// accepted stub of each projection is kept: a bitmap over (source sector, seed, tracklet
// index), cleared at the start of each event, remembers which projections already have a
// match in this layer. An accepted match carries the tracklet's identity, the stub's index
// and the two residuals, and is written LATENCY = 16 cycles after the candidate was read.
// Residuals and windows follow the paper; the window values and "first match wins" are
// this design's choices.
module match_calculator
  import tracklet_pkg::*;
#(
  parameter int LAYER   = 0,
  parameter int LATENCY = LAT_MC,
  parameter int CW      = 7
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  output logic [7:0]    rd_evt,
  output logic [5:0]    rd_addr,
  input  logic [CW-1:0] rd_cnt,
  input  cand_t         rd_data,
  output logic          clr,
  output logic [7:0]    clr_evt,
  output logic          wr_en,
  output logic [7:0]    wr_evt,
  output match_t        wr_data
);
  localparam int NID = 4 * 4 * NTRK;   // {src, seed, tracklet index}

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

  logic [NID-1:0] matched;
  logic [$clog2(NID)-1:0] id;
  logic   pass;
  match_t m;
  always_comb begin
    automatic int dphi = int'(rd_data.stub.stub.phi) - int'(rd_data.proj.phi);
    automatic int dz   = int'(rd_data.stub.stub.z) - int'(rd_data.proj.z);
    id   = {rd_data.proj.src, rd_data.proj.seed, rd_data.proj.tidx};
    pass = v1 && (iabs(dphi) <= PHIWIN) && (iabs(dz) <= ZWIN_MM[LAYER]) && !matched[id];
    m.src   = rd_data.proj.src;
    m.seed  = rd_data.proj.seed;
    m.tidx  = rd_data.proj.tidx;
    m.layer = 3'(LAYER);
    m.sid   = {SRC_LOCAL, rd_data.stub.idx};
    m.dphi  = 12'(dphi);
    m.dz    = 12'(dz);
  end

  always_ff @(posedge clk) begin
    if (rst || start) addr <= '0;
    else if (issue) addr <= addr + 1'b1;
    if (rst) v1 <= 1'b0;
    else v1 <= issue;
    e1 <= evt;
    if (rst || first) matched <= '0;
    else if (pass) matched[id] <= 1'b1;
  end

  localparam int DW = 1 + 8 + $bits(match_t);
  logic [DW-1:0] pipe_in, pipe_out;
  assign pipe_in = {pass, e1, m};
  delay_line #(.W(DW), .D(LATENCY - 1)) u_dly (
    .clk, .rst, .din(pipe_in), .dout(pipe_out));
  assign {wr_en, wr_evt, wr_data} = pipe_out;
endmodule
