// duplicate_removal: drops tracks found more than once by different seeds.
//
// The same particle is usually found by several seeding layer pairs. Duplicate removal is
// a streaming step: in every cycle it takes up to NIN tracks (one per track-fit unit) and
// compares each, in pairs, with every track already kept in this event and with the lower-
// numbered inputs of the same cycle. Two tracks share a stub when both have a stub in a
// layer and it is the same stub (same sector and index). A track sharing NSHARED or more
// stubs with a kept track is a duplicate and is dropped; the others are kept (up to NKEEP
// per event; beyond that they are still sent out but no longer compared against) and sent
// out LATENCY = 6 cycles later. `clr` marks the first cycle of a new event's tracks. The
// paper describes the pairwise comparison of shared and independent stubs; the threshold
// and the keep-first order are this design's choices.
module duplicate_removal
  import tracklet_pkg::*;
#(
  parameter int NIN     = NSEED,
  parameter int NKEEP   = 32,
  parameter int LATENCY = LAT_DR
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                clr,
  input  logic [NIN-1:0]      in_en,
  input  track_t [NIN-1:0]    in_trk,
  output logic [NIN-1:0]      out_en,
  output track_t [NIN-1:0]    out_trk,
  output logic [15:0]         n_dup
);
  localparam int KW = $clog2(NKEEP + 1);

  function automatic int shared(input track_t a, input track_t b);
    int n = 0;
    for (int l = 0; l < NLAYER; l++)
      if (a.hit[l] && b.hit[l] && a.sid[l] == b.sid[l]) n++;
    return n;
  endfunction

  track_t        kept [NKEEP];
  logic [KW-1:0] nkept;
  logic [NIN-1:0] dup, keep;

  always_comb begin
    automatic logic [NIN-1:0] kp = '0;
    for (int s = 0; s < NIN; s++) begin
      dup[s] = 1'b0;
      for (int k = 0; k < NKEEP; k++)
        if (!clr && KW'(k) < nkept && shared(in_trk[s], kept[k]) >= NSHARED) dup[s] = 1'b1;
      for (int q = 0; q < s; q++)
        if (kp[q] && shared(in_trk[s], in_trk[q]) >= NSHARED) dup[s] = 1'b1;
      kp[s] = in_en[s] && !dup[s];
    end
    keep = kp;
  end

  logic [$clog2(NIN + 1)-1:0] ndup_now;
  always_comb begin
    ndup_now = '0;
    for (int s = 0; s < NIN; s++) if (in_en[s] && dup[s]) ndup_now = ndup_now + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      nkept <= '0;
      n_dup <= '0;
    end else begin
      automatic logic [KW-1:0] n = clr ? '0 : nkept;
      for (int s = 0; s < NIN; s++) begin
        if (keep[s] && n < KW'(NKEEP)) begin
          kept[n[$clog2(NKEEP)-1:0]] <= in_trk[s];
          n = n + 1'b1;
        end
      end
      nkept <= n;
      n_dup <= n_dup + 16'(ndup_now);
    end
  end

  localparam int DW = NIN + NIN * $bits(track_t);
  logic [DW-1:0] pipe_in, pipe_out;
  assign pipe_in = {keep, in_trk};
  delay_line #(.W(DW), .D(LATENCY)) u_dly (
    .clk, .rst, .din(pipe_in), .dout(pipe_out));
  assign {out_en, out_trk} = pipe_out;
endmodule
