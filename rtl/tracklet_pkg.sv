// tracklet_pkg: types and constants shared by the tracklet track-finding pipeline.
//
// The pipeline finds charged-particle tracks in one phi sector of a six-layer barrel
// tracker. Every processing step works on one event for STEP_CYCLES clock cycles
// (150 ns at 240 MHz) and hands the event on through event memories. The step names and
// their latencies in clock cycles follow the published demonstrator latency model; the
// number formats, the layer radii and the cut values below are this design's own choices.
//
// Units: stub phi is a 12-bit unsigned position inside the sector (4096 LSB = 2*pi/28 rad),
// z is in mm (signed 12 bit), radii are whole centimetres. Tracklet curvature k = rinv/2 is
// held in phi-LSB per cm in Q8, tan(lambda) t in mm per cm in Q8.
package tracklet_pkg;

  // ---------------- event timing ----------------
  localparam int STEP_CYCLES = 36;           // 150 ns at 240 MHz
  // per-step latency in clock cycles (demonstrator latency model)
  localparam int LAT_INPUT = 1;
  localparam int LAT_LR    = 1;
  localparam int LAT_VMR   = 4;
  localparam int LAT_TE    = 5;
  localparam int LAT_TC    = 43;
  localparam int LAT_PT    = 13;
  localparam int LAT_PR    = 5;
  localparam int LAT_ME    = 6;
  localparam int LAT_MC    = 16;
  localparam int LAT_MT    = 12;
  localparam int LAT_TF    = 26;
  localparam int LAT_DR    = 6;
  localparam int LAT_OUT   = 1;
  localparam int LINK_CYCLES = 76;           // 316.7 ns board-to-board link

  // ---------------- geometry ----------------
  localparam int NLAYER = 6;
  localparam int NSEED  = 3;                 // L1+L2, L3+L4, L5+L6
  localparam int NVMPHI = 4;
  localparam int NVMZ   = 2;
  localparam int NVM    = NVMPHI * NVMZ;
  localparam int PHIW   = 12;
  localparam int ZW     = 12;
  localparam int SECTOR_PHI = 1 << PHIW;
  localparam int R_CM   [NLAYER] = '{23, 36, 51, 68, 88, 108};
  localparam int SEED_IN  [NSEED] = '{0, 2, 4};
  localparam int SEED_OUT [NSEED] = '{1, 3, 5};

  // ---------------- cuts ----------------
  // pT > 2 GeV in 3.8 T: rinv < 0.0057/cm, k = rinv/2 = 2.85 mrad/cm = 52 phi-LSB/cm
  localparam int KMAX_LSB  = 52;
  localparam int KMAX_Q8   = KMAX_LSB * 256;
  localparam int Z0MAX_MM  = 150;            // |z0| < 15 cm
  localparam int PHIWIN    = 40;             // match window in phi LSB
  localparam int ZWIN_MM [NLAYER] = '{10, 10, 10, 60, 60, 60};
  localparam int NSHARED   = 3;              // duplicate if this many stubs are shared

  // ---------------- sizes ----------------
  localparam int SIDXW = 6;                  // stub index inside a layer (64 stubs)
  localparam int TIDXW = 5;                  // tracklet index inside a seed (32 tracklets)
  localparam int NTRK  = 1 << TIDXW;

  // source of a projection / match: this sector or a neighbour
  typedef enum logic [1:0] {SRC_LOCAL = 2'd0, SRC_MINUS = 2'd1, SRC_PLUS = 2'd2} src_e;

  typedef struct packed {
    logic [2:0]             layer;
    logic [PHIW-1:0]        phi;
    logic signed [ZW-1:0]   z;
  } stub_t;

  typedef struct packed {
    stub_t                  stub;
    logic [SIDXW-1:0]       idx;
  } vmstub_t;

  typedef struct packed {
    vmstub_t                inner;
    vmstub_t                outer;
  } stubpair_t;

  typedef struct packed {
    logic [SIDXW-1:0]       idx_in;
    logic [SIDXW-1:0]       idx_out;
    logic signed [15:0]     k;       // Q8, phi LSB per cm
    logic signed [13:0]     phi0;    // phi LSB
    logic signed [15:0]     t;       // Q8, mm per cm
    logic signed [ZW-1:0]   z0;      // mm
  } tracklet_t;

  typedef struct packed {
    src_e                   src;
    logic [1:0]             seed;
    logic [TIDXW-1:0]       tidx;
    logic [2:0]             layer;
    logic signed [13:0]     phi;
    logic signed [ZW-1:0]   z;
  } proj_t;

  typedef struct packed {
    proj_t                  proj;
    vmstub_t                stub;
  } cand_t;

  typedef struct packed {
    src_e                   src;     // sector that owns the tracklet, seen from the matching sector
    logic [1:0]             seed;
    logic [TIDXW-1:0]       tidx;
    logic [2:0]             layer;
    logic [SIDXW+1:0]       sid;     // {sector of the stub, stub index}
    logic signed [11:0]     dphi;
    logic signed [11:0]     dz;
  } match_t;

  typedef struct packed {
    logic [1:0]                        seed;
    logic [TIDXW-1:0]                  tidx;
    logic signed [15:0]                k;
    logic signed [13:0]                phi0;
    logic signed [15:0]                t;
    logic signed [ZW-1:0]              z0;
    logic [NLAYER-1:0]                 hit;
    logic [NLAYER-1:0][SIDXW+1:0]      sid;
  } track_t;

  // words on the board-to-board links carry the event number with them
  typedef struct packed {
    logic [7:0]             evt;
    proj_t                  proj;
  } projlink_t;

  typedef struct packed {
    logic [7:0]             evt;
    match_t                 m;
  } matchlink_t;

  // virtual module of a stub or projection: 4 phi slices x 2 z halves
  function automatic logic [2:0] vm_of(input logic [PHIW-1:0] phi, input logic signed [ZW-1:0] z);
    return {phi[PHIW-1 -: 2], z[ZW-1]};
  endfunction

  // q-th (0..3) layer that seed `seed` projects to, in increasing layer order
  function automatic int proj_layer(input int seed, input int q);
    int n = 0;
    for (int l = 0; l < NLAYER; l++)
      if (l != SEED_IN[seed] && l != SEED_OUT[seed]) begin
        if (n == q) return l;
        n++;
      end
    return 0;
  endfunction

  function automatic int iabs(input int v);
    return (v < 0) ? -v : v;
  endfunction

  // rounded integer division (for elaboration-time tables)
  function automatic longint div_round(input longint n, input longint d);
    longint q;
    if ((n < 0) != (d < 0)) q = (n - d / 2) / d;
    else q = (n + d / 2) / d;
    return q;
  endfunction

endpackage
