// sector_processor: the tracklet track finder for one phi sector (one processing board).
//
// Stubs of one event arrive on the input port during a 36-cycle window marked by in_start
// (one stub per clock). They then pass through eleven processing steps, each of which works
// on the event for 36 cycles (150 ns at 240 MHz) and hands it on through event memories:
//   layer router -> VM router (per layer) -> tracklet engine -> tracklet calculator (per seed)
//   -> projection transceiver -> projection router -> match engine -> match calculator
//   -> match transceiver (per layer) -> track fit (per seed) -> duplicate removal.
// Every step starts a fixed time after the previous one (36 cycles plus its own latency,
// plus the link delay for the two transceiver steps), so the whole chain has a fixed
// latency and a new event can enter every 36 cycles; data a step cannot reach in its
// window are dropped (truncation). Event memories keep several events in flight; the
// event number modulo their page count selects the page.
//
// Neighbour links: projections that leave the sector go out on pt_tx_{minus,plus}_* per
// layer and the neighbours' projections come in on pt_rx_*; matches for tracklets of the
// neighbours go back on mt_tx_* and matches for our tracklets come in on mt_rx_*. The
// serial links are outside this module; the schedule allows LINK_CYCLES for them, so a
// received word must arrive within LINK_CYCLES of the matching transmit slot.
// Output: up to NSEED tracks per cycle on out_en/out_trk, one output-register stage after
// duplicate removal. Step order, latencies and the neighbour exchange follow the paper;
// memory organisation and number formats are this design's own.
module sector_processor
  import tracklet_pkg::*;
#(
  parameter int LINK_DELAY = LINK_CYCLES
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic                          in_start,
  input  logic                          in_valid,
  input  stub_t                         in_stub,
  output logic [NLAYER-1:0]             pt_tx_minus_en,
  output projlink_t [NLAYER-1:0]        pt_tx_minus,
  output logic [NLAYER-1:0]             pt_tx_plus_en,
  output projlink_t [NLAYER-1:0]        pt_tx_plus,
  input  logic [NLAYER-1:0]             pt_rx_minus_en,
  input  projlink_t [NLAYER-1:0]        pt_rx_minus,
  input  logic [NLAYER-1:0]             pt_rx_plus_en,
  input  projlink_t [NLAYER-1:0]        pt_rx_plus,
  output logic [NLAYER-1:0]             mt_tx_minus_en,
  output matchlink_t [NLAYER-1:0]       mt_tx_minus,
  output logic [NLAYER-1:0]             mt_tx_plus_en,
  output matchlink_t [NLAYER-1:0]       mt_tx_plus,
  input  logic [NLAYER-1:0]             mt_rx_minus_en,
  input  matchlink_t [NLAYER-1:0]       mt_rx_minus,
  input  logic [NLAYER-1:0]             mt_rx_plus_en,
  input  matchlink_t [NLAYER-1:0]       mt_rx_plus,
  output logic [NSEED-1:0]              out_en,
  output track_t [NSEED-1:0]            out_trk,
  output logic [15:0]                   n_dup,
  output logic [15:0]                   n_overflow
);

  // ------------------------------------------------------------------ step schedule
  logic lr_start, vmr_start, te_start, tc_start, pt_start, pr_start, me_start, mc_start,
        mt_start, tf_start, dr_clr;
  logic [NSEED-1:0] tf_first;

  delay_line #(.W(1), .D(STEP_CYCLES - 1 + LAT_INPUT)) u_s_lr  (.clk, .rst, .din(in_start),  .dout(lr_start));
  delay_line #(.W(1), .D(STEP_CYCLES + LAT_LR))  u_s_vmr (.clk, .rst, .din(lr_start),  .dout(vmr_start));
  delay_line #(.W(1), .D(STEP_CYCLES + LAT_VMR)) u_s_te  (.clk, .rst, .din(vmr_start), .dout(te_start));
  delay_line #(.W(1), .D(STEP_CYCLES + LAT_TE))  u_s_tc  (.clk, .rst, .din(te_start),  .dout(tc_start));
  delay_line #(.W(1), .D(STEP_CYCLES + LAT_TC))  u_s_pt  (.clk, .rst, .din(tc_start),  .dout(pt_start));
  delay_line #(.W(1), .D(STEP_CYCLES + LAT_PT + LINK_DELAY)) u_s_pr (.clk, .rst, .din(pt_start), .dout(pr_start));
  delay_line #(.W(1), .D(STEP_CYCLES + LAT_PR))  u_s_me  (.clk, .rst, .din(pr_start),  .dout(me_start));
  delay_line #(.W(1), .D(STEP_CYCLES + LAT_ME))  u_s_mc  (.clk, .rst, .din(me_start),  .dout(mc_start));
  delay_line #(.W(1), .D(STEP_CYCLES + LAT_MC))  u_s_mt  (.clk, .rst, .din(mc_start),  .dout(mt_start));
  delay_line #(.W(1), .D(STEP_CYCLES + LAT_MT + LINK_DELAY)) u_s_tf (.clk, .rst, .din(mt_start), .dout(tf_start));
  delay_line #(.W(1), .D(LAT_TF)) u_s_dr (.clk, .rst, .din(tf_first[0]), .dout(dr_clr));

  // ------------------------------------------------------------------ input link stage
  logic [7:0] in_evt_q, in_evt;
  logic       in_started;
  logic       iw_en;
  logic [7:0] iw_evt;
  stub_t      iw_stub;
  assign in_evt = in_start ? (in_started ? in_evt_q + 1'b1 : 8'd0) : in_evt_q;
  always_ff @(posedge clk) begin
    if (rst) begin
      in_evt_q <= '0; in_started <= 1'b0; iw_en <= 1'b0;
    end else begin
      in_evt_q <= in_evt;
      if (in_start) in_started <= 1'b1;
      iw_en <= in_valid;
    end
    iw_evt  <= in_evt;
    iw_stub <= in_stub;
  end

  // overflow counters of all memories (summed below)
  logic [15:0] ovf_in;
  logic [NLAYER-1:0][15:0] ovf_lay, ovf_vte, ovf_vme, ovf_pj, ovf_pt, ovf_vpj, ovf_cand, ovf_mc;
  logic [NSEED-1:0][15:0]  ovf_sp, ovf_tl;
  logic [NSEED-1:0][3:0][15:0] ovf_fm;

  // ------------------------------------------------------------------ layer router
  logic [7:0] lr_rd_evt, lr_clr_evt, lr_wr_evt;
  logic [5:0] lr_rd_addr;
  logic [0:0][6:0] in_cnt;
  stub_t      in_rd;
  logic       lr_clr, lr_wr_en;
  logic [2:0] lr_wr_layer;
  stub_t      lr_wr_stub;

  event_mem #(.W($bits(stub_t)), .NPAGE(4), .NBIN(1), .DEPTH(64), .NW(1)) u_in_mem (
    .clk, .rst, .clr(in_start), .clr_page(in_evt[1:0]),
    .wr_en(iw_en), .wr_page(iw_evt[1:0]), .wr_bin(1'b0), .wr_data(iw_stub),
    .rd_page(lr_rd_evt[1:0]), .rd_bin(1'b0), .rd_addr(lr_rd_addr), .rd_data(in_rd),
    .cnt_all(in_cnt), .overflows(ovf_in));

  layer_router u_lr (
    .clk, .rst, .start(lr_start), .rd_evt(lr_rd_evt), .rd_addr(lr_rd_addr), .rd_cnt(in_cnt[0]),
    .rd_data(in_rd), .clr(lr_clr), .clr_evt(lr_clr_evt), .wr_en(lr_wr_en), .wr_evt(lr_wr_evt),
    .wr_layer(lr_wr_layer), .wr_stub(lr_wr_stub));

  // ------------------------------------------------------------------ per layer: VM router
  logic [NLAYER-1:0][7:0]  vmr_rd_evt, vmr_clr_evt, vmr_wr_evt;
  logic [NLAYER-1:0][5:0]  vmr_rd_addr;
  logic [NLAYER-1:0][6:0]  lay_cnt;
  stub_t [NLAYER-1:0]      lay_rd;
  logic [NLAYER-1:0]       vmr_clr, vmr_wr_en;
  logic [NLAYER-1:0][2:0]  vmr_wr_vm;
  vmstub_t [NLAYER-1:0]    vmr_wr_data;

  // VM stub memories: copy for the tracklet engines (vte) and for the match engines (vme)
  logic [NLAYER-1:0][7:0]          vte_rd_evt;
  logic [NLAYER-1:0][2:0]          vte_rd_bin;
  logic [NLAYER-1:0][3:0]          vte_rd_addr;
  vmstub_t [NLAYER-1:0]            vte_rd;
  logic [NLAYER-1:0][NVM-1:0][4:0] vte_cnt;
  logic [NLAYER-1:0][7:0]          vme_rd_evt;
  logic [NLAYER-1:0][2:0]          vme_rd_bin;
  logic [NLAYER-1:0][3:0]          vme_rd_addr;
  vmstub_t [NLAYER-1:0]            vme_rd;
  logic [NLAYER-1:0][NVM-1:0][4:0] vme_cnt;

  for (genvar l = 0; l < NLAYER; l++) begin : g_layer_front
    logic [0:0][6:0] c;
    event_mem #(.W($bits(stub_t)), .NPAGE(4), .NBIN(1), .DEPTH(64), .NW(1)) u_lay_mem (
      .clk, .rst, .clr(lr_clr), .clr_page(lr_clr_evt[1:0]),
      .wr_en(lr_wr_en && lr_wr_layer == 3'(l)), .wr_page(lr_wr_evt[1:0]), .wr_bin(1'b0),
      .wr_data(lr_wr_stub),
      .rd_page(vmr_rd_evt[l][1:0]), .rd_bin(1'b0), .rd_addr(vmr_rd_addr[l]), .rd_data(lay_rd[l]),
      .cnt_all(c), .overflows(ovf_lay[l]));
    assign lay_cnt[l] = c[0];

    vm_router u_vmr (
      .clk, .rst, .start(vmr_start), .rd_evt(vmr_rd_evt[l]), .rd_addr(vmr_rd_addr[l]),
      .rd_cnt(lay_cnt[l]), .rd_data(lay_rd[l]), .clr(vmr_clr[l]), .clr_evt(vmr_clr_evt[l]),
      .wr_en(vmr_wr_en[l]), .wr_evt(vmr_wr_evt[l]), .wr_vm(vmr_wr_vm[l]), .wr_data(vmr_wr_data[l]));

    event_mem #(.W($bits(vmstub_t)), .NPAGE(4), .NBIN(NVM), .DEPTH(16), .NW(1)) u_vte_mem (
      .clk, .rst, .clr(vmr_clr[l]), .clr_page(vmr_clr_evt[l][1:0]),
      .wr_en(vmr_wr_en[l]), .wr_page(vmr_wr_evt[l][1:0]), .wr_bin(vmr_wr_vm[l]),
      .wr_data(vmr_wr_data[l]),
      .rd_page(vte_rd_evt[l][1:0]), .rd_bin(vte_rd_bin[l]), .rd_addr(vte_rd_addr[l]),
      .rd_data(vte_rd[l]), .cnt_all(vte_cnt[l]), .overflows(ovf_vte[l]));

    event_mem #(.W($bits(vmstub_t)), .NPAGE(16), .NBIN(NVM), .DEPTH(16), .NW(1)) u_vme_mem (
      .clk, .rst, .clr(vmr_clr[l]), .clr_page(vmr_clr_evt[l][3:0]),
      .wr_en(vmr_wr_en[l]), .wr_page(vmr_wr_evt[l][3:0]), .wr_bin(vmr_wr_vm[l]),
      .wr_data(vmr_wr_data[l]),
      .rd_page(vme_rd_evt[l][3:0]), .rd_bin(vme_rd_bin[l]), .rd_addr(vme_rd_addr[l]),
      .rd_data(vme_rd[l]), .cnt_all(vme_cnt[l]), .overflows(ovf_vme[l]));
  end

  // ------------------------------------------------------------------ per seed: TE, TC
  logic [NSEED-1:0][NLAYER-1:0]  tc_pj_en;
  proj_t [NSEED-1:0][NLAYER-1:0] tc_pj;
  logic [NSEED-1:0][7:0]         tc_pj_evt;
  logic [NSEED-1:0]              tc_clr;
  logic [NSEED-1:0][7:0]         tc_clr_evt;

  // tracklet memories, read by the track fit
  logic [NSEED-1:0][7:0]         tf_rd_evt;
  logic [NSEED-1:0][TIDXW-1:0]   tf_rd_addr;
  tracklet_t [NSEED-1:0]         tl_rd;
  logic [NSEED-1:0][5:0]         tl_cnt;

  for (genvar s = 0; s < NSEED; s++) begin : g_seed
    localparam int LI = SEED_IN[s];
    localparam int LO = SEED_OUT[s];
    logic [7:0]  te_rd_evt, te_clr_evt, te_wr_evt, tc_rd_evt;
    logic [5:0]  tc_rd_addr;
    logic        te_clr, te_wr_en;
    stubpair_t   te_wr, sp_rd;
    logic [0:0][6:0] sp_cnt;
    logic        tl_en;
    logic [7:0]  tl_evt;
    tracklet_t   tl;
    logic [0:0][5:0] tlc;

    // the seed's two layers are read only by this engine
    assign vte_rd_evt[LI] = te_rd_evt;
    assign vte_rd_evt[LO] = te_rd_evt;

    tracklet_engine #(.SEED(s)) u_te (
      .clk, .rst, .start(te_start), .rd_evt(te_rd_evt),
      .in_cnt(vte_cnt[LI]), .in_bin(vte_rd_bin[LI]), .in_addr(vte_rd_addr[LI]), .in_data(vte_rd[LI]),
      .out_cnt(vte_cnt[LO]), .out_bin(vte_rd_bin[LO]), .out_addr(vte_rd_addr[LO]), .out_data(vte_rd[LO]),
      .clr(te_clr), .clr_evt(te_clr_evt), .wr_en(te_wr_en), .wr_evt(te_wr_evt), .wr_data(te_wr));

    event_mem #(.W($bits(stubpair_t)), .NPAGE(4), .NBIN(1), .DEPTH(64), .NW(1)) u_sp_mem (
      .clk, .rst, .clr(te_clr), .clr_page(te_clr_evt[1:0]),
      .wr_en(te_wr_en), .wr_page(te_wr_evt[1:0]), .wr_bin(1'b0), .wr_data(te_wr),
      .rd_page(tc_rd_evt[1:0]), .rd_bin(1'b0), .rd_addr(tc_rd_addr), .rd_data(sp_rd),
      .cnt_all(sp_cnt), .overflows(ovf_sp[s]));

    tracklet_calculator #(.SEED(s)) u_tc (
      .clk, .rst, .start(tc_start), .rd_evt(tc_rd_evt), .rd_addr(tc_rd_addr), .rd_cnt(sp_cnt[0]),
      .rd_data(sp_rd), .clr(tc_clr[s]), .clr_evt(tc_clr_evt[s]), .tl_en(tl_en), .tl_evt(tl_evt),
      .tl_data(tl), .pj_en(tc_pj_en[s]), .pj_data(tc_pj[s]));
    assign tc_pj_evt[s] = tl_evt;

    event_mem #(.W($bits(tracklet_t)), .NPAGE(16), .NBIN(1), .DEPTH(NTRK), .NW(1)) u_tl_mem (
      .clk, .rst, .clr(tc_clr[s]), .clr_page(tc_clr_evt[s][3:0]),
      .wr_en(tl_en), .wr_page(tl_evt[3:0]), .wr_bin(1'b0), .wr_data(tl),
      .rd_page(tf_rd_evt[s][3:0]), .rd_bin(1'b0), .rd_addr(tf_rd_addr[s]), .rd_data(tl_rd[s]),
      .cnt_all(tlc), .overflows(ovf_tl[s]));
    assign tl_cnt[s] = tlc[0];
  end

  // ------------------------------------------------------------------ per layer: PT .. MT
  logic [NLAYER-1:0][2:0]       mt_wr_en;
  logic [NLAYER-1:0][2:0][7:0]  mt_wr_evt;
  match_t [NLAYER-1:0][2:0]     mt_wr;
  logic [NLAYER-1:0]            mt_clr;
  logic [NLAYER-1:0][7:0]       mt_clr_evt;

  for (genvar l = 0; l < NLAYER; l++) begin : g_layer_back
    // projection memory: one write port per seed
    logic [NSEED-1:0]            pj_we;
    logic [NSEED-1:0][1:0]       pj_wp;
    proj_t [NSEED-1:0]           pj_wd;
    logic [7:0]                  pt_rd_evt, pt_clr_evt;
    logic [4:0]                  pt_rd_addr;
    proj_t                       pj_rd;
    logic [0:0][5:0]             pj_cnt;
    logic                        pt_clr;
    logic [2:0]                  pt_we;
    logic [2:0][7:0]             pt_wevt;
    proj_t [2:0]                 pt_wd;
    logic [2:0][2:0]             pt_wp;
    logic [2:0]                  pt_wb;

    for (genvar s = 0; s < NSEED; s++) begin : g_pw
      assign pj_we[s] = tc_pj_en[s][l];
      assign pj_wp[s] = tc_pj_evt[s][1:0];
      assign pj_wd[s] = tc_pj[s][l];
    end

    event_mem #(.W($bits(proj_t)), .NPAGE(4), .NBIN(1), .DEPTH(32), .NW(NSEED)) u_pj_mem (
      .clk, .rst, .clr(tc_clr[0]), .clr_page(tc_clr_evt[0][1:0]),
      .wr_en(pj_we), .wr_page(pj_wp), .wr_bin('0),
      .wr_data(pj_wd),
      .rd_page(pt_rd_evt[1:0]), .rd_bin(1'b0), .rd_addr(pt_rd_addr), .rd_data(pj_rd),
      .cnt_all(pj_cnt), .overflows(ovf_pj[l]));

    projection_transceiver u_pt (
      .clk, .rst, .start(pt_start), .rd_evt(pt_rd_evt), .rd_addr(pt_rd_addr), .rd_cnt(pj_cnt[0]),
      .rd_data(pj_rd), .clr(pt_clr), .clr_evt(pt_clr_evt),
      .tx_minus_en(pt_tx_minus_en[l]), .tx_minus(pt_tx_minus[l]),
      .tx_plus_en(pt_tx_plus_en[l]), .tx_plus(pt_tx_plus[l]),
      .rx_minus_en(pt_rx_minus_en[l]), .rx_minus(pt_rx_minus[l]),
      .rx_plus_en(pt_rx_plus_en[l]), .rx_plus(pt_rx_plus[l]),
      .wr_en(pt_we), .wr_evt(pt_wevt), .wr_data(pt_wd));

    for (genvar w = 0; w < 3; w++) begin : g_ptw
      assign pt_wp[w] = pt_wevt[w][2:0];
      assign pt_wb[w] = 1'b0;
    end

    logic [7:0]      pr_rd_evt, pr_clr_evt, pr_wr_evt;
    logic [5:0]      pr_rd_addr;
    proj_t           pt_rd, pr_wd;
    logic [0:0][6:0] pt_cnt;
    logic            pr_clr, pr_we;
    logic [2:0]      pr_vm;

    event_mem #(.W($bits(proj_t)), .NPAGE(8), .NBIN(1), .DEPTH(64), .NW(3)) u_pt_mem (
      .clk, .rst, .clr(pt_clr), .clr_page(pt_clr_evt[2:0]),
      .wr_en(pt_we), .wr_page(pt_wp), .wr_bin(pt_wb), .wr_data(pt_wd),
      .rd_page(pr_rd_evt[2:0]), .rd_bin(1'b0), .rd_addr(pr_rd_addr), .rd_data(pt_rd),
      .cnt_all(pt_cnt), .overflows(ovf_pt[l]));

    projection_router u_pr (
      .clk, .rst, .start(pr_start), .rd_evt(pr_rd_evt), .rd_addr(pr_rd_addr), .rd_cnt(pt_cnt[0]),
      .rd_data(pt_rd), .clr(pr_clr), .clr_evt(pr_clr_evt), .wr_en(pr_we), .wr_evt(pr_wr_evt),
      .wr_vm(pr_vm), .wr_data(pr_wd));

    logic [7:0]              me_rd_evt, me_clr_evt, me_wr_evt;
    logic [2:0]              vpj_bin;
    logic [3:0]              vpj_addr;
    proj_t                   vpj_rd;
    logic [NVM-1:0][4:0]     vpj_cnt;
    logic                    me_clr, me_we;
    cand_t                   me_wd;

    event_mem #(.W($bits(proj_t)), .NPAGE(4), .NBIN(NVM), .DEPTH(16), .NW(1)) u_vpj_mem (
      .clk, .rst, .clr(pr_clr), .clr_page(pr_clr_evt[1:0]),
      .wr_en(pr_we), .wr_page(pr_wr_evt[1:0]), .wr_bin(pr_vm), .wr_data(pr_wd),
      .rd_page(me_rd_evt[1:0]), .rd_bin(vpj_bin), .rd_addr(vpj_addr), .rd_data(vpj_rd),
      .cnt_all(vpj_cnt), .overflows(ovf_vpj[l]));

    assign vme_rd_evt[l] = me_rd_evt;
    match_engine #(.LAYER(l)) u_me (
      .clk, .rst, .start(me_start), .rd_evt(me_rd_evt),
      .pj_cnt(vpj_cnt), .pj_bin(vpj_bin), .pj_addr(vpj_addr), .pj_data(vpj_rd),
      .st_cnt(vme_cnt[l]), .st_bin(vme_rd_bin[l]), .st_addr(vme_rd_addr[l]), .st_data(vme_rd[l]),
      .clr(me_clr), .clr_evt(me_clr_evt), .wr_en(me_we), .wr_evt(me_wr_evt), .wr_data(me_wd));

    logic [7:0]      mc_rd_evt, mc_clr_evt, mc_wr_evt;
    logic [5:0]      mc_rd_addr;
    cand_t           cand_rd;
    logic [0:0][6:0] cand_cnt;
    logic            mc_clr, mc_we;
    match_t          mc_wd;

    event_mem #(.W($bits(cand_t)), .NPAGE(4), .NBIN(1), .DEPTH(64), .NW(1)) u_cand_mem (
      .clk, .rst, .clr(me_clr), .clr_page(me_clr_evt[1:0]),
      .wr_en(me_we), .wr_page(me_wr_evt[1:0]), .wr_bin(1'b0), .wr_data(me_wd),
      .rd_page(mc_rd_evt[1:0]), .rd_bin(1'b0), .rd_addr(mc_rd_addr), .rd_data(cand_rd),
      .cnt_all(cand_cnt), .overflows(ovf_cand[l]));

    match_calculator #(.LAYER(l)) u_mc (
      .clk, .rst, .start(mc_start), .rd_evt(mc_rd_evt), .rd_addr(mc_rd_addr), .rd_cnt(cand_cnt[0]),
      .rd_data(cand_rd), .clr(mc_clr), .clr_evt(mc_clr_evt), .wr_en(mc_we), .wr_evt(mc_wr_evt),
      .wr_data(mc_wd));

    logic [7:0]      mt_rd_evt;
    logic [4:0]      mt_rd_addr;
    match_t          mcm_rd;
    logic [0:0][5:0] mcm_cnt;

    event_mem #(.W($bits(match_t)), .NPAGE(4), .NBIN(1), .DEPTH(32), .NW(1)) u_mc_mem (
      .clk, .rst, .clr(mc_clr), .clr_page(mc_clr_evt[1:0]),
      .wr_en(mc_we), .wr_page(mc_wr_evt[1:0]), .wr_bin(1'b0), .wr_data(mc_wd),
      .rd_page(mt_rd_evt[1:0]), .rd_bin(1'b0), .rd_addr(mt_rd_addr), .rd_data(mcm_rd),
      .cnt_all(mcm_cnt), .overflows(ovf_mc[l]));

    match_transceiver u_mt (
      .clk, .rst, .start(mt_start), .rd_evt(mt_rd_evt), .rd_addr(mt_rd_addr), .rd_cnt(mcm_cnt[0]),
      .rd_data(mcm_rd), .clr(mt_clr[l]), .clr_evt(mt_clr_evt[l]),
      .tx_minus_en(mt_tx_minus_en[l]), .tx_minus(mt_tx_minus[l]),
      .tx_plus_en(mt_tx_plus_en[l]), .tx_plus(mt_tx_plus[l]),
      .rx_minus_en(mt_rx_minus_en[l]), .rx_minus(mt_rx_minus[l]),
      .rx_plus_en(mt_rx_plus_en[l]), .rx_plus(mt_rx_plus[l]),
      .wr_en(mt_wr_en[l]), .wr_evt(mt_wr_evt[l]), .wr_data(mt_wr[l]));
  end

  // ------------------------------------------------------------------ per seed: track fit
  track_t [NSEED-1:0] tf_trk;
  logic [NSEED-1:0]   tf_en;

  for (genvar s = 0; s < NSEED; s++) begin : g_fit
    logic [3:0][NTRK-1:0] hit;
    match_t [3:0]         fm_rd;
    for (genvar q = 0; q < 4; q++) begin : g_fm
      localparam int L = proj_layer(s, q);
      logic [2:0]            we;
      logic [2:0][2:0]       wp;
      logic [2:0][TIDXW-1:0] wb;
      logic [NTRK-1:0][0:0]  c;
      for (genvar w = 0; w < 3; w++) begin : g_w
        assign we[w] = mt_wr_en[L][w] && mt_wr[L][w].seed == 2'(s);
        assign wp[w] = mt_wr_evt[L][w][2:0];
        assign wb[w] = mt_wr[L][w].tidx;
      end
      event_mem #(.W($bits(match_t)), .NPAGE(8), .NBIN(NTRK), .DEPTH(1), .NW(3)) u_fm_mem (
        .clk, .rst, .clr(mt_clr[L]), .clr_page(mt_clr_evt[L][2:0]),
        .wr_en(we), .wr_page(wp), .wr_bin(wb), .wr_data(mt_wr[L]),
        .rd_page(tf_rd_evt[s][2:0]), .rd_bin(tf_rd_addr[s]), .rd_addr(1'b0), .rd_data(fm_rd[q]),
        .cnt_all(c), .overflows(ovf_fm[s][q]));
      for (genvar b = 0; b < NTRK; b++) begin : g_h
        assign hit[q][b] = c[b][0];
      end
    end

    track_fit #(.SEED(s)) u_tf (
      .clk, .rst, .start(tf_start), .rd_evt(tf_rd_evt[s]), .rd_addr(tf_rd_addr[s]),
      .tl_cnt(tl_cnt[s]), .tl_data(tl_rd[s]), .fm_hit(hit), .fm_data(fm_rd),
      .first(tf_first[s]), .trk_en(tf_en[s]), .trk(tf_trk[s]));
  end

  // ------------------------------------------------------------------ duplicate removal, output
  logic [NSEED-1:0] dr_en;
  track_t [NSEED-1:0] dr_trk;
  duplicate_removal u_dr (
    .clk, .rst, .clr(dr_clr), .in_en(tf_en), .in_trk(tf_trk),
    .out_en(dr_en), .out_trk(dr_trk), .n_dup);

  always_ff @(posedge clk) begin
    if (rst) out_en <= '0;
    else out_en <= dr_en;
    out_trk <= dr_trk;
  end

  always_comb begin
    n_overflow = ovf_in;
    for (int l = 0; l < NLAYER; l++)
      n_overflow = n_overflow + ovf_lay[l] + ovf_vte[l] + ovf_vme[l] + ovf_pj[l] + ovf_pt[l] +
                   ovf_vpj[l] + ovf_cand[l] + ovf_mc[l];
    for (int s = 0; s < NSEED; s++) begin
      n_overflow = n_overflow + ovf_sp[s] + ovf_tl[s];
      for (int q = 0; q < 4; q++) n_overflow = n_overflow + ovf_fm[s][q];
    end
  end
endmodule
