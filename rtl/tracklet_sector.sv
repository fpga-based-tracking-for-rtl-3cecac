// tracklet_sector: one sector processor of the tracklet track finder (barrel slice:
// seeds from layers 1+2, projections into layers 3-6), for one time-multiplexed slice.
//
// Data flow, one processing step per 108-cycle window, memories in between:
//   input stub memories (NIN per layer, filled from the links)
//   -> VMRouter per layer -> AllStubs per layer + VM stub memories (NVMS per layer)
//   -> TrackletEngine per allowed (inner VM, outer VM) pair of layers 1/2
//   -> stub-pair memories -> TrackletCalculator -> tracklet parameters + projections
//   -> ProjectionRouter per projection layer -> VM projection memories
//   -> MatchEngine per VM of each projection layer -> candidate-match memories
//   -> MatchCalculator per projection layer -> best-match tables
//   -> TrackFit -> PurgeDuplicate -> output track stream.
// A step's DONE is the next step's START, so an event moves one step per window and
// up to eight events are in flight. `run` starts the VMRouters every TMUX cycles; the
// link side writes the stubs of event `link_bx` into the input memories before the
// START that begins that event. With L = 111, the sum of the eight step latencies, the
// tracks of an event leave in the window [START + 6*TMUX + L, START + 7*TMUX + L), i.e.
// by 867 cycles (3612.5 ns at 240 MHz) after START: the published tracklet 2.0 latency
// budget without its two link rows.
// TrackletEngines exist for every inner VM i and outer VM j with |i - j| <= 1
// (3*NVMS - 2 engines). The choice of seeding pair, projection layers, VM count and
// engine pattern is this design's reduced slice of the paper's full sector.
module tracklet_sector
  import tracklet_pkg::*;
#(
  parameter int unsigned NIN  = 3,
  parameter int unsigned NVMS = NVM,
  parameter int unsigned TMUX = TMUX_CYCLES
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            run,
  // link side: stubs of event link_bx, per layer and input memory
  input  logic            link_we   [NLAYER][NIN],
  input  stub_t           link_stub [NLAYER][NIN],
  output logic [BX_W-1:0] link_bx,
  output logic            start,
  // output tracks
  output logic            trk_valid,
  output logic [BX_W-1:0] trk_bx,
  output track_t          trk,
  // status
  output logic            mem_overflow,   // a write to a full memory page was dropped
  output logic            dup_removed     // duplicate removal dropped a track
);
  localparam int unsigned NTE = 3 * NVMS - 2;
  localparam int unsigned VW  = $clog2(NVMS);

  function automatic int te_in(input int t);
    // engines ordered (0,0),(0,1),(1,0),(1,1),(1,2),(2,1),...
    return (t + 1) / 3;
  endfunction
  function automatic int te_out(input int t);
    int i;
    i = (t + 1) / 3;
    return i + ((t + 1) % 3) - 1;
  endfunction

  // ---------------- START generation and link-side event counter ----------------
  logic [$clog2(TMUX)-1:0] tcnt;
  logic running;
  always_ff @(posedge clk) begin
    if (rst) begin tcnt <= '0; running <= 1'b0; link_bx <= '0; end
    else begin
      if (run && !running) running <= 1'b1;
      if (running || run) tcnt <= (tcnt == ($clog2(TMUX))'(TMUX - 1)) ? '0 : tcnt + 1'b1;
      if (start) link_bx <= link_bx + 1'b1;
    end
  end
  assign start = (running || run) && (tcnt == '0);

  logic [NLAYER*NIN+64:0] ovf;   // overflow flags collected from all memories
  assign mem_overflow = |ovf;

  // ---------------- input memories and VMRouters ----------------
  logic [BX_W-1:0] vmr_rbx [NLAYER], vmr_obx [NLAYER], vmr_cbx [NLAYER];
  logic            vmr_clr [NLAYER], vmr_done [NLAYER], as_we [NLAYER];
  logic [IDX_W-1:0] in_raddr [NLAYER][NIN];
  logic [IDX_W:0]   in_count [NLAYER][NIN];
  stub_t            in_rdata [NLAYER][NIN];
  stub_t            as_wdata [NLAYER];
  logic [NVMS-1:0]  vm_we [NLAYER];
  vmstub_t          vm_wdata [NLAYER];

  for (genvar l = 0; l < NLAYER; l++) begin : g_layer
    for (genvar i = 0; i < NIN; i++) begin : g_in
      logic [IDX_W:0] wc_unused;
      event_mem #(.W($bits(stub_t)), .AW(IDX_W), .NPAGE(2), .BX_W(BX_W)) u_in (
        .clk, .rst, .clr(start), .clr_bx(link_bx + 1'b1),
        .we(link_we[l][i]), .wbx(link_bx), .wdata(link_stub[l][i]),
        .rbx(vmr_rbx[l]), .raddr(in_raddr[l][i]), .rdata(in_rdata[l][i]),
        .rcount(in_count[l][i]), .wcount(wc_unused), .overflow(ovf[l * NIN + i]));
    end
    vm_router #(.NIN(NIN), .NVMS(NVMS), .TMUX(TMUX), .LAT(LAT_VMR)) u_vmr (
      .clk, .rst, .start, .done(vmr_done[l]),
      .in_rbx(vmr_rbx[l]), .in_raddr(in_raddr[l]), .in_count(in_count[l]), .in_rdata(in_rdata[l]),
      .clr(vmr_clr[l]), .clr_bx(vmr_cbx[l]), .out_bx(vmr_obx[l]),
      .as_we(as_we[l]), .as_data(as_wdata[l]), .vm_we(vm_we[l]), .vm_data(vm_wdata[l]));
  end

  // AllStubs memories (kept for eight events: read by the TrackletCalculator and the
  // MatchCalculators several steps later)
  logic [IDX_W-1:0] as_raddr [NLAYER];
  stub_t            as_rdata [NLAYER];
  logic [BX_W-1:0]  as_rbx   [NLAYER];
  for (genvar l = 0; l < NLAYER; l++) begin : g_as
    logic [IDX_W:0] rc_unused, wc_unused;
    event_mem #(.W($bits(stub_t)), .AW(IDX_W), .NPAGE(8), .BX_W(BX_W)) u_as (
      .clk, .rst, .clr(vmr_clr[l]), .clr_bx(vmr_cbx[l]),
      .we(as_we[l]), .wbx(vmr_obx[l]), .wdata(as_wdata[l]),
      .rbx(as_rbx[l]), .raddr(as_raddr[l]), .rdata(as_rdata[l]),
      .rcount(rc_unused), .wcount(wc_unused), .overflow(ovf[NLAYER * NIN + l]));
  end

  // ---------------- TrackletEngines (layers 1+2) ----------------
  logic             te_done [NTE];
  logic [BX_W-1:0]  te_rbx [NTE], te_obx [NTE], te_cbx [NTE];
  logic             te_clr [NTE], sp_we [NTE];
  stubpair_t        sp_wdata [NTE];
  logic [BX_W-1:0]  tc_rbx;
  logic [IDX_W-1:0] sp_raddr [NTE];
  logic [IDX_W:0]   sp_count [NTE];
  stubpair_t        sp_rdata [NTE];

  for (genvar t = 0; t < NTE; t++) begin : g_te
    localparam int VI = te_in(t);
    localparam int VO = te_out(t);
    logic [IDX_W-1:0] ira, ora;
    logic [IDX_W:0]   icnt, ocnt, wc0, wc1, wc2;
    vmstub_t          ird, ord;
    logic             o0, o1, o2;
    // private copies of the two VM stub memories this engine reads
    event_mem #(.W($bits(vmstub_t)), .AW(IDX_W), .NPAGE(2), .BX_W(BX_W)) u_vmi (
      .clk, .rst, .clr(vmr_clr[0]), .clr_bx(vmr_cbx[0]),
      .we(vm_we[0][VI]), .wbx(vmr_obx[0]), .wdata(vm_wdata[0]),
      .rbx(te_rbx[t]), .raddr(ira), .rdata(ird), .rcount(icnt), .wcount(wc0), .overflow(o0));
    event_mem #(.W($bits(vmstub_t)), .AW(IDX_W), .NPAGE(2), .BX_W(BX_W)) u_vmo (
      .clk, .rst, .clr(vmr_clr[1]), .clr_bx(vmr_cbx[1]),
      .we(vm_we[1][VO]), .wbx(vmr_obx[1]), .wdata(vm_wdata[1]),
      .rbx(te_rbx[t]), .raddr(ora), .rdata(ord), .rcount(ocnt), .wcount(wc1), .overflow(o1));
    tracklet_engine #(.DVM(VO - VI), .R_IN(RADIUS[0]), .R_OUT(RADIUS[1]), .TMUX(TMUX), .LAT(LAT_TE)) u_te (
      .clk, .rst, .start(vmr_done[0]), .done(te_done[t]), .in_rbx(te_rbx[t]),
      .inner_raddr(ira), .inner_count(icnt), .inner_rdata(ird),
      .outer_raddr(ora), .outer_count(ocnt), .outer_rdata(ord),
      .clr(te_clr[t]), .clr_bx(te_cbx[t]), .out_bx(te_obx[t]), .sp_we(sp_we[t]), .sp_data(sp_wdata[t]));
    event_mem #(.W($bits(stubpair_t)), .AW(IDX_W), .NPAGE(2), .BX_W(BX_W)) u_sp (
      .clk, .rst, .clr(te_clr[t]), .clr_bx(te_cbx[t]),
      .we(sp_we[t]), .wbx(te_obx[t]), .wdata(sp_wdata[t]),
      .rbx(tc_rbx), .raddr(sp_raddr[t]), .rdata(sp_rdata[t]), .rcount(sp_count[t]), .wcount(wc2), .overflow(o2));
    assign ovf[NLAYER * NIN + NLAYER + t] = o0 | o1 | o2;
  end

  // ---------------- TrackletCalculator ----------------
  logic tc_done, tc_clr, tp_we, tc_rej;
  logic [BX_W-1:0] tc_obx, tc_cbx, tf_rbx;
  tpar_t tp_wdata, tp_rdata;
  logic [IDX_W:0] tp_wcount, tp_count;
  logic [IDX_W-1:0] tp_raddr;
  logic [NPROJ-1:0] pj_we;
  proj_t pj_wdata [NPROJ];

  tracklet_calculator #(.NPM(NTE), .R_IN(RADIUS[0]), .R_OUT(RADIUS[1]),
      .R_PROJ('{RADIUS[2], RADIUS[3], RADIUS[4], RADIUS[5]}), .TMUX(TMUX), .LAT(LAT_TC)) u_tc (
    .clk, .rst, .start(te_done[0]), .done(tc_done), .in_rbx(tc_rbx),
    .pm_raddr(sp_raddr), .pm_count(sp_count), .pm_rdata(sp_rdata),
    .asi_raddr(as_raddr[0]), .asi_rdata(as_rdata[0]), .aso_raddr(as_raddr[1]), .aso_rdata(as_rdata[1]),
    .clr(tc_clr), .clr_bx(tc_cbx), .out_bx(tc_obx), .tp_we, .tp_data(tp_wdata), .tp_wcount,
    .pj_we, .pj_data(pj_wdata), .rejected(tc_rej));
  assign as_rbx[0] = tc_rbx;
  assign as_rbx[1] = tc_rbx;

  event_mem #(.W($bits(tpar_t)), .AW(IDX_W), .NPAGE(8), .BX_W(BX_W)) u_tp (
    .clk, .rst, .clr(tc_clr), .clr_bx(tc_cbx), .we(tp_we), .wbx(tc_obx), .wdata(tp_wdata),
    .rbx(tf_rbx), .raddr(tp_raddr), .rdata(tp_rdata), .rcount(tp_count), .wcount(tp_wcount),
    .overflow(ovf[NLAYER * NIN + NLAYER + NTE]));

  // ---------------- per projection layer: PR, ME, MC ----------------
  logic pr_done [NPROJ], me_done [NPROJ][NVMS], mc_done [NPROJ];
  fmatch_t fm_rdata [NPROJ];
  logic [NPROJ-1:0] fm_rvalid;
  logic [IDX_W-1:0] fm_raddr;

  for (genvar p = 0; p < NPROJ; p++) begin : g_proj
    logic [BX_W-1:0]  pr_rbx, pr_obx, pr_cbx, mc_rbx, mc_obx, mc_cbx;
    logic             pr_clr, mc_clr, mc_rej, fm_we, mt_replaced;
    logic [IDX_W-1:0] pr_raddr, mc_praddr, fm_waddr;
    logic [IDX_W:0]   pr_count, wc_a, wc_b, rc_b;
    proj_t            pr_rdata, mc_prdata;
    logic [NVMS-1:0]  vp_we;
    vmproj_t          vp_wdata;
    logic             oa, ob;
    logic [IDX_W-1:0] cm_raddr [NVMS];
    logic [IDX_W:0]   cm_count [NVMS];
    cmatch_t          cm_rdata [NVMS];
    logic [11:0]      fm_key;
    fmatch_t          fm_wdata;
    logic [NVMS-1:0]  ovf_vm;

    // projection memory: one copy for the ProjectionRouter, one for the MatchCalculator
    event_mem #(.W($bits(proj_t)), .AW(IDX_W), .NPAGE(2), .BX_W(BX_W)) u_pj_pr (
      .clk, .rst, .clr(tc_clr), .clr_bx(tc_cbx), .we(pj_we[p]), .wbx(tc_obx), .wdata(pj_wdata[p]),
      .rbx(pr_rbx), .raddr(pr_raddr), .rdata(pr_rdata), .rcount(pr_count), .wcount(wc_a), .overflow(oa));
    event_mem #(.W($bits(proj_t)), .AW(IDX_W), .NPAGE(8), .BX_W(BX_W)) u_pj_mc (
      .clk, .rst, .clr(tc_clr), .clr_bx(tc_cbx), .we(pj_we[p]), .wbx(tc_obx), .wdata(pj_wdata[p]),
      .rbx(mc_rbx), .raddr(mc_praddr), .rdata(mc_prdata), .rcount(rc_b), .wcount(wc_b), .overflow(ob));

    projection_router #(.NVMS(NVMS), .TMUX(TMUX), .LAT(LAT_PR)) u_pr (
      .clk, .rst, .start(tc_done), .done(pr_done[p]), .in_rbx(pr_rbx),
      .pj_raddr(pr_raddr), .pj_count(pr_count), .pj_rdata(pr_rdata),
      .clr(pr_clr), .clr_bx(pr_cbx), .out_bx(pr_obx), .vm_we(vp_we), .vm_data(vp_wdata));

    for (genvar v = 0; v < NVMS; v++) begin : g_vm
      logic [BX_W-1:0]  me_rbx, me_obx, me_cbx;
      logic             me_clr, cm_we, o1, o2, o3;
      logic [IDX_W-1:0] vp_raddr, vs_raddr;
      logic [IDX_W:0]   vp_count, vs_count, w1, w2, w3;
      vmproj_t          vp_rdata;
      vmstub_t          vs_rdata;
      cmatch_t          cm_wdata;
      event_mem #(.W($bits(vmstub_t)), .AW(IDX_W), .NPAGE(8), .BX_W(BX_W)) u_vs (
        .clk, .rst, .clr(vmr_clr[p + 2]), .clr_bx(vmr_cbx[p + 2]),
        .we(vm_we[p + 2][v]), .wbx(vmr_obx[p + 2]), .wdata(vm_wdata[p + 2]),
        .rbx(me_rbx), .raddr(vs_raddr), .rdata(vs_rdata), .rcount(vs_count), .wcount(w1), .overflow(o1));
      event_mem #(.W($bits(vmproj_t)), .AW(IDX_W), .NPAGE(2), .BX_W(BX_W)) u_vp (
        .clk, .rst, .clr(pr_clr), .clr_bx(pr_cbx), .we(vp_we[v]), .wbx(pr_obx), .wdata(vp_wdata),
        .rbx(me_rbx), .raddr(vp_raddr), .rdata(vp_rdata), .rcount(vp_count), .wcount(w2), .overflow(o2));
      match_engine #(.TMUX(TMUX), .LAT(LAT_ME)) u_me (
        .clk, .rst, .start(pr_done[p]), .done(me_done[p][v]), .in_rbx(me_rbx),
        .vp_raddr, .vp_count, .vp_rdata, .vs_raddr, .vs_count, .vs_rdata,
        .clr(me_clr), .clr_bx(me_cbx), .out_bx(me_obx), .cm_we, .cm_data(cm_wdata));
      event_mem #(.W($bits(cmatch_t)), .AW(IDX_W), .NPAGE(2), .BX_W(BX_W)) u_cm (
        .clk, .rst, .clr(me_clr), .clr_bx(me_cbx), .we(cm_we), .wbx(me_obx), .wdata(cm_wdata),
        .rbx(mc_rbx), .raddr(cm_raddr[v]), .rdata(cm_rdata[v]), .rcount(cm_count[v]), .wcount(w3), .overflow(o3));
      assign ovf_vm[v] = o1 | o2 | o3;
    end
    assign ovf[NLAYER * NIN + NLAYER + NTE + 1 + p] = oa | ob | (|ovf_vm);

    match_calculator #(.NCM(NVMS), .PHI_W_C(PHI_WIN[p]), .Z_W_C(Z_WIN[p]), .TMUX(TMUX), .LAT(LAT_MC)) u_mc (
      .clk, .rst, .start(me_done[p][0]), .done(mc_done[p]), .in_rbx(mc_rbx),
      .cm_raddr, .cm_count, .cm_rdata, .pj_raddr(mc_praddr), .pj_rdata(mc_prdata),
      .as_raddr(as_raddr[p + 2]), .as_rdata(as_rdata[p + 2]),
      .clr(mc_clr), .clr_bx(mc_cbx), .out_bx(mc_obx), .fm_we, .fm_waddr, .fm_key, .fm_data(fm_wdata),
      .rejected(mc_rej));
    assign as_rbx[p + 2] = mc_rbx;

    match_table #(.W($bits(fmatch_t)), .KW(12), .AW(IDX_W), .NPAGE(2), .BX_W(BX_W)) u_mt (
      .clk, .rst, .clr(mc_clr), .clr_bx(mc_cbx), .we(fm_we), .wbx(mc_obx), .waddr(fm_waddr),
      .wkey(fm_key), .wdata(fm_wdata), .rbx(tf_rbx), .raddr(fm_raddr),
      .rdata(fm_rdata[p]), .rvalid(fm_rvalid[p]), .replaced(mt_replaced));
  end
  assign ovf[$bits(ovf)-1 : NLAYER * NIN + NLAYER + NTE + 1 + NPROJ] = '0;

  // ---------------- TrackFit and PurgeDuplicate ----------------
  logic tf_done, tf_valid;
  logic [BX_W-1:0] tf_bx;
  track_t tf_trk;
  track_fit #(.R_SEED('{RADIUS[0], RADIUS[1]}), .R_PROJ('{RADIUS[2], RADIUS[3], RADIUS[4], RADIUS[5]}),
      .TMUX(TMUX), .LAT(LAT_TF)) u_tf (
    .clk, .rst, .start(mc_done[0]), .done(tf_done), .in_rbx(tf_rbx),
    .tp_raddr, .tp_count, .tp_rdata, .fm_raddr, .fm_rdata, .fm_rvalid,
    .trk_valid(tf_valid), .trk_bx(tf_bx), .trk(tf_trk));

  purge_duplicate #(.LAT(LAT_PD)) u_pd (
    .clk, .rst, .in_valid(tf_valid), .in_bx(tf_bx), .in_trk(tf_trk),
    .out_valid(trk_valid), .out_bx(trk_bx), .out_trk(trk), .dup(dup_removed));
endmodule
