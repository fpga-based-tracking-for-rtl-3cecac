// tracklet_calculator: TrackletCalculator processing step for one seeding layer pair.
//
// On START it reads the stub pairs of the event from NPM stub-pair memories (one per
// TrackletEngine; always the lowest-numbered memory that still has unread entries, one
// pair per cycle, at most TMUX pairs). For each pair it fetches both full stubs from the
// inner and outer AllStubs memories and computes, in fixed point and to first order in
// the curvature (the linear helix approximation):
//   dr   = r_out - r_in                         r = nominal radius + stub r offset
//   k    = (phi_out - phi_in) / dr                 dphi/dr = -1/(2 rho), scaled by 2^10
//   t    = (z_out - z_in) / dr                     tan(lambda), scaled by 2^10
//   phi0 = phi_in - k * r_in,  z0 = z_in - t * r_in
// The division uses a 2^16/dr reciprocal table computed at elaboration. A seed with
// |k| > K_MAX (pT < 2 GeV) or |z0| > Z0_MAX (15 cm) is rejected. An accepted tracklet
// is appended to the tracklet-parameter memory; its address there is its tracklet
// index. It is then projected to the nominal radius R of each projection layer,
// phi = phi0 + k R, z = z0 + t R, and every projection that lands inside the sector
// (0 <= phi < 2^14, |z| < 2^11) is appended to that layer's projection memory together
// with the derivatives k and t used later for the exact projection.
// Timing: first write at START+LAT (43), DONE at START+TMUX+LAT.
// The step, its inputs/outputs, the cuts and the use of low-order expansions follow the
// paper; the exact fixed-point formulas and widths are this design's choices.
module tracklet_calculator
  import tracklet_pkg::*;
#(
  parameter int unsigned NPM   = 22,
  parameter int          R_IN  = 230,
  parameter int          R_OUT = 350,
  parameter int          R_PROJ [NPROJ] = '{500, 680, 880, 1100},
  parameter int unsigned TMUX  = TMUX_CYCLES,
  parameter int unsigned LAT   = LAT_TC
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             start,
  output logic             done,
  // stub-pair memories
  output logic [BX_W-1:0]  in_rbx,
  output logic [IDX_W-1:0] pm_raddr [NPM],
  input  logic [IDX_W:0]   pm_count [NPM],
  input  stubpair_t        pm_rdata [NPM],
  // AllStubs of the inner and outer seeding layer
  output logic [IDX_W-1:0] asi_raddr,
  input  stub_t            asi_rdata,
  output logic [IDX_W-1:0] aso_raddr,
  input  stub_t            aso_rdata,
  // outputs
  output logic             clr,
  output logic [BX_W-1:0]  clr_bx,
  output logic [BX_W-1:0]  out_bx,
  output logic             tp_we,
  output tpar_t            tp_data,
  input  logic [IDX_W:0]   tp_wcount,      // write address of the tracklet memory
  output logic [NPROJ-1:0] pj_we,
  output proj_t            pj_data [NPROJ],
  output logic             rejected        // a seed failed the pT or z0 cut
);
  localparam int DR_NOM = R_OUT - R_IN;
  localparam int DR_LO  = DR_NOM - 128;
  localparam int PW     = $clog2(NPM);

  function automatic logic [256*17-1:0] make_inv();
    logic [256*17-1:0] l;
    int dr;
    for (int i = 0; i < 256; i++) begin
      dr = DR_LO + i;
      if (dr < 8) dr = 8;
      l[i*17 +: 17] = 17'((65536 + dr / 2) / dr);
    end
    return l;
  endfunction
  localparam logic [256*17-1:0] INV_LUT = make_inv();

  logic [BX_W-1:0] bx, bx_next;
  logic first, issue;
  step_ctrl #(.TMUX(TMUX), .LAT(LAT), .BX_W(BX_W)) u_ctrl (
    .clk, .rst, .start, .bx, .bx_next, .clr, .first, .issue, .done);
  assign clr_bx = bx_next;
  assign in_rbx = bx;

  // ---- read scheduler: lowest memory with unread pairs ----
  logic [IDX_W:0] rp_q [NPM];
  logic [IDX_W:0] n_q  [NPM];
  logic [IDX_W:0] n    [NPM];
  logic [PW-1:0]  sel, sel_q;
  logic           rd_v, v1;
  always_comb begin
    rd_v = 1'b0; sel = '0;
    for (int m = NPM - 1; m >= 0; m--) begin
      n[m] = first ? pm_count[m] : n_q[m];
      if ((first ? '0 : rp_q[m]) < n[m]) begin rd_v = issue; sel = PW'(m); end
    end
    for (int m = 0; m < int'(NPM); m++) pm_raddr[m] = first ? '0 : rp_q[m][IDX_W-1:0];
  end
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int m = 0; m < int'(NPM); m++) begin rp_q[m] <= '0; n_q[m] <= '0; end
      v1 <= 1'b0; sel_q <= '0;
    end else begin
      for (int m = 0; m < int'(NPM); m++) begin
        n_q[m]  <= n[m];
        rp_q[m] <= (first ? '0 : rp_q[m]) + (IDX_W+1)'(rd_v && sel == PW'(m));
      end
      v1 <= rd_v; sel_q <= sel;
    end
  end

  // ---- stage 1: pair available, fetch stubs ----
  stubpair_t sp1;
  logic      v2;
  stubpair_t sp2;
  assign sp1       = pm_rdata[sel_q];
  assign asi_raddr = sp1.inner;
  assign aso_raddr = sp1.outer;
  always_ff @(posedge clk) begin
    if (rst) v2 <= 1'b0; else v2 <= v1;
    sp2 <= sp1;
  end

  // ---- stage 2: stubs available; differences and reciprocal ----
  logic v3;
  logic signed [15:0] dphi3, dz3;
  logic signed [12:0] r1_3;
  logic [16:0] inv3;
  stub_t si3;
  stubpair_t sp3;
  int dr2;
  always_comb begin
    dr2 = (R_OUT + int'(aso_rdata.r)) - (R_IN + int'(asi_rdata.r));
    if (dr2 < DR_LO) dr2 = DR_LO;
    if (dr2 > DR_LO + 255) dr2 = DR_LO + 255;
  end
  always_ff @(posedge clk) begin
    if (rst) v3 <= 1'b0; else v3 <= v2;
    dphi3 <= 16'(signed'({2'b0, aso_rdata.phi}) - signed'({2'b0, asi_rdata.phi}));
    dz3   <= 16'(aso_rdata.z - asi_rdata.z);
    r1_3  <= 13'(R_IN + int'(asi_rdata.r));
    inv3  <= INV_LUT[(dr2 - DR_LO) * 17 +: 17];
    si3   <= asi_rdata;
    sp3   <= sp2;
  end

  // ---- stage 3: slopes ----
  logic v4;
  logic signed [23:0] k4, t4;
  logic signed [12:0] r1_4;
  stub_t si4;
  stubpair_t sp4;
  always_ff @(posedge clk) begin
    if (rst) v4 <= 1'b0; else v4 <= v3;
    k4   <= 24'((40'(dphi3) * signed'({23'b0, inv3})) >>> 6);
    t4   <= 24'((40'(dz3)   * signed'({23'b0, inv3})) >>> 6);
    r1_4 <= r1_3; si4 <= si3; sp4 <= sp3;
  end

  // ---- stage 4: intercepts and cuts ----
  logic v5, ok5;
  tpar_t tp5;
  int phi0_c, z0_c;
  always_comb begin
    phi0_c = int'(si4.phi) - int'((40'(k4) * 40'(r1_4)) >>> K_FRAC);
    z0_c   = int'(si4.z)   - int'((40'(t4) * 40'(r1_4)) >>> K_FRAC);
  end
  always_ff @(posedge clk) begin
    if (rst) begin v5 <= 1'b0; ok5 <= 1'b0; end
    else begin
      v5  <= v4;
      ok5 <= v4 && (iabs(int'(k4)) <= K_MAX) && (iabs(z0_c) <= Z0_MAX) && (iabs(int'(t4)) < 32768);
    end
    tp5.k     <= 16'(k4);
    tp5.t     <= 16'(t4);
    tp5.phi0  <= 16'(phi0_c);
    tp5.z0    <= Z_W'(z0_c);
    tp5.inner <= sp4.inner;
    tp5.outer <= sp4.outer;
  end
  assign rejected = v5 && !ok5;

  // ---- stage 5: projections ----
  typedef struct packed {
    logic [BX_W-1:0]   bx;
    tpar_t             tp;
    logic [NPROJ-1:0]  pv;
    logic [NPROJ-1:0][PHI_W-1:0] pphi;
    logic [NPROJ-1:0][Z_W-1:0]   pz;
  } tc_out_t;
  tc_out_t o_in, o_out;
  logic    o_v;
  int pphi_c [NPROJ];
  int pz_c   [NPROJ];
  always_comb begin
    o_in.bx = bx;
    o_in.tp = tp5;
    for (int l = 0; l < int'(NPROJ); l++) begin
      pphi_c[l] = int'(tp5.phi0) + ((int'(tp5.k) * R_PROJ[l]) >>> K_FRAC);
      pz_c[l]   = int'(tp5.z0)   + ((int'(tp5.t) * R_PROJ[l]) >>> K_FRAC);
      o_in.pv[l]   = (pphi_c[l] >= 0) && (pphi_c[l] < (1 << PHI_W)) && (iabs(pz_c[l]) < (1 << (Z_W - 1)));
      o_in.pphi[l] = PHI_W'(pphi_c[l]);
      o_in.pz[l]   = Z_W'(pz_c[l]);
    end
  end

  // issue at START+1 .. data through 5 register stages; pad the rest of the latency
  delay_pipe #(.W($bits(tc_out_t)), .N(LAT - 6)) u_pad (
    .clk, .rst, .in_valid(ok5), .in_data(o_in), .out_valid(o_v), .out_data(o_out));

  assign out_bx  = o_out.bx;
  assign tp_we   = o_v;
  assign tp_data = o_out.tp;
  always_comb begin
    for (int l = 0; l < int'(NPROJ); l++) begin
      pj_we[l]        = o_v && o_out.pv[l] && !tp_wcount[IDX_W];
      pj_data[l].tidx = tp_wcount[IDX_W-1:0];
      pj_data[l].phi  = o_out.pphi[l];
      pj_data[l].z    = o_out.pz[l];
      pj_data[l].k    = o_out.tp.k;
      pj_data[l].t    = o_out.tp.t;
    end
  end
endmodule
