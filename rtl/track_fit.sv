// track_fit: TrackFit processing step (linearized chi-square fit).
//
// On START it loops over the tracklets of the event, one per cycle (at most TMUX), and
// reads for each the tracklet parameters and the best match in each of the NPROJ
// projection layers. A tracklet with at least MIN_MATCH matched layers becomes a track.
// The fit is linear in the residuals: the two seed stubs enter with residual 0 at their
// nominal radii and each matched layer with its phi (z) residual at its nominal radius.
// A straight-line least-squares fit of residual against radius gives corrections to the
// slope and intercept, i.e. to (k, phi0) in r-phi and (t, z0) in r-z:
//   dslope = sum_i WS[hits][i] * res_i,   dicpt = sum_i WI[hits][i] * res_i
// with the weights WS = (r_i - <r>)/Sxx and WI = 1/N - <r>(r_i - <r>)/Sxx precomputed
// at elaboration for each of the 2^NPROJ hit patterns (the "pre-calculated
// derivatives"), stored scaled by 2^16. chi2 is the sum of squared post-fit residuals,
// phi part divided by 16 plus z part, saturated to 16 bits.
// Output is a stream of tracks (trk_valid/trk/trk_bx) handed straight to duplicate
// removal. Timing: first track at START+LAT (26), DONE at START+TMUX+LAT.
// Using a linearized chi2 fit with precomputed derivatives on the projection residuals
// is the paper's; the uniform weights, chi2 scaling and MIN_MATCH are this design's.
module track_fit
  import tracklet_pkg::*;
#(
  parameter int          R_SEED [2]     = '{230, 350},
  parameter int          R_PROJ [NPROJ] = '{500, 680, 880, 1100},
  parameter int unsigned MIN_MATCH      = 2,
  parameter int unsigned TMUX           = TMUX_CYCLES,
  parameter int unsigned LAT            = LAT_TF
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             start,
  output logic             done,
  output logic [BX_W-1:0]  in_rbx,
  output logic [IDX_W-1:0] tp_raddr,
  input  logic [IDX_W:0]   tp_count,
  input  tpar_t            tp_rdata,
  output logic [IDX_W-1:0] fm_raddr,            // same address in all match tables
  input  fmatch_t          fm_rdata  [NPROJ],
  input  logic [NPROJ-1:0] fm_rvalid,
  output logic             trk_valid,
  output logic [BX_W-1:0]  trk_bx,
  output track_t           trk
);
  localparam int NM = 1 << NPROJ;

  // weight tables [mask][layer], scaled by 2^16 (WS additionally by 2^K_FRAC)
  function automatic logic [NM*NPROJ*32-1:0] make_w(input bit slope);
    logic [NM*NPROJ*32-1:0] l;
    real sx, sxx, xm, n, x, w;
    l = '0;
    for (int m = 0; m < NM; m++) begin
      n = 2.0; sx = real'(R_SEED[0] + R_SEED[1]);
      for (int i = 0; i < int'(NPROJ); i++) if (m[i]) begin n += 1.0; sx += real'(R_PROJ[i]); end
      xm = sx / n;
      sxx = (real'(R_SEED[0]) - xm) ** 2 + (real'(R_SEED[1]) - xm) ** 2;
      for (int i = 0; i < int'(NPROJ); i++) if (m[i]) sxx += (real'(R_PROJ[i]) - xm) ** 2;
      for (int i = 0; i < int'(NPROJ); i++) begin
        x = real'(R_PROJ[i]);
        if (slope) w = 65536.0 * 1024.0 * (x - xm) / sxx;
        else       w = 65536.0 * (1.0 / n - xm * (x - xm) / sxx);
        l[(m * NPROJ + i) * 32 +: 32] = m[i] ? $rtoi(w + ((w < 0.0) ? -0.5 : 0.5)) : 0;
      end
    end
    return l;
  endfunction
  localparam logic [NM*NPROJ*32-1:0] WS = make_w(1'b1);
  localparam logic [NM*NPROJ*32-1:0] WI = make_w(1'b0);

  logic [BX_W-1:0] bx;
  logic first, issue, clr_unused;
  logic [BX_W-1:0] clr_bx_unused;
  step_ctrl #(.TMUX(TMUX), .LAT(LAT), .BX_W(BX_W)) u_ctrl (
    .clk, .rst, .start, .bx, .bx_next(clr_bx_unused), .clr(clr_unused), .first, .issue, .done);
  assign in_rbx = bx;

  logic [IDX_W:0] a_q, a_cur, n_q, n;
  logic rd_v, v1;
  always_comb begin
    n     = first ? tp_count : n_q;
    a_cur = first ? '0 : a_q;
    rd_v  = issue && (a_cur < n);
    tp_raddr = a_cur[IDX_W-1:0];
    fm_raddr = a_cur[IDX_W-1:0];
  end
  logic [IDX_W-1:0] tidx1;
  always_ff @(posedge clk) begin
    if (rst) begin a_q <= '0; n_q <= '0; v1 <= 1'b0; end
    else begin
      n_q <= n; v1 <= rd_v;
      a_q <= rd_v ? a_cur + 1'b1 : a_cur;
    end
    tidx1 <= a_cur[IDX_W-1:0];
  end

  // ---- stage A: data available; hit pattern and weighted residuals ----
  logic [NPROJ-1:0] hits1;
  logic ok1;
  always_comb begin
    hits1 = fm_rvalid;
    ok1   = v1 && ($countones(hits1) >= MIN_MATCH);
  end

  logic vA;
  tpar_t tpA;
  logic [NPROJ-1:0] hA;
  logic [IDX_W-1:0] tidxA;
  fmatch_t fmA [NPROJ];
  logic signed [47:0] pk [NPROJ], pp [NPROJ], pt [NPROJ], pz [NPROJ];
  always_ff @(posedge clk) begin
    if (rst) vA <= 1'b0; else vA <= ok1;
    tpA <= tp_rdata; hA <= hits1; tidxA <= tidx1;
    for (int i = 0; i < int'(NPROJ); i++) begin
      fmA[i] <= fm_rdata[i];
      pk[i] <= 48'(signed'(WS[(hits1 * NPROJ + i) * 32 +: 32])) * 48'(fm_rdata[i].dphi);
      pp[i] <= 48'(signed'(WI[(hits1 * NPROJ + i) * 32 +: 32])) * 48'(fm_rdata[i].dphi);
      pt[i] <= 48'(signed'(WS[(hits1 * NPROJ + i) * 32 +: 32])) * 48'(fm_rdata[i].dz);
      pz[i] <= 48'(signed'(WI[(hits1 * NPROJ + i) * 32 +: 32])) * 48'(fm_rdata[i].dz);
    end
  end

  // ---- stage B: corrections ----
  logic vB;
  tpar_t tpB;
  logic [NPROJ-1:0] hB;
  logic [IDX_W-1:0] tidxB;
  fmatch_t fmB [NPROJ];
  logic signed [31:0] dk, dphi0, dt, dz0;
  always_ff @(posedge clk) begin
    logic signed [47:0] sk, sp, st, sz;
    sk = '0; sp = '0; st = '0; sz = '0;
    for (int i = 0; i < int'(NPROJ); i++) begin
      sk += pk[i]; sp += pp[i]; st += pt[i]; sz += pz[i];
    end
    if (rst) vB <= 1'b0; else vB <= vA;
    dk <= 32'(sk >>> 16); dphi0 <= 32'(sp >>> 16);
    dt <= 32'(st >>> 16); dz0   <= 32'(sz >>> 16);
    tpB <= tpA; hB <= hA; tidxB <= tidxA; fmB <= fmA;
  end

  // ---- stage C: post-fit residuals, chi2, parameters ----
  typedef struct packed { logic [BX_W-1:0] bx; track_t trk; } tf_out_t;
  tf_out_t o_in, o_out;
  always_comb begin
    int ephi, ez;
    int c2phi, c2z, c2;
    c2phi = 0; c2z = 0;
    for (int s = 0; s < 2; s++) begin
      ephi = 0 - (int'(dphi0) + ((int'(dk) * R_SEED[s]) >>> K_FRAC));
      ez   = 0 - (int'(dz0)   + ((int'(dt) * R_SEED[s]) >>> K_FRAC));
      c2phi += ephi * ephi; c2z += ez * ez;
    end
    for (int i = 0; i < int'(NPROJ); i++) if (hB[i]) begin
      ephi = int'(fmB[i].dphi) - (int'(dphi0) + ((int'(dk) * R_PROJ[i]) >>> K_FRAC));
      ez   = int'(fmB[i].dz)   - (int'(dz0)   + ((int'(dt) * R_PROJ[i]) >>> K_FRAC));
      c2phi += ephi * ephi; c2z += ez * ez;
    end
    c2 = (c2phi >>> 4) + c2z;
    o_in.bx           = bx;
    o_in.trk.k        = 16'(int'(tpB.k) + int'(dk));
    o_in.trk.phi0     = 16'(int'(tpB.phi0) + int'(dphi0));
    o_in.trk.t        = 16'(int'(tpB.t) + int'(dt));
    o_in.trk.z0       = Z_W'(int'(tpB.z0) + int'(dz0));
    o_in.trk.chi2     = (c2 > 65535) ? 16'hFFFF : 16'(c2);
    o_in.trk.hits     = hB;
    o_in.trk.tidx     = tidxB;
    o_in.trk.seed_in  = tpB.inner;
    o_in.trk.seed_out = tpB.outer;
    for (int i = 0; i < int'(NPROJ); i++) o_in.trk.sidx[i] = hB[i] ? fmB[i].sidx : '0;
  end
  // issue at START+1, data +2, stage A +3, stage B +4; pad the rest
  delay_pipe #(.W($bits(tf_out_t)), .N(LAT - 4)) u_pad (
    .clk, .rst, .in_valid(vB), .in_data(o_in), .out_valid(trk_valid), .out_data(o_out));
  assign trk_bx = o_out.bx;
  assign trk    = o_out.trk;
endmodule
