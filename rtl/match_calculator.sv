// match_calculator: MatchCalculator processing step of one projection layer.
//
// On START it reads the candidate matches of the event from the NCM MatchEngine output
// memories of the layer (lowest-numbered memory with unread entries first, one per
// cycle, at most TMUX). For each candidate it fetches the full projection and the full
// stub and recomputes the projection at the stub's actual radius with the derivatives
// carried by the projection (the projection itself was made at the layer's nominal
// radius, and the stub's r field is its offset from that radius):
//   phi_exact = phi_proj + k * r_off,   z_exact = z_proj + t * r_off
// The residuals dphi = phi_stub - phi_exact and dz = z_stub - z_exact must lie within
// the layer's windows (PHI_WIN, Z_WIN). An accepted match is written to the layer's
// match table at the tracklet's index with |dphi| as key; the table keeps only the
// match with the smallest phi residual per tracklet.
// Timing: first write at START+LAT (16), DONE at START+TMUX+LAT.
// Exact projection with derivatives, residual windows and smallest-residual selection
// follow the paper; formats, window values and the merge order are this design's.
module match_calculator
  import tracklet_pkg::*;
#(
  parameter int unsigned NCM     = NVM,
  parameter int          PHI_W_C = 64,    // phi residual window, phi LSB
  parameter int          Z_W_C   = 16,    // z residual window, mm
  parameter int unsigned TMUX    = TMUX_CYCLES,
  parameter int unsigned LAT     = LAT_MC
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             start,
  output logic             done,
  output logic [BX_W-1:0]  in_rbx,
  output logic [IDX_W-1:0] cm_raddr [NCM],
  input  logic [IDX_W:0]   cm_count [NCM],
  input  cmatch_t          cm_rdata [NCM],
  output logic [IDX_W-1:0] pj_raddr,
  input  proj_t            pj_rdata,
  output logic [IDX_W-1:0] as_raddr,
  input  stub_t            as_rdata,
  output logic             clr,
  output logic [BX_W-1:0]  clr_bx,
  output logic [BX_W-1:0]  out_bx,
  output logic             fm_we,
  output logic [IDX_W-1:0] fm_waddr,
  output logic [11:0]      fm_key,
  output fmatch_t          fm_data,
  output logic             rejected     // a candidate failed the residual windows
);
  localparam int PW = (NCM > 1) ? $clog2(NCM) : 1;

  logic [BX_W-1:0] bx, bx_next;
  logic first, issue;
  step_ctrl #(.TMUX(TMUX), .LAT(LAT), .BX_W(BX_W)) u_ctrl (
    .clk, .rst, .start, .bx, .bx_next, .clr, .first, .issue, .done);
  assign clr_bx = bx_next;
  assign in_rbx = bx;

  // ---- read scheduler ----
  logic [IDX_W:0] rp_q [NCM];
  logic [IDX_W:0] n_q  [NCM];
  logic [IDX_W:0] n    [NCM];
  logic [PW-1:0]  sel, sel_q;
  logic           rd_v, v1;
  always_comb begin
    rd_v = 1'b0; sel = '0;
    for (int m = NCM - 1; m >= 0; m--) begin
      n[m] = first ? cm_count[m] : n_q[m];
      if ((first ? '0 : rp_q[m]) < n[m]) begin rd_v = issue; sel = PW'(m); end
    end
    for (int m = 0; m < int'(NCM); m++) cm_raddr[m] = first ? '0 : rp_q[m][IDX_W-1:0];
  end
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int m = 0; m < int'(NCM); m++) begin rp_q[m] <= '0; n_q[m] <= '0; end
      v1 <= 1'b0; sel_q <= '0;
    end else begin
      for (int m = 0; m < int'(NCM); m++) begin
        n_q[m]  <= n[m];
        rp_q[m] <= (first ? '0 : rp_q[m]) + (IDX_W+1)'(rd_v && sel == PW'(m));
      end
      v1 <= rd_v; sel_q <= sel;
    end
  end

  // ---- stage 1: candidate available, fetch projection and stub ----
  cmatch_t cm1;
  logic v2;
  logic [IDX_W-1:0] cm1_sidx_q;
  always_ff @(posedge clk) cm1_sidx_q <= cm1.sidx;
  assign cm1      = cm_rdata[sel_q];
  assign pj_raddr = cm1.pidx;
  assign as_raddr = cm1.sidx;
  always_ff @(posedge clk) begin
    if (rst) v2 <= 1'b0; else v2 <= v1;
  end

  // ---- stage 2: exact projection ----
  logic v3;
  int phi_e, z_e;
  logic signed [16:0] dphi3, dz3;
  logic [IDX_W-1:0] sidx3, tidx3;
  always_comb begin
    phi_e = int'(pj_rdata.phi) + ((int'(pj_rdata.k) * int'(as_rdata.r)) >>> K_FRAC);
    z_e   = int'(pj_rdata.z)   + ((int'(pj_rdata.t) * int'(as_rdata.r)) >>> K_FRAC);
  end
  always_ff @(posedge clk) begin
    if (rst) v3 <= 1'b0; else v3 <= v2;
    dphi3 <= 17'(int'(as_rdata.phi) - phi_e);
    dz3   <= 17'(int'(as_rdata.z) - z_e);
    sidx3 <= cm1_sidx_q;
    tidx3 <= pj_rdata.tidx;
  end

  // ---- stage 3: residual windows ----
  logic ok;
  assign ok       = v3 && (iabs(int'(dphi3)) <= PHI_W_C) && (iabs(int'(dz3)) <= Z_W_C);
  assign rejected = v3 && !ok;

  typedef struct packed {
    logic [BX_W-1:0]  bx;
    logic [IDX_W-1:0] tidx;
    logic [11:0]      key;
    fmatch_t          fm;
  } mc_out_t;
  mc_out_t o_in, o_out;
  always_comb begin
    o_in.bx      = bx;
    o_in.tidx    = tidx3;
    o_in.key     = 12'(iabs(int'(dphi3)));
    o_in.fm.sidx = sidx3;
    o_in.fm.dphi = 12'(dphi3);
    o_in.fm.dz   = 12'(dz3);
  end
  // issue at START+1, candidate +2, projection/stub +3, residuals +4; pad the rest
  delay_pipe #(.W($bits(mc_out_t)), .N(LAT - 4)) u_pad (
    .clk, .rst, .in_valid(ok), .in_data(o_in), .out_valid(fm_we), .out_data(o_out));
  assign out_bx   = o_out.bx;
  assign fm_waddr = o_out.tidx;
  assign fm_key   = o_out.key;
  assign fm_data  = o_out.fm;
endmodule
