// tracklet_engine: TrackletEngine processing step for one pair of VMs (inner layer VM,
// outer layer VM).
//
// On START it runs a double nested loop over all (inner, outer) pairs of VM stubs of the
// event, one pair per cycle (outer index fastest), for at most TMUX (108) pairs; later
// pairs are truncated. For each pair two lookup tables are addressed with the coarse
// stub coordinates: the PHI LUT, indexed by the two fine-phi fields, accepts pairs whose
// phi difference is compatible with pT > 2 GeV; the Z LUT, indexed by the two z bins,
// accepts pairs whose straight-line z0 is compatible with |z0| < 15 cm. A pair passing
// both is written to the stub-pair memory as the two 6-bit AllStubs indices (12 bits).
// The LUT contents are computed at elaboration from the layer radii, the phi offset
// between the two VMs (DVM) and the cuts, using bin centres plus a margin of one bin so
// that the coarse check never rejects a pair the exact cut in the TrackletCalculator
// would keep.
// Timing: reads issued from START+1, first write at START+LAT (5), DONE at
// START+TMUX+LAT. Loop, LUTs and widths follow the TrackletEngine diagram; LUT contents
// and margins are this design's choices.
module tracklet_engine
  import tracklet_pkg::*;
#(
  parameter int          DVM   = 0,          // outer VM number minus inner VM number
  parameter int          R_IN  = 230,        // mm
  parameter int          R_OUT = 350,        // mm
  parameter int unsigned TMUX  = TMUX_CYCLES,
  parameter int unsigned LAT   = LAT_TE
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             start,
  output logic             done,
  output logic [BX_W-1:0]  in_rbx,
  output logic [IDX_W-1:0] inner_raddr,
  input  logic [IDX_W:0]   inner_count,
  input  vmstub_t          inner_rdata,
  output logic [IDX_W-1:0] outer_raddr,
  input  logic [IDX_W:0]   outer_count,
  input  vmstub_t          outer_rdata,
  output logic             clr,
  output logic [BX_W-1:0]  clr_bx,
  output logic [BX_W-1:0]  out_bx,
  output logic             sp_we,
  output stubpair_t        sp_data
);
  localparam int DR = R_OUT - R_IN;

  function automatic logic [255:0] make_phi_lut();
    logic [255:0] l;
    int dphi, lim;
    lim = K_MAX * DR / 1024 + 256;
    for (int a = 0; a < 16; a++)
      for (int b = 0; b < 16; b++) begin
        dphi = (DVM * 16 + b - a) * 128;
        l[a * 16 + b] = (iabs(dphi) <= lim);
      end
    return l;
  endfunction

  function automatic logic [1023:0] make_z_lut();
    logic [1023:0] l;
    int zi, zo, z0, lim;
    lim = Z0_MAX + 64 + 128 * R_IN / DR;
    for (int a = 0; a < 32; a++)
      for (int b = 0; b < 32; b++) begin
        zi = ((a >= 16) ? a - 32 : a) * 128 + 64;
        zo = ((b >= 16) ? b - 32 : b) * 128 + 64;
        z0 = zi - (zo - zi) * R_IN / DR;
        l[a * 32 + b] = (iabs(z0) <= lim);
      end
    return l;
  endfunction

  localparam logic [255:0]  PHI_LUT = make_phi_lut();
  localparam logic [1023:0] Z_LUT   = make_z_lut();

  logic [BX_W-1:0] bx, bx_next;
  logic first, issue;
  step_ctrl #(.TMUX(TMUX), .LAT(LAT), .BX_W(BX_W)) u_ctrl (
    .clk, .rst, .start, .bx, .bx_next, .clr, .first, .issue, .done);
  assign clr_bx = bx_next;
  assign in_rbx = bx;

  // double nested loop
  logic [IDX_W:0] i_q, j_q, i_cur, j_cur, ni_q, no_q, ni, no;
  logic rd_v, rd_v_q;
  always_comb begin
    ni    = first ? inner_count : ni_q;
    no    = first ? outer_count : no_q;
    i_cur = first ? '0 : i_q;
    j_cur = first ? '0 : j_q;
    rd_v  = issue && (i_cur < ni) && (no != 0);
    inner_raddr = i_cur[IDX_W-1:0];
    outer_raddr = j_cur[IDX_W-1:0];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      i_q <= '0; j_q <= '0; ni_q <= '0; no_q <= '0; rd_v_q <= 1'b0;
    end else begin
      ni_q <= ni; no_q <= no; rd_v_q <= rd_v;
      if (rd_v) begin
        if (j_cur + 1'b1 >= no) begin j_q <= '0; i_q <= i_cur + 1'b1; end
        else begin j_q <= j_cur + 1'b1; i_q <= i_cur; end
      end else begin
        i_q <= i_cur; j_q <= j_cur;
      end
    end
  end

  // LUT stage: pair data valid one cycle after the read
  logic phi_ok, z_ok, pass;
  assign phi_ok = PHI_LUT[{inner_rdata.phif, outer_rdata.phif}];
  assign z_ok   = Z_LUT[{inner_rdata.zbin, outer_rdata.zbin}];
  assign pass   = rd_v_q && phi_ok && z_ok;

  typedef struct packed { logic [BX_W-1:0] bx; stubpair_t sp; } te_out_t;
  te_out_t p_in, p_out;
  assign p_in.bx       = bx;
  assign p_in.sp.inner = inner_rdata.idx;
  assign p_in.sp.outer = outer_rdata.idx;

  delay_pipe #(.W($bits(te_out_t)), .N(LAT - 2)) u_pad (
    .clk, .rst, .in_valid(pass), .in_data(p_in), .out_valid(sp_we), .out_data(p_out));
  assign out_bx  = p_out.bx;
  assign sp_data = p_out.sp;
endmodule
