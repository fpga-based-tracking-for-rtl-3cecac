// match_engine: MatchEngine processing step for one VM of a projection layer.
//
// On START it loops over all (projection, stub) pairs of the VM for the event, one pair
// per cycle with the stub index fastest, for at most TMUX pairs. A pair is a candidate
// match when the projection's z bin and the stub's z bin differ by at most ZB_TOL and
// their fine phi values by at most PHIF_TOL. Candidates are written as {projection
// address, AllStubs index}. Narrowing the search to one VM and coarse bins keeps the
// number of pairs handed to the MatchCalculator small.
// Timing: first write at START+LAT (6), DONE at START+TMUX+LAT.
// The step is the paper's; the coarse criteria and their tolerances are this design's.
module match_engine
  import tracklet_pkg::*;
#(
  parameter int          ZB_TOL   = 1,
  parameter int          PHIF_TOL = 1,
  parameter int unsigned TMUX     = TMUX_CYCLES,
  parameter int unsigned LAT      = LAT_ME
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             start,
  output logic             done,
  output logic [BX_W-1:0]  in_rbx,
  output logic [IDX_W-1:0] vp_raddr,
  input  logic [IDX_W:0]   vp_count,
  input  vmproj_t          vp_rdata,
  output logic [IDX_W-1:0] vs_raddr,
  input  logic [IDX_W:0]   vs_count,
  input  vmstub_t          vs_rdata,
  output logic             clr,
  output logic [BX_W-1:0]  clr_bx,
  output logic [BX_W-1:0]  out_bx,
  output logic             cm_we,
  output cmatch_t          cm_data
);
  logic [BX_W-1:0] bx, bx_next;
  logic first, issue;
  step_ctrl #(.TMUX(TMUX), .LAT(LAT), .BX_W(BX_W)) u_ctrl (
    .clk, .rst, .start, .bx, .bx_next, .clr, .first, .issue, .done);
  assign clr_bx = bx_next;
  assign in_rbx = bx;

  logic [IDX_W:0] i_q, j_q, i_cur, j_cur, np_q, ns_q, np, ns;
  logic rd_v, rd_v_q;
  always_comb begin
    np    = first ? vp_count : np_q;
    ns    = first ? vs_count : ns_q;
    i_cur = first ? '0 : i_q;
    j_cur = first ? '0 : j_q;
    rd_v  = issue && (i_cur < np) && (ns != 0);
    vp_raddr = i_cur[IDX_W-1:0];
    vs_raddr = j_cur[IDX_W-1:0];
  end
  always_ff @(posedge clk) begin
    if (rst) begin
      i_q <= '0; j_q <= '0; np_q <= '0; ns_q <= '0; rd_v_q <= 1'b0;
    end else begin
      np_q <= np; ns_q <= ns; rd_v_q <= rd_v;
      if (rd_v) begin
        if (j_cur + 1'b1 >= ns) begin j_q <= '0; i_q <= i_cur + 1'b1; end
        else begin j_q <= j_cur + 1'b1; i_q <= i_cur; end
      end else begin
        i_q <= i_cur; j_q <= j_cur;
      end
    end
  end

  logic pass;
  int dzb, dpf;
  always_comb begin
    dzb  = int'(vs_rdata.zbin) - int'(vp_rdata.zbin);
    dpf  = int'(vs_rdata.phif) - int'(vp_rdata.phif);
    pass = rd_v_q && (iabs(dzb) <= ZB_TOL) && (iabs(dpf) <= PHIF_TOL);
  end

  typedef struct packed { logic [BX_W-1:0] bx; cmatch_t cm; } me_out_t;
  me_out_t c_in, c_out;
  assign c_in.bx      = bx;
  assign c_in.cm.pidx = vp_rdata.pidx;
  assign c_in.cm.sidx = vs_rdata.idx;
  delay_pipe #(.W($bits(me_out_t)), .N(LAT - 2)) u_pad (
    .clk, .rst, .in_valid(pass), .in_data(c_in), .out_valid(cm_we), .out_data(c_out));
  assign out_bx  = c_out.bx;
  assign cm_data = c_out.cm;
endmodule
