// projection_router: ProjectionRouter processing step of one projection layer.
//
// On START it reads the event's projections for the layer, one per cycle (at most TMUX),
// and routes each to the VM projection memory of the phi VM it points into, selected by
// the most significant phi bits exactly as the VMRouter does for stubs. The VM entry
// keeps only the address of the full projection (6 bits) and the coarse z bin and fine
// phi used by the MatchEngine.
// Timing: first write at START+LAT (5), DONE at START+TMUX+LAT.
// The function is the paper's; the entry format is this design's choice.
module projection_router
  import tracklet_pkg::*;
#(
  parameter int unsigned NVMS = NVM,
  parameter int unsigned TMUX = TMUX_CYCLES,
  parameter int unsigned LAT  = LAT_PR
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             start,
  output logic             done,
  output logic [BX_W-1:0]  in_rbx,
  output logic [IDX_W-1:0] pj_raddr,
  input  logic [IDX_W:0]   pj_count,
  input  proj_t            pj_rdata,
  output logic             clr,
  output logic [BX_W-1:0]  clr_bx,
  output logic [BX_W-1:0]  out_bx,
  output logic [NVMS-1:0]  vm_we,
  output vmproj_t          vm_data
);
  localparam int unsigned VW = $clog2(NVMS);

  logic [BX_W-1:0] bx, bx_next;
  logic first, issue;
  step_ctrl #(.TMUX(TMUX), .LAT(LAT), .BX_W(BX_W)) u_ctrl (
    .clk, .rst, .start, .bx, .bx_next, .clr, .first, .issue, .done);
  assign clr_bx = bx_next;
  assign in_rbx = bx;

  logic [IDX_W:0] a_q, a_cur, n_q, n;
  logic rd_v, rd_v_q;
  logic [IDX_W-1:0] a_d;
  always_comb begin
    n     = first ? pj_count : n_q;
    a_cur = first ? '0 : a_q;
    rd_v  = issue && (a_cur < n);
    pj_raddr = a_cur[IDX_W-1:0];
  end
  always_ff @(posedge clk) begin
    if (rst) begin a_q <= '0; n_q <= '0; rd_v_q <= 1'b0; end
    else begin
      n_q <= n; rd_v_q <= rd_v;
      a_q <= rd_v ? a_cur + 1'b1 : a_cur;
    end
    a_d <= a_cur[IDX_W-1:0];
  end

  typedef struct packed { logic [BX_W-1:0] bx; logic [VW-1:0] vm; vmproj_t vp; } pr_out_t;
  pr_out_t r_in, r_out;
  logic    r_v;
  always_comb begin
    r_in.bx      = bx;
    r_in.vm      = pj_rdata.phi[PHI_W-1 -: VW];
    r_in.vp.pidx = a_d;
    r_in.vp.zbin = pj_rdata.z[Z_W-1 -: 5];
    r_in.vp.phif = pj_rdata.phi[PHI_W-1-VW -: 4];
  end
  delay_pipe #(.W($bits(pr_out_t)), .N(LAT - 2)) u_pad (
    .clk, .rst, .in_valid(rd_v_q), .in_data(r_in), .out_valid(r_v), .out_data(r_out));
  assign out_bx  = r_out.bx;
  assign vm_data = r_out.vp;
  always_comb begin
    vm_we = '0;
    vm_we[r_out.vm] = r_v;
  end
endmodule
