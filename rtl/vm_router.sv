// vm_router: VMRouter processing step of one detector layer.
//
// On START it reads, one stub per cycle, the stubs of the event from NIN input stub
// memories (input 0 first, then 1, then 2; READ_ADD and NUMBER_IN per input). Every stub
// is written in full 36-bit form to the AllStubs memory; its position there (the index
// counter) becomes its 6-bit index. In addition a coarse 18-bit VM stub {index, z bin,
// fine phi, bend} is written to the VM stub memory selected by the most significant phi
// bits, using one write enable per VM (WR_EN1..WR_EN8). Stubs beyond 64 per event, or
// not read within the 108-cycle window, are dropped.
// Timing: first read issued 1 cycle after START, first write LAT (4) cycles after START,
// DONE at START+TMUX+LAT. Output memories are paged by `out_bx`; `clr`/`clr_bx` empty
// the page of the next event at START.
// Structure and widths (36-bit stub, 6-bit index, 18-bit VM stub, 8 VMs, 3 inputs)
// follow the VMRouter diagram; the VM stub field split is this design's choice, and
// the z binning inside each phi VM is kept as a field of the VM stub rather than as
// separate memories.
module vm_router
  import tracklet_pkg::*;
#(
  parameter int unsigned NIN    = 3,
  parameter int unsigned NVMS   = NVM,
  parameter int unsigned TMUX   = TMUX_CYCLES,
  parameter int unsigned LAT    = LAT_VMR
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 start,
  output logic                 done,
  // input stub memories
  output logic [BX_W-1:0]      in_rbx,
  output logic [IDX_W-1:0]     in_raddr [NIN],
  input  logic [IDX_W:0]       in_count [NIN],
  input  stub_t                in_rdata [NIN],
  // output memories
  output logic                 clr,
  output logic [BX_W-1:0]      clr_bx,
  output logic [BX_W-1:0]      out_bx,
  output logic                 as_we,
  output stub_t                as_data,
  output logic [NVMS-1:0]      vm_we,
  output vmstub_t              vm_data
);
  localparam int unsigned VW = $clog2(NVMS);
  localparam int unsigned MW = $clog2(NIN + 1);

  logic [BX_W-1:0] bx, bx_next;
  logic first, issue;

  step_ctrl #(.TMUX(TMUX), .LAT(LAT), .BX_W(BX_W)) u_ctrl (
    .clk, .rst, .start, .bx, .bx_next, .clr, .first, .issue, .done);
  assign clr_bx = bx_next;
  assign in_rbx = bx;

  // read-address state machine: input memory m, address a
  logic [MW-1:0]    m_q, m_cur;
  logic [IDX_W:0]   a_q, a_cur;
  logic [IDX_W:0]   n_q [NIN];
  logic [IDX_W:0]   n_cur [NIN];
  logic             rd_v, rd_v_q;
  logic [MW-1:0]    rd_m;

  always_comb begin
    m_cur = first ? '0 : m_q;
    a_cur = first ? '0 : a_q;
    for (int i = 0; i < int'(NIN); i++) n_cur[i] = first ? in_count[i] : n_q[i];
    // skip empty or finished inputs
    for (int i = 0; i < int'(NIN); i++)
      if (int'(m_cur) == i && a_cur >= n_cur[i]) begin m_cur = m_cur + 1'b1; a_cur = '0; end
    rd_v = issue && (int'(m_cur) < int'(NIN));
    for (int i = 0; i < int'(NIN); i++) in_raddr[i] = a_cur[IDX_W-1:0];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      m_q <= '0; a_q <= '0; rd_m <= '0; rd_v_q <= 1'b0;
      for (int i = 0; i < int'(NIN); i++) n_q[i] <= '0;
    end else begin
      n_q    <= n_cur;
      m_q    <= m_cur;
      a_q    <= rd_v ? a_cur + 1'b1 : a_cur;
      rd_v_q <= rd_v;
      rd_m   <= m_cur;
    end
  end

  // stub arrives one cycle after the read: index counter and VM selection
  stub_t       st;
  logic [IDX_W:0] idx_cnt;
  logic        keep;
  assign st   = in_rdata[rd_m];
  assign keep = rd_v_q && !idx_cnt[IDX_W];

  always_ff @(posedge clk) begin
    if (rst || first) idx_cnt <= '0;
    else if (keep)    idx_cnt <= idx_cnt + 1'b1;
  end

  typedef struct packed {
    logic [BX_W-1:0] bx;
    logic [VW-1:0]   vm;
    stub_t           stub;
    vmstub_t         vms;
  } vmr_out_t;

  vmr_out_t s_in, s_out;
  logic     s_v;
  always_comb begin
    s_in.bx        = bx;
    s_in.vm        = st.phi[PHI_W-1 -: VW];
    s_in.stub      = st;
    s_in.vms.idx   = idx_cnt[IDX_W-1:0];
    s_in.vms.zbin  = st.z[Z_W-1 -: 5];
    s_in.vms.phif  = st.phi[PHI_W-1-VW -: 4];
    s_in.vms.bend  = st.bend;
  end

  // pad to the step latency: read at START+1, data at +2, write at +LAT
  delay_pipe #(.W($bits(vmr_out_t)), .N(LAT - 2)) u_pad (
    .clk, .rst, .in_valid(keep), .in_data(s_in), .out_valid(s_v), .out_data(s_out));

  assign out_bx  = s_out.bx;
  assign as_we   = s_v;
  assign as_data = s_out.stub;
  assign vm_data = s_out.vms;
  always_comb begin
    vm_we = '0;
    vm_we[s_out.vm] = s_v;
  end
endmodule
