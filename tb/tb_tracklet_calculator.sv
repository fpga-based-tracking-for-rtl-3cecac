// tb_tracklet_calculator: three behavioural stub-pair memories and two AllStubs memories
// feed the TrackletCalculator (seed layers at 230/350 mm). Stubs are placed on straight
// r-phi / r-z lines with random slope and intercept, some beyond the pT and z0 cuts, and
// some pairs mix stubs of different lines. The testbench recomputes the fixed-point
// tracklet parameters, cuts and projections to 500/680/880/1100 mm, and checks every
// written tracklet and projection in order, the memory-order merge of the pair memories,
// the 108-pair window, the 64-tracklet limit, the first write at START+43 and DONE.
// The 43-cycle latency, 108-cycle window and 2 GeV / 15 cm cuts are published; the fixed-point formulas are this design's.
module tb_tracklet_calculator;
  import tracklet_pkg::*;
  localparam int TMUX = 108, NPM = 3;
  localparam int RP [4] = '{500, 680, 880, 1100};
  logic clk = 1'b0, rst = 1'b1, start = 1'b0, done, clr, tp_we, rejected;
  logic [BX_W-1:0] in_rbx, clr_bx, out_bx;
  logic [IDX_W-1:0] pm_raddr [NPM];
  logic [IDX_W:0] pm_count [NPM];
  stubpair_t pm_rdata [NPM];
  logic [IDX_W-1:0] asi_raddr, aso_raddr;
  stub_t asi_rdata, aso_rdata;
  tpar_t tp_data;
  logic [IDX_W:0] tp_wcount;
  logic [NPROJ-1:0] pj_we;
  proj_t pj_data [NPROJ];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  tracklet_calculator #(.NPM(NPM)) dut (.*);

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  stubpair_t pm [NPM][2][64];
  int        pcnt [NPM][2];
  stub_t     asi [8][64], aso [8][64];
  always_ff @(posedge clk) begin
    for (int m = 0; m < NPM; m++) pm_rdata[m] <= pm[m][in_rbx[0]][pm_raddr[m]];
    asi_rdata <= asi[in_rbx][asi_raddr];
    aso_rdata <= aso[in_rbx][aso_raddr];
  end
  always_comb for (int m = 0; m < NPM; m++) pm_count[m] = (IDX_W + 1)'(pcnt[m][in_rbx[0]]);

  // tracklet memory write address model
  int twc [8];
  assign tp_wcount = (IDX_W + 1)'(twc[out_bx]);

  typedef struct { tpar_t tp; bit pv [4]; proj_t pj [4]; } exp_t;
  exp_t exp_q [2][$];
  int nrej_exp [2];

  task automatic model(input int e, input stubpair_t sp);
    stub_t si, so;
    longint dr, inv, dphi, dz, k, t, r1, phi0, z0, pp, pz;
    exp_t x;
    si = asi[e][sp.inner]; so = aso[e][sp.outer];
    dr = (350 + longint'(so.r)) - (230 + longint'(si.r));
    if (dr < -8) dr = -8;
    if (dr > 247) dr = 247;
    if (dr < 8) inv = (65536 + 4) / 8; else inv = (65536 + dr / 2) / dr;
    dphi = longint'(so.phi) - longint'(si.phi);
    dz   = longint'(so.z) - longint'(si.z);
    k  = (dphi * inv) >>> 6;
    t  = (dz * inv) >>> 6;
    r1 = 230 + longint'(si.r);
    phi0 = longint'(si.phi) - ((k * r1) >>> 10);
    z0   = longint'(si.z) - ((t * r1) >>> 10);
    if (k > 6391 || k < -6391 || z0 > 150 || z0 < -150) begin nrej_exp[e]++; return; end
    x.tp = tpar_t'({16'(k), 16'(phi0), 16'(t), 12'(z0), sp.inner, sp.outer});
    for (int l = 0; l < 4; l++) begin
      pp = longint'(x.tp.phi0) + ((longint'(x.tp.k) * RP[l]) >>> 10);
      pz = longint'(x.tp.z0) + ((longint'(x.tp.t) * RP[l]) >>> 10);
      x.pv[l] = (pp >= 0 && pp < 16384 && pz > -2048 && pz < 2048);
      x.pj[l] = proj_t'({6'(exp_q[e].size()), 14'(pp), 12'(pz), x.tp.k, x.tp.t});
    end
    exp_q[e].push_back(x);
  endtask

  int cyc = 0, t_start [$], ntp [2], npj [2], first_wr = -1, ndone = 0, nrej [2];
  always @(posedge clk) cyc++;
  always @(negedge clk) if (!rst) begin
    if (rejected) nrej[t_start.size() - 1]++;
    if (tp_we) begin
      automatic int e = int'(out_bx);
      automatic int n = ntp[e];
      if (first_wr < 0) first_wr = cyc;
      check(e < 2 && n < exp_q[e].size(), "unexpected tracklet");
      if (e < 2 && n < exp_q[e].size()) begin
        check(tp_data == exp_q[e][n].tp, $sformatf("tracklet ev %0d #%0d", e, n));
        for (int l = 0; l < 4; l++) begin
          check(pj_we[l] == (exp_q[e][n].pv[l] && n < 64), $sformatf("projection valid ev %0d #%0d L%0d", e, n, l + 3));
          if (pj_we[l]) begin
            check(pj_data[l] == exp_q[e][n].pj[l], $sformatf("projection ev %0d #%0d L%0d", e, n, l + 3));
            npj[e]++;
          end
        end
      end
      ntp[e]++;
      if (twc[e] < 64) twc[e]++;
    end else check(pj_we == 0, "projection without tracklet");
    if (done) begin
      check(cyc - t_start[ndone] == TMUX + LAT_TC, "DONE at START+151");
      ndone++;
    end
  end

  initial begin
    int np [2][NPM] = '{'{30, 0, 40}, '{50, 50, 50}};
    int issued;
    for (int e = 0; e < 2; e++) begin
      for (int a = 0; a < 64; a++) begin
        automatic int phi0 = 4000 + $urandom_range(8000);
        automatic int k    = $urandom_range(16000) - 8000;
        automatic int z0   = $urandom_range(500) - 250;
        automatic int t    = $urandom_range(4000) - 2000;
        automatic int ri   = $urandom_range(10) - 5, ro = $urandom_range(10) - 5;
        if (e == 1) begin k = k * 3 / 4; z0 = z0 / 2; end   // event 1: over 64 good seeds
        if (a < 3) begin k = 100 * a; z0 = 10; end   // first seeds always pass
        asi[e][a] = stub_t'({14'(phi0 + (k * (230 + ri)) / 1024), 12'(z0 + (t * (230 + ri)) / 1024), 7'(ri), 3'(a)});
        aso[e][a] = stub_t'({14'(phi0 + (k * (350 + ro)) / 1024), 12'(z0 + (t * (350 + ro)) / 1024), 7'(ro), 3'(a)});
      end
      issued = 0;
      for (int m = 0; m < NPM; m++) begin
        pcnt[m][e] = np[e][m];
        for (int a = 0; a < 64; a++) begin
          pm[m][e][a] = stubpair_t'({6'(a), 6'((a % 7 == 6) ? a + 1 : a)});
          if (a < np[e][m] && issued < TMUX) begin model(e, pm[m][e][a]); issued++; end
        end
      end
    end
    ntp = '{0, 0}; npj = '{0, 0}; nrej = '{0, 0};
    $display("expected tracklets %0d and %0d, expected rejections %0d and %0d", exp_q[0].size(), exp_q[1].size(), nrej_exp[0], nrej_exp[1]);
    foreach (twc[i]) twc[i] = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int e = 0; e < 2; e++) begin
      start <= 1;
      t_start.push_back(cyc + 1);
      @(posedge clk);
      start <= 0;
      repeat (TMUX - 1) @(posedge clk);
    end
    repeat (TMUX + 60) @(posedge clk);
    for (int e = 0; e < 2; e++)
      check(ntp[e] == exp_q[e].size(), $sformatf("tracklets ev %0d: %0d expected %0d", e, ntp[e], exp_q[e].size()));
    check(nrej_exp[0] > 0 && nrej[0] + nrej[1] == nrej_exp[0] + nrej_exp[1], $sformatf("rejected seeds %0d expected %0d", nrej[0] + nrej[1], nrej_exp[0] + nrej_exp[1]));
    check(npj[0] > 20, "projections written");
    check(first_wr - t_start[0] == LAT_TC, $sformatf("first write at START+%0d", first_wr - t_start[0]));
    check(ndone == 2, "two DONE pulses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
