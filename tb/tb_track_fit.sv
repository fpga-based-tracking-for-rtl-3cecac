// tb_track_fit: a behavioural tracklet memory and four behavioural match tables feed the
// TrackFit for two events (30 and 64 tracklets, each layer matched with probability
// 0.6, random residuals). The testbench rebuilds the least-squares weights from the
// radii, recomputes corrections, chi2 and the hit requirement (2 of 4 layers) and checks
// every output track in order, plus two hand cases: zero residuals give zero correction
// and zero chi2; residuals growing with radius raise the slope and lower the intercept.
// Also checks the first track at START+26 and DONE at START+108+26.
// The 26-cycle latency is the published figure; the weights, chi2 scaling and 2-layer minimum are this design's.
module tb_track_fit;
  import tracklet_pkg::*;
  localparam int TMUX = 108;
  localparam int RS [2] = '{230, 350};
  localparam int RP [4] = '{500, 680, 880, 1100};
  logic clk = 1'b0, rst = 1'b1, start = 1'b0, done, trk_valid;
  logic [BX_W-1:0] in_rbx, trk_bx;
  logic [IDX_W-1:0] tp_raddr, fm_raddr;
  logic [IDX_W:0] tp_count;
  tpar_t tp_rdata;
  fmatch_t fm_rdata [NPROJ];
  logic [NPROJ-1:0] fm_rvalid;
  track_t trk;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  track_fit dut (.*);

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  tpar_t   tp [8][64];
  int      tc [8];
  fmatch_t fm [4][8][64];
  bit      fv [4][8][64];
  always_ff @(posedge clk) begin
    tp_rdata <= tp[in_rbx][tp_raddr];
    for (int l = 0; l < 4; l++) begin
      fm_rdata[l]  <= fm[l][in_rbx][fm_raddr];
      fm_rvalid[l] <= fv[l][in_rbx][fm_raddr];
    end
  end
  assign tp_count = (IDX_W + 1)'(tc[in_rbx]);

  function automatic longint wgt(input int m, input int i, input bit slope);
    real n, sx, xm, sxx, w;
    n = 2; sx = RS[0] + RS[1];
    for (int j = 0; j < 4; j++) if (m[j]) begin n += 1; sx += RP[j]; end
    xm = sx / n;
    sxx = (RS[0] - xm) * (RS[0] - xm) + (RS[1] - xm) * (RS[1] - xm);
    for (int j = 0; j < 4; j++) if (m[j]) sxx += (RP[j] - xm) * (RP[j] - xm);
    w = slope ? 65536.0 * 1024.0 * (RP[i] - xm) / sxx : 65536.0 * (1.0 / n - xm * (RP[i] - xm) / sxx);
    return m[i] ? longint'($rtoi(w + (w < 0 ? -0.5 : 0.5))) : 0;
  endfunction

  track_t exp_q [2][$];
  task automatic model(input int e, input int a);
    int m, dk, dp, dt, dz, ephi, ez, c2p, c2z, c2;
    longint sk, sp, st, sz;
    track_t x;
    m = 0;
    for (int l = 0; l < 4; l++) if (fv[l][e][a]) m |= 1 << l;
    if ($countones(m) < 2) return;
    sk = 0; sp = 0; st = 0; sz = 0;
    for (int l = 0; l < 4; l++) begin
      sk += wgt(m, l, 1) * fm[l][e][a].dphi; sp += wgt(m, l, 0) * fm[l][e][a].dphi;
      st += wgt(m, l, 1) * fm[l][e][a].dz;   sz += wgt(m, l, 0) * fm[l][e][a].dz;
    end
    dk = int'(sk >>> 16); dp = int'(sp >>> 16); dt = int'(st >>> 16); dz = int'(sz >>> 16);
    c2p = 0; c2z = 0;
    for (int s = 0; s < 2; s++) begin
      ephi = -(dp + ((dk * RS[s]) >>> 10)); ez = -(dz + ((dt * RS[s]) >>> 10));
      c2p += ephi * ephi; c2z += ez * ez;
    end
    for (int l = 0; l < 4; l++) if (m[l]) begin
      ephi = int'(fm[l][e][a].dphi) - (dp + ((dk * RP[l]) >>> 10));
      ez   = int'(fm[l][e][a].dz) - (dz + ((dt * RP[l]) >>> 10));
      c2p += ephi * ephi; c2z += ez * ez;
    end
    c2 = (c2p >>> 4) + c2z;
    x.k = 16'(int'(tp[e][a].k) + dk); x.phi0 = 16'(int'(tp[e][a].phi0) + dp);
    x.t = 16'(int'(tp[e][a].t) + dt); x.z0 = 12'(int'(tp[e][a].z0) + dz);
    x.chi2 = c2 > 65535 ? 16'hFFFF : 16'(c2);
    x.hits = 4'(m); x.tidx = 6'(a); x.seed_in = tp[e][a].inner; x.seed_out = tp[e][a].outer;
    for (int l = 0; l < 4; l++) x.sidx[l] = m[l] ? fm[l][e][a].sidx : '0;
    exp_q[e].push_back(x);
  endtask

  int cyc = 0, t_start [$], nwr [2], first_wr = -1, ndone = 0;
  always @(posedge clk) cyc++;
  always @(negedge clk) if (!rst) begin
    if (trk_valid) begin
      automatic int e = int'(trk_bx);
      if (first_wr < 0) first_wr = cyc;
      check(e < 2 && nwr[e] < exp_q[e].size() && trk == exp_q[e][nwr[e]], $sformatf("track ev %0d #%0d", e, nwr[e]));
      if (e == 0 && nwr[e] == 0) check(trk.chi2 == 0 && trk.k == 100 && trk.phi0 == 5000, "zero residuals: no correction");
      if (e == 0 && nwr[e] == 1) check(trk.chi2 > 0 && $signed(trk.phi0) < 16'sd6000 && $signed(trk.k) > 16'sd200, "residuals growing with r: slope up, intercept down");
      nwr[e]++;
    end
    if (done) begin
      check(cyc - t_start[ndone] == TMUX + LAT_TF, "DONE at START+134");
      ndone++;
    end
  end

  initial begin
    tc = '{30, 64, 0, 0, 0, 0, 0, 0};
    for (int e = 0; e < 2; e++)
      for (int a = 0; a < 64; a++) begin
        tp[e][a] = tpar_t'({16'($urandom_range(8000) - 4000), 16'($urandom_range(16000)), 16'($urandom_range(4000) - 2000),
                            12'($urandom_range(300) - 150), 6'(a), 6'(63 - a)});
        for (int l = 0; l < 4; l++) begin
          fv[l][e][a] = ($urandom_range(9) < 6);
          fm[l][e][a] = fmatch_t'({6'($urandom), 12'($urandom_range(120) - 60), 12'($urandom_range(32) - 16)});
        end
      end
    // hand case 0: all residuals zero
    tp[0][0].k = 100; tp[0][0].phi0 = 5000;
    for (int l = 0; l < 4; l++) begin fv[l][0][0] = 1; fm[l][0][0].dphi = 0; fm[l][0][0].dz = 0; end
    // hand case 1: positive phi residuals growing with radius; the seeds stay at zero
    // residual, so the fit must raise the slope and lower the intercept
    tp[0][1].k = 200; tp[0][1].phi0 = 6000;
    for (int l = 0; l < 4; l++) begin fv[l][0][1] = 1; fm[l][0][1].dphi = 12'(RP[l] - 400); fm[l][0][1].dz = 0; end
    for (int e = 0; e < 2; e++) for (int a = 0; a < tc[e]; a++) model(e, a);
    nwr = '{0, 0};
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int e = 0; e < 2; e++) begin
      start <= 1;
      t_start.push_back(cyc + 1);
      @(posedge clk);
      start <= 0;
      repeat (TMUX - 1) @(posedge clk);
    end
    repeat (TMUX + 40) @(posedge clk);
    check(nwr[0] == exp_q[0].size() && nwr[1] == exp_q[1].size() && exp_q[1].size() < 64,
          $sformatf("counts %0d/%0d %0d/%0d", nwr[0], exp_q[0].size(), nwr[1], exp_q[1].size()));
    check(first_wr - t_start[0] == LAT_TF, $sformatf("first track at START+%0d", first_wr - t_start[0]));
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
