// tb_sector_occupancy: occupancy workload for the sector processor at its default size
// (no parameter of the top overridden). Sixteen back-to-back events each carry 15
// tracks in random directions (pT above about 3 GeV, |z0| < 8 cm) plus 10 random stubs
// per layer, about 25 stubs per layer and event, in one slice of one sector;
// tracks use the same straight-line model as tb_tracklet_sector. It reports how
// often each truncation and rejection mechanism fires under this load and the fraction
// of tracks found, and checks that at least 90% of the tracks are found, that every
// output track leaves inside its event's window ending 867 cycles after START with the
// right event identifier, and that the TrackFit DONE comes on its exact cycle.
// The window, step latencies and total latency are the published figures; the event
// content (track and noise counts) is this testbench's own and not a physics sample.
module tb_sector_occupancy;
  import tracklet_pkg::*;
  localparam int NEV = 16;
  localparam int NTRK = 15, NNOISE = 10;
  localparam int NIN = 3;
  localparam int TM  = TMUX_CYCLES;
  localparam int LAT_SUM = LAT_VMR + LAT_TE + LAT_TC + LAT_PR + LAT_ME + LAT_MC + LAT_TF + LAT_PD;

  logic clk = 1'b0, rst = 1'b1, run = 1'b0;
  logic  link_we   [NLAYER][NIN];
  stub_t link_stub [NLAYER][NIN];
  logic [BX_W-1:0] link_bx, trk_bx;
  logic start, trk_valid, mem_overflow, dup_removed;
  track_t trk;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  tracklet_sector dut (.*);

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------- event generation ----------------
  typedef enum int {NORMAL, DUPL, REPL, MCREJ, MISS1, MISS2, ONEHIT, TCREJ, JET, OVFL} kind_t;
  typedef struct { int ev; kind_t kind; int phi0, k, z0, t, mask; } truth_t;
  truth_t truth [$];
  stub_t  sq [NEV][NLAYER][NIN][$];
  int     rr [NEV][NLAYER];

  function automatic stub_t mk_stub(input int l, input int phi0, input int k, input int z0, input int t,
                                    input int dphi = 0);
    int roff, r;
    stub_t s;
    roff = $urandom_range(8) - 4;
    r = RADIUS[l] + roff;
    s.phi  = PHI_W'($rtoi($floor(phi0 + real'(k) * r / 1024.0 + 0.5)) + dphi);
    s.z    = Z_W'($rtoi($floor(z0 + real'(t) * r / 1024.0 + 0.5)));
    s.r    = R_W'(roff);
    s.bend = 3'(k >>> 11);
    return s;
  endfunction

  task automatic put(input int e, input int l, input stub_t s, input int in = -1);
    if (in < 0) begin in = rr[e][l]; rr[e][l] = (rr[e][l] + 1) % NIN; end
    sq[e][l][in].push_back(s);
  endtask

  // a random track kept away from VM edges in every layer, |t| <= 1000
  task automatic rnd_track(output int phi0, output int k, output int z0, output int t);
    bit ok;
    do begin
      k = $urandom_range(8000) - 4000;
      phi0 = $urandom_range(15000) + 600 - k * 600 / 1024;
      z0 = $urandom_range(160) - 80;
      t = $urandom_range(2000) - 1000;
      ok = 1;
      for (int l = 0; l < NLAYER; l++) begin
        int p = phi0 + k * RADIUS[l] / 1024;
        if (p < 0 || p >= 16384 || (p % 2048) < 250 || (p % 2048) > 1798) ok = 0;
      end
    end while (!ok);
  endtask

  task automatic add_track(input int e, input kind_t kind);
    int phi0, k, z0, t, mask;
    rnd_track(phi0, k, z0, t);
    if (kind == TCREJ) z0 = 175;
    mask = 4'b1111;
    for (int l = 0; l < NLAYER; l++) begin
      bit skip = 0;
      if (kind == MISS1 && l == 4) skip = 1;                 // no layer-5 stub
      if (kind == MISS2 && (l == 3 || l == 5)) skip = 1;     // no layer-4 and layer-6 stubs
      if (kind == ONEHIT && l >= 3) skip = 1;                // layer 3 only
      if (kind == OVFL && l == 5) skip = 1;                  // its layer-6 stub is lost anyway
      if (skip) begin if (l >= 2) mask &= ~(1 << (l - 2)); continue; end
      if (kind == REPL && l == 2) begin
        put(e, l, mk_stub(l, phi0, k, z0, t, 40), 0);        // wrong stub, read first
        put(e, l, mk_stub(l, phi0, k, z0, t), 2);
      end else if (kind == MCREJ && l == 3) begin
        put(e, l, mk_stub(l, phi0, k, z0, t, 100));
        mask &= ~4'b0010;
      end else begin
        put(e, l, mk_stub(l, phi0, k, z0, t));
        if (kind == DUPL && l == 0) put(e, l, mk_stub(l, phi0, k, z0, t, 3));
      end
    end
    truth.push_back('{e, kind, phi0, k, z0, t, mask});
  endtask

  task automatic add_noise(input int e, input int n);
    for (int l = 0; l < NLAYER; l++)
      for (int j = 0; j < n; j++) begin
        stub_t s;
        s.phi = PHI_W'($urandom); s.z = Z_W'($urandom_range(800) - 400);
        s.r = R_W'($urandom_range(8) - 4); s.bend = 3'($urandom);
        put(e, l, s);
      end
  endtask

  task automatic build_events();
    for (int e = 0; e < NEV; e++) begin
      for (int j = 0; j < NTRK; j++) add_track(e, NORMAL);
      add_noise(e, NNOISE);
    end
  endtask

  // ---------------- stimulus ----------------
  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic clear_links();
    for (int l = 0; l < NLAYER; l++)
      for (int i = 0; i < NIN; i++) begin link_we[l][i] = 1'b0; link_stub[l][i] = '0; end
  endtask

  task automatic write_event(input int e);
    bit more;
    do begin
      @(negedge clk);
      more = 0;
      for (int l = 0; l < NLAYER; l++)
        for (int i = 0; i < NIN; i++)
          if (sq[e][l][i].size() > 0) begin
            link_we[l][i] = 1'b1; link_stub[l][i] = sq[e][l][i].pop_front(); more = 1;
          end else link_we[l][i] = 1'b0;
    end while (more);
    clear_links();
  endtask

  // ---------------- monitors ----------------
  int s_cyc [$];
  typedef struct { int ev; track_t t; } out_t;
  out_t outs [$];
  int n_te_trunc = 0, n_in_ovf = 0, n_ovf = 0, n_tc_rej = 0, n_mc_rej = 0, n_repl = 0, n_dup = 0;
  int n_hits [5] = '{0, 0, 0, 0, 0}, n_wrap = 0, n_tf_done = 0;

  always @(negedge clk) if (!rst) begin
    if (start) s_cyc.push_back(cyc);
    if (|dut.ovf[NLAYER * NIN - 1 : 0]) n_in_ovf++;
    if (mem_overflow) n_ovf++;
    if (dut.tc_rej) n_tc_rej++;
    if (dup_removed) n_dup++;
    if (trk_valid) begin
      int e = -1;
      foreach (s_cyc[i])
        if (cyc >= s_cyc[i] + 7 * TM + LAT_SUM - TM && cyc < s_cyc[i] + 7 * TM + LAT_SUM) e = i;
      check(e >= 0, $sformatf("track at cycle %0d outside every event's output window", cyc));
      if (e >= 0) begin
        check(trk_bx == BX_W'(e), $sformatf("trk_bx %0d for event %0d", trk_bx, e));
        outs.push_back('{e, trk});
        n_hits[$countones(trk.hits)]++;
        if (e >= 8) n_wrap++;
      end
    end
  end
  for (genvar p = 0; p < NPROJ; p++) begin : g_mon
    always @(negedge clk) if (!rst) begin
      if (dut.g_proj[p].mc_rej) n_mc_rej++;
      if (dut.g_proj[p].mt_replaced) n_repl++;
    end
  end
  for (genvar t = 0; t < 3 * NVM - 2; t++) begin : g_temon
    // pairs still unread when the next window of this TrackletEngine begins
    always @(negedge clk) if (!rst && dut.g_te[t].u_te.first &&
                              dut.g_te[t].u_te.no_q != 0 && dut.g_te[t].u_te.i_q < dut.g_te[t].u_te.ni_q)
      n_te_trunc++;
  end
  always @(negedge clk) if (!rst && dut.tf_done) begin
    check(s_cyc.size() > n_tf_done && cyc == s_cyc[n_tf_done] + 7 * TM + LAT_SUM - LAT_PD,
          $sformatf("TrackFit DONE of event %0d at cycle %0d", n_tf_done, cyc));
    n_tf_done++;
  end

  // ---------------- final comparison ----------------
  function automatic bit close(input truth_t x, input track_t t);
    return iabs(int'($signed(t.phi0)) - x.phi0) <= 8 && iabs(int'($signed(t.k)) - x.k) <= 80 &&
           iabs(int'($signed(t.z0)) - x.z0) <= 5 && iabs(int'($signed(t.t)) - x.t) <= 80;
  endfunction

  int n_found = 0, n_true = 0, n_exact = 0;
  task automatic compare();
    foreach (truth[i]) begin
      int n = 0, hits = -1;
      foreach (outs[j]) if (outs[j].ev == truth[i].ev && close(truth[i], outs[j].t)) begin
        n++; hits = int'(outs[j].t.hits);
      end
      n_true++;
      if (n > 0) n_found++;
      if (n == 1 && hits == truth[i].mask) n_exact++;
    end
  endtask

  initial begin
    build_events();
    clear_links();
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    write_event(0);
    run = 1'b1;
    for (int e = 1; e < NEV; e++) begin
      wait (link_bx == BX_W'(e) && start == 1'b0);
      write_event(e);
    end
    wait (s_cyc.size() >= NEV);
    while (cyc < s_cyc[NEV - 1] + 7 * TM + LAT_SUM + 10) @(posedge clk);
    compare();
    $display("tracks out %0d (2/3/4 matches: %0d/%0d/%0d)", outs.size(), n_hits[2], n_hits[3], n_hits[4]);
    $display("mechanisms: TE truncation %0d, input overflow %0d, any overflow %0d, TC rejections %0d,",
             n_te_trunc, n_in_ovf, n_ovf, n_tc_rej);
    $display("            MC rejections %0d, best-match replacements %0d, duplicates removed %0d, wrap %0d",
             n_mc_rej, n_repl, n_dup, n_wrap);
    $display("efficiency %0d of %0d tracks found (%0d once with all four layers)", n_found, n_true, n_exact);
    check(n_found * 100 >= n_true * 90, "efficiency below 90 percent");
    check(outs.size() > 0 && n_wrap > 0, "tracks of wrapped event identifiers");
    check(n_tf_done >= NEV, "TrackFit DONE count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat ((NEV + 10) * TM + 200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
