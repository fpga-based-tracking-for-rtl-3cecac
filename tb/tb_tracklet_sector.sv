// tb_tracklet_sector: end-to-end test of the sector processor at its default size
// (TMUX = 108 cycles per step, 8 VMs per layer, 3 input memories per layer, 22
// TrackletEngines); no parameter of the top is overridden.
//
// Ten events are generated from straight-line tracks in (r, phi) and (r, z), which is
// the linear helix approximation used by the design: phi(r) = phi0 + k r / 2^10 and
// z(r) = z0 + t r / 2^10, with stub radii scattered a few mm around the nominal layer
// radius. Each event's stubs are written into the input memories while the link-side
// event counter shows that event, then the design runs freely, one START every 108
// cycles. Besides ordinary tracks (six stubs) the events contain tracks built to make
// each mechanism happen:
//   - a track with a second layer-1 stub (two seeds, the copy is removed as duplicate)
//   - a track with a wrong layer-3 stub met first (best-match replacement)
//   - a track with a layer-4 stub 100 phi units off (MatchCalculator window rejection)
//   - tracks missing one or two projection layers (fits with 3 and 2 matches)
//   - a track with a single match (dropped by the fit's hit requirement)
//   - a seed with z0 = 175 mm (TrackletCalculator z0 cut)
//   - a dense jet in one VM pair (TrackletEngine truncation at 108 pairs and
//     stub-pair memory overflow)
//   - 70 stubs in one input memory (input overflow, stubs beyond 64 dropped)
//   - more events than event-identifier values (page/identifier wrap-around).
// Checks: every ordinary track is found exactly once with the expected hit pattern and
// parameters close to the truth; tracks that must not be found are not; every output
// track of event e leaves in the window [S_e + 759, S_e + 867) after the event's START
// S_e (867 cycles = 7 x 108 + the step latencies 4+5+43+5+6+16+26+6), with trk_bx = e
// mod 8; each mechanism above is counted and must occur at least once.
// The step latencies, 108-cycle window and total latency follow the published tables; the geometry and event content are this testbench's own.
module tb_tracklet_sector;
  import tracklet_pkg::*;
  localparam int NEV = 10;
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
      case (e)
        3: begin  // jet: 12 tracks close together in phi and z, inside one VM pair
          for (int j = 0; j < 12; j++) begin
            int phi0 = 4600 + 25 * j, k = int'($urandom_range(400)) - 200, z0 = int'($urandom_range(40)) - 20;
            for (int l = 0; l < NLAYER; l++) put(e, l, mk_stub(l, phi0, k, z0, 300));
            truth.push_back('{e, JET, phi0, k, z0, 300, 15});
          end
        end
        5: begin  // input overflow: 70 stubs far out in z in one layer-6 input memory
          for (int j = 0; j < 70; j++) begin
            stub_t s;
            s.phi = PHI_W'($urandom); s.z = Z_W'(-1900 + int'($urandom_range(100)));
            s.r = '0; s.bend = '0;
            put(e, 5, s, 0);
          end
          for (int j = 0; j < 4; j++) add_track(e, OVFL);
        end
        default: begin
          for (int j = 0; j < 6; j++) add_track(e, NORMAL);
          if (e == 0) begin add_track(e, DUPL); add_track(e, MISS1); end
          if (e == 1) begin add_track(e, REPL); add_track(e, MCREJ); end
          if (e == 2) begin add_track(e, MISS2); add_track(e, ONEHIT); add_track(e, TCREJ); end
          add_noise(e, 3);
        end
      endcase
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

  task automatic compare();
    foreach (truth[i]) begin
      int n = 0, hits = -1;
      if (truth[i].kind == JET) continue;
      foreach (outs[j]) if (outs[j].ev == truth[i].ev && close(truth[i], outs[j].t)) begin
        n++; hits = int'(outs[j].t.hits);
      end
      if (truth[i].kind == ONEHIT || truth[i].kind == TCREJ)
        check(n == 0, $sformatf("ev %0d track %0d (kind %s) must not be found, found %0d", truth[i].ev, i, truth[i].kind.name(), n));
      else begin
        check(n == 1, $sformatf("ev %0d track %0d (kind %s) found %0d times", truth[i].ev, i, truth[i].kind.name(), n));
        check(n == 0 || hits == truth[i].mask, $sformatf("ev %0d track %0d (kind %s) hits %b expected %b",
              truth[i].ev, i, truth[i].kind.name(), hits, truth[i].mask));
      end
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
    check(n_te_trunc > 0, "TrackletEngine truncation never happened");
    check(n_in_ovf > 0, "input memory overflow never happened");
    check(n_ovf > n_in_ovf, "overflow beyond the input memories never happened");
    check(n_tc_rej > 0, "TrackletCalculator rejection never happened");
    check(n_mc_rej > 0, "MatchCalculator rejection never happened");
    check(n_repl > 0, "best-match replacement never happened");
    check(n_dup > 0, "duplicate removal never happened");
    check(n_hits[2] > 0 && n_hits[3] > 0 && n_hits[4] > 0, "fits with 2, 3 and 4 matches not all seen");
    check(n_wrap > 0, "event identifier wrap-around never reached the output");
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
