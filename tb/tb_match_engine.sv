// tb_match_engine: behavioural VM projection and VM stub memories hold 6x9 and 10x12
// (120 pairs, 12 beyond the window) entries for two events, with z bins in -2..2 and
// fine phi in 0..5 so that both matches and misses occur. The testbench recomputes the
// coarse criteria (z bins within 1, fine phi within 1) and checks every candidate, its
// order, the 108-pair truncation, the first write at START+6 and DONE.
// The 6-cycle latency and 108-cycle window are the published figures; the coarse criteria are this design's.
module tb_match_engine;
  import tracklet_pkg::*;
  localparam int TMUX = 108;
  logic clk = 1'b0, rst = 1'b1, start = 1'b0, done, clr, cm_we;
  logic [BX_W-1:0] in_rbx, clr_bx, out_bx;
  logic [IDX_W-1:0] vp_raddr, vs_raddr;
  logic [IDX_W:0] vp_count, vs_count;
  vmproj_t vp_rdata;
  vmstub_t vs_rdata;
  cmatch_t cm_data;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  match_engine dut (.*);

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  vmproj_t vp [2][64];
  vmstub_t vs [2][64];
  int      npj [2], nst [2];
  always_ff @(posedge clk) begin
    vp_rdata <= vp[in_rbx[0]][vp_raddr];
    vs_rdata <= vs[in_rbx[0]][vs_raddr];
  end
  assign vp_count = (IDX_W + 1)'(npj[in_rbx[0]]);
  assign vs_count = (IDX_W + 1)'(nst[in_rbx[0]]);

  cmatch_t exp_q [2][$];
  int cyc = 0, t_start [$], nwr [2], first_wr = -1, ndone = 0;
  always @(posedge clk) cyc++;
  always @(negedge clk) if (!rst) begin
    if (cm_we) begin
      automatic int e = int'(out_bx);
      if (first_wr < 0) first_wr = cyc;
      check(e < 2 && nwr[e] < exp_q[e].size() && cm_data == exp_q[e][nwr[e]], $sformatf("candidate ev %0d #%0d", e, nwr[e]));
      nwr[e]++;
    end
    if (done) begin
      check(cyc - t_start[ndone] == TMUX + LAT_ME, "DONE at START+114");
      ndone++;
    end
  end

  initial begin
    int n;
    npj = '{6, 10}; nst = '{9, 12};
    for (int e = 0; e < 2; e++) begin
      for (int a = 0; a < 64; a++) begin
        vp[e][a] = vmproj_t'({6'(a), 5'($urandom_range(4) - 2), 4'($urandom_range(5))});
        vs[e][a] = vmstub_t'({6'(a + 10), 5'($urandom_range(4) - 2), 4'($urandom_range(5)), 3'($urandom)});
      end
      vs[e][0].zbin = vp[e][0].zbin; vs[e][0].phif = vp[e][0].phif;
      n = 0;
      for (int i = 0; i < npj[e]; i++)
        for (int j = 0; j < nst[e]; j++) begin
          automatic int dz = int'(vs[e][j].zbin) - int'(vp[e][i].zbin);
          automatic int dp = int'(vs[e][j].phif) - int'(vp[e][i].phif);
          if (n < TMUX && dz >= -1 && dz <= 1 && dp >= -1 && dp <= 1)
            exp_q[e].push_back(cmatch_t'({vp[e][i].pidx, vs[e][j].idx}));
          n++;
        end
    end
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
    repeat (TMUX + 20) @(posedge clk);
    check(nwr[0] == exp_q[0].size() && nwr[1] == exp_q[1].size() && exp_q[0].size() > 0 && exp_q[0].size() < 54,
          $sformatf("counts %0d/%0d %0d/%0d", nwr[0], exp_q[0].size(), nwr[1], exp_q[1].size()));
    check(first_wr - t_start[0] == LAT_ME, $sformatf("first write at START+%0d", first_wr - t_start[0]));
    check(ndone == 2, "two DONE pulses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
