// tb_match_calculator: three behavioural candidate-match memories, a projection memory
// and an AllStubs memory feed the MatchCalculator (windows 64 phi LSB and 16 mm). Stubs
// lie near the projections with random offsets, so some pass and some fail the
// windows; candidates of event 1 exceed the 108-cycle window. The testbench recomputes
// the exact projection with the derivatives, the residuals and the window decision and
// checks each written match (tracklet address, key, stub index, residuals), the count
// of rejections, the first write at START+16 and DONE.
// The 16-cycle latency and 108-cycle window are the published figures; the windows and formats are this design's.
module tb_match_calculator;
  import tracklet_pkg::*;
  localparam int TMUX = 108, NCM = 3;
  logic clk = 1'b0, rst = 1'b1, start = 1'b0, done, clr, fm_we, rejected;
  logic [BX_W-1:0] in_rbx, clr_bx, out_bx;
  logic [IDX_W-1:0] cm_raddr [NCM];
  logic [IDX_W:0] cm_count [NCM];
  cmatch_t cm_rdata [NCM];
  logic [IDX_W-1:0] pj_raddr, as_raddr, fm_waddr;
  proj_t pj_rdata;
  stub_t as_rdata;
  logic [11:0] fm_key;
  fmatch_t fm_data;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  match_calculator #(.NCM(NCM)) dut (.*);

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  cmatch_t cm [NCM][2][64];
  int      cc [NCM][2];
  proj_t   pj [8][64];
  stub_t   st [8][64];
  always_ff @(posedge clk) begin
    for (int m = 0; m < NCM; m++) cm_rdata[m] <= cm[m][in_rbx[0]][cm_raddr[m]];
    pj_rdata <= pj[in_rbx][pj_raddr];
    as_rdata <= st[in_rbx][as_raddr];
  end
  always_comb for (int m = 0; m < NCM; m++) cm_count[m] = (IDX_W + 1)'(cc[m][in_rbx[0]]);

  typedef struct packed { logic [5:0] tidx; logic [11:0] key; fmatch_t fm; } exp_t;
  exp_t exp_q [2][$];
  int nrej_exp = 0, nrej = 0;

  task automatic model(input int e, input cmatch_t c);
    proj_t p;
    stub_t s;
    int pe, ze, dp, dz;
    p = pj[e][c.pidx]; s = st[e][c.sidx];
    pe = int'(p.phi) + ((int'(p.k) * int'(s.r)) >>> 10);
    ze = int'(p.z) + ((int'(p.t) * int'(s.r)) >>> 10);
    dp = int'(s.phi) - pe;
    dz = int'(s.z) - ze;
    if (dp > 64 || dp < -64 || dz > 16 || dz < -16) begin nrej_exp++; return; end
    exp_q[e].push_back(exp_t'({p.tidx, 12'(dp < 0 ? -dp : dp), c.sidx, 12'(dp), 12'(dz)}));
  endtask

  int cyc = 0, t_start [$], nwr [2], first_wr = -1, ndone = 0;
  always @(posedge clk) cyc++;
  always @(negedge clk) if (!rst) begin
    if (rejected) nrej++;
    if (fm_we) begin
      automatic int e = int'(out_bx);
      if (first_wr < 0) first_wr = cyc;
      check(e < 2 && nwr[e] < exp_q[e].size() && exp_t'({fm_waddr, fm_key, fm_data}) == exp_q[e][nwr[e]],
            $sformatf("match ev %0d #%0d", e, nwr[e]));
      nwr[e]++;
    end
    if (done) begin
      check(cyc - t_start[ndone] == TMUX + LAT_MC, "DONE at START+124");
      ndone++;
    end
  end

  initial begin
    int n [2][NCM] = '{'{10, 25, 0}, '{40, 40, 40}};
    int issued;
    for (int e = 0; e < 2; e++) begin
      for (int a = 0; a < 64; a++) begin
        automatic int k = $urandom_range(12000) - 6000, t = $urandom_range(4000) - 2000;
        automatic int r = $urandom_range(20) - 10;
        automatic int ph = 2000 + $urandom_range(12000), z = $urandom_range(1600) - 800;
        pj[e][a] = proj_t'({6'($urandom_range(20)), 14'(ph), 12'(z), 16'(k), 16'(t)});
        st[e][a] = stub_t'({14'(ph + (k * r) / 1024 + $urandom_range(200) - 100),
                            12'(z + (t * r) / 1024 + $urandom_range(50) - 25), 7'(r), 3'(0)});
      end
      issued = 0;
      for (int m = 0; m < NCM; m++) begin
        cc[m][e] = n[e][m];
        for (int a = 0; a < 64; a++) begin
          cm[m][e][a] = cmatch_t'({6'($urandom_range(63)), 6'($urandom_range(63))});
          cm[m][e][a].sidx = cm[m][e][a].pidx;
          if (a < n[e][m] && issued < TMUX) begin model(e, cm[m][e][a]); issued++; end
        end
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
    repeat (TMUX + 30) @(posedge clk);
    check(nwr[0] == exp_q[0].size() && nwr[1] == exp_q[1].size(),
          $sformatf("counts %0d/%0d %0d/%0d", nwr[0], exp_q[0].size(), nwr[1], exp_q[1].size()));
    check(nrej == nrej_exp && nrej > 0 && exp_q[0].size() > 0, $sformatf("rejections %0d expected %0d", nrej, nrej_exp));
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
