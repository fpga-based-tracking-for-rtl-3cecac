// tb_tracklet_engine: two behavioural VM stub memories feed the TrackletEngine (inner
// layer at 230 mm, outer at 350 mm, same phi VM). Event 0 has 8x10 stub pairs, event 1
// has 12x12 = 144 pairs, of which only the first 108 fit in the window. The testbench
// recomputes the pT (phi difference) and z0 consistency from the bin centres and checks
// every written pair, their order, their number, the truncation, the first write at
// START+5 and DONE at START+108+5.
// The 5-cycle latency and the 108-pair truncation are published; the LUT contents are this design's.
module tb_tracklet_engine;
  import tracklet_pkg::*;
  localparam int TMUX = 108;
  logic clk = 1'b0, rst = 1'b1, start = 1'b0, done, clr, sp_we;
  logic [BX_W-1:0] in_rbx, clr_bx, out_bx;
  logic [IDX_W-1:0] inner_raddr, outer_raddr;
  logic [IDX_W:0] inner_count, outer_count;
  vmstub_t inner_rdata, outer_rdata;
  stubpair_t sp_data;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  tracklet_engine dut (.*);

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  vmstub_t imem [2][64], omem [2][64];
  int      icnt [2], ocnt [2];
  always_ff @(posedge clk) begin
    inner_rdata <= imem[in_rbx[0]][inner_raddr];
    outer_rdata <= omem[in_rbx[0]][outer_raddr];
  end
  assign inner_count = (IDX_W + 1)'(icnt[in_rbx[0]]);
  assign outer_count = (IDX_W + 1)'(ocnt[in_rbx[0]]);

  function automatic bit pair_ok(input vmstub_t a, input vmstub_t b);
    int dphi, zi, zo, z0;
    dphi = (int'(b.phif) - int'(a.phif)) * 128;
    zi = int'(a.zbin) * 128 + 64;
    zo = int'(b.zbin) * 128 + 64;
    z0 = zi - (zo - zi) * 230 / 120;
    return (dphi <= 1004 && dphi >= -1004) && (z0 <= 459 && z0 >= -459);
  endfunction

  stubpair_t exp_q [2][$];
  int cyc = 0, t_start [$], nwr [3], first_wr = -1, ndone = 0;
  always @(posedge clk) cyc++;

  always @(negedge clk) if (!rst) begin
    if (sp_we) begin
      automatic int e = int'(out_bx);
      if (first_wr < 0) first_wr = cyc;
      check(e < 2 && nwr[e] < exp_q[e].size(), "unexpected stub pair");
      if (e < 2 && nwr[e] < exp_q[e].size())
        check(sp_data == exp_q[e][nwr[e]], $sformatf("stub pair ev %0d #%0d", e, nwr[e]));
      nwr[e]++;
    end
    if (done) begin
      check(cyc - t_start[ndone] == TMUX + LAT_TE, "DONE at START+113");
      ndone++;
    end
  end

  initial begin
    int ni [2] = '{8, 12};
    int no [2] = '{10, 12};
    int np;
    for (int e = 0; e < 2; e++) begin
      icnt[e] = ni[e]; ocnt[e] = no[e];
      for (int a = 0; a < 64; a++) begin
        imem[e][a] = vmstub_t'({6'(a), 5'($urandom_range(6) - 3), 4'($urandom_range(15)), 3'($urandom)});
        omem[e][a] = vmstub_t'({6'(a + 32), 5'($urandom_range(6) - 3), 4'($urandom_range(15)), 3'($urandom)});
      end
      omem[e][0].zbin = imem[e][0].zbin; omem[e][0].phif = imem[e][0].phif;  // first pair passes
      np = 0;
      for (int i = 0; i < ni[e]; i++)
        for (int j = 0; j < no[e]; j++) begin
          if (np < TMUX && pair_ok(imem[e][i], omem[e][j]))
            exp_q[e].push_back(stubpair_t'({imem[e][i].idx, omem[e][j].idx}));
          np++;
        end
    end
    nwr = '{0, 0, 0};
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
    check(nwr[0] == exp_q[0].size() && nwr[1] == exp_q[1].size(),
          $sformatf("pair counts %0d/%0d %0d/%0d", nwr[0], exp_q[0].size(), nwr[1], exp_q[1].size()));
    check(exp_q[0].size() > 5 && exp_q[0].size() < 80, "LUTs both accept and reject");
    check(first_wr - t_start[0] == LAT_TE, $sformatf("first write at START+%0d", first_wr - t_start[0]));
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
