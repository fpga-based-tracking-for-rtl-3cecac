// tb_purge_duplicate: drives the PurgeDuplicate with three events of random tracks whose
// stub indices come from a small range, so that many pairs share 3 or more stubs. Tracks
// arrive back-to-back and with gaps. A reference model keeps the list of sent tracks per
// event (first found is kept, list capped at 16) and predicts which tracks are sent.
// Checks: each sent track equals the next predicted one and leaves exactly 6 cycles
// after it entered; the dup flag matches the prediction; the list is emptied when the
// event identifier changes (an exact copy of a track of the previous event is sent).
// The 6-cycle latency is the published figure; the sharing rule (3 stubs, first found kept) is this design's.
module tb_purge_duplicate;
  import tracklet_pkg::*;
  logic clk = 1'b0, rst = 1'b1, in_valid = 1'b0, out_valid, dup;
  logic [BX_W-1:0] in_bx = '0, out_bx;
  track_t in_trk, out_trk;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  purge_duplicate dut (.*);

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  track_t kept [$];
  logic [BX_W-1:0] kept_bx = '0;
  typedef struct { track_t t; logic [BX_W-1:0] bx; int cyc; } exp_t;
  exp_t exp_q [$];
  int exp_dup [$];
  int cyc = 0, nsent = 0, ndup = 0, nfull = 0;
  always @(posedge clk) cyc++;

  function automatic int shared(input track_t a, input track_t b);
    int s = 0;
    if (a.seed_in == b.seed_in) s++;
    if (a.seed_out == b.seed_out) s++;
    for (int l = 0; l < NPROJ; l++) if (a.hits[l] && b.hits[l] && a.sidx[l] == b.sidx[l]) s++;
    return s;
  endfunction

  task automatic send(input track_t t, input logic [BX_W-1:0] bx);
    bit d = 0;
    @(negedge clk);
    if (bx != kept_bx) begin kept.delete(); kept_bx = bx; end
    foreach (kept[i]) if (shared(kept[i], t) >= 3) d = 1;
    if (!d) begin
      if (kept.size() < 16) kept.push_back(t); else nfull++;
      exp_q.push_back('{t, bx, cyc + 6});
    end
    exp_dup.push_back(d ? cyc + 1 : -1);
    in_valid = 1; in_trk = t; in_bx = bx;
  endtask

  function automatic track_t rnd_trk();
    track_t t;
    t = track_t'({$urandom, $urandom, $urandom, $urandom});
    t.seed_in = 6'($urandom_range(3)); t.seed_out = 6'($urandom_range(3));
    t.hits = 4'($urandom);
    for (int l = 0; l < NPROJ; l++) t.sidx[l] = 6'($urandom_range(2));
    return t;
  endfunction

  always @(negedge clk) if (!rst) begin
    if (out_valid) begin
      check(exp_q.size() > 0 && out_trk == exp_q[0].t && out_bx == exp_q[0].bx,
            $sformatf("track %0d content", nsent));
      if (exp_q.size() > 0) begin
        check(cyc == exp_q[0].cyc, $sformatf("track %0d latency %0d", nsent, cyc - exp_q[0].cyc + 6));
        void'(exp_q.pop_front());
      end
      nsent++;
    end
    if (dup) ndup++;
  end
  // dup flag: one cycle after the track entered
  int dup_seen = 0;
  always @(negedge clk) if (!rst && exp_dup.size() > 0 && cyc >= 0) begin
    if (exp_dup[0] != -1 && cyc == exp_dup[0]) begin
      check(dup, "dup flag for a predicted duplicate"); dup_seen++; void'(exp_dup.pop_front());
    end else if (exp_dup[0] == -1) void'(exp_dup.pop_front());
  end

  initial begin
    track_t t0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int e = 0; e < 3; e++) begin
      for (int n = 0; n < 60; n++) begin
        automatic track_t t = rnd_trk();
        if (e == 0 && n == 0) t0 = t;
        if (e == 1 && n == 0) t = t0;             // exact copy of a track of the previous event
        send(t, 3'(e));
        if ($urandom_range(3) == 0) repeat ($urandom_range(5)) begin @(negedge clk); in_valid = 0; end
      end
      @(negedge clk); in_valid = 0;
      repeat (4) @(posedge clk);
    end
    repeat (20) @(posedge clk);
    check(exp_q.size() == 0, $sformatf("%0d predicted tracks not sent", exp_q.size()));
    check(ndup == dup_seen && ndup > 20, $sformatf("dup count %0d/%0d", ndup, dup_seen));
    check(nsent > 20, "enough tracks sent");
    $display("sent %0d dropped %0d not remembered (list full) %0d", nsent, ndup, nfull);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
