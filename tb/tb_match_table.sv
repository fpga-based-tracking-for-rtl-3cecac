// tb_match_table: checks that the best-match table keeps, per tracklet address, the
// match with the smallest key (|phi residual|), that a worse or equal key does not
// replace it, that `replaced` flags a replacement, that pages are independent and that
// clr invalidates a page. A reference array in the testbench tracks the expected state.
// Keeping the smallest phi residual is the published rule; the table organisation is this design's.
module tb_match_table;
  logic clk = 1'b0, rst = 1'b1;
  logic clr = 0, we = 0;
  logic [2:0] clr_bx = 0, wbx = 0, rbx = 0;
  logic [5:0] waddr = 0, raddr = 0;
  logic [11:0] wkey = 0;
  logic [29:0] wdata = 0, rdata;
  logic rvalid, replaced;
  int checks = 0, failures = 0, nrep = 0, exp_rep = 0;
  always #5 clk = ~clk;

  match_table #(.W(30), .KW(12), .AW(6), .NPAGE(2)) dut (.*);

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  bit          rv [2][64];
  int          rk [2][64];
  logic [29:0] rd [2][64];
  always @(posedge clk) if (!rst && replaced) nrep++;

  initial begin
    foreach (rv[p, a]) rv[p][a] = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 400; n++) begin
      automatic int p = $urandom_range(1);
      automatic int a = $urandom_range(15);
      automatic int k = $urandom_range(200);
      automatic logic [29:0] d = 30'($urandom);
      we <= 1; wbx <= 3'(p); waddr <= 6'(a); wkey <= 12'(k); wdata <= d;
      if (!rv[p][a] || k < rk[p][a]) begin
        if (rv[p][a]) exp_rep++;
        rv[p][a] = 1; rk[p][a] = k; rd[p][a] = d;
      end
      @(posedge clk);
    end
    we <= 0;
    @(posedge clk);
    @(posedge clk);
    check(nrep == exp_rep && exp_rep > 0, $sformatf("replacements %0d expected %0d", nrep, exp_rep));
    for (int p = 0; p < 2; p++)
      for (int a = 0; a < 16; a++) begin
        rbx <= 3'(p); raddr <= 6'(a);
        @(posedge clk);
        #1;
        check(rvalid == rv[p][a], $sformatf("valid page %0d addr %0d", p, a));
        if (rv[p][a]) check(rdata == rd[p][a], $sformatf("best match page %0d addr %0d", p, a));
      end
    clr <= 1; clr_bx <= 3'd2;
    @(posedge clk);
    clr <= 0;
    for (int p = 0; p < 2; p++) begin
      rbx <= 3'(p); raddr <= 6'd3;
      @(posedge clk);
      #1 check(rvalid == (p == 1 ? rv[1][3] : 1'b0), $sformatf("clr of page 0 only (page %0d)", p));
    end
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
