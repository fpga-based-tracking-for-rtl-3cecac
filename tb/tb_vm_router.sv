// tb_vm_router: drives the VMRouter with three behavioural input stub memories holding
// two events (event 0: 10+0+25 stubs; event 1: 3x40 stubs, more than the 64-entry
// AllStubs page and the 108-cycle window) and an empty third event. Expected output is
// worked out in the testbench: stubs in input order, the index counter as AllStubs
// address, VM = top 3 phi bits, VM stub fields, truncation at 64 stubs. Timing: first
// write 4 cycles after START, DONE 108+4 cycles after START.
// The 4-cycle latency, three inputs and 8 VM outputs follow the published VMRouter; the VM stub fields are this design's.
module tb_vm_router;
  import tracklet_pkg::*;
  localparam int TMUX = 108;
  logic clk = 1'b0, rst = 1'b1, start = 1'b0, done;
  logic [BX_W-1:0] in_rbx, clr_bx, out_bx;
  logic [IDX_W-1:0] in_raddr [3];
  logic [IDX_W:0] in_count [3];
  stub_t in_rdata [3];
  logic clr, as_we;
  stub_t as_data;
  logic [NVM-1:0] vm_we;
  vmstub_t vm_data;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  vm_router dut (.*);

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // behavioural input memories: [input][page][addr]
  stub_t mem [3][2][64];
  int    cnt [3][2];
  always_ff @(posedge clk)
    for (int i = 0; i < 3; i++) in_rdata[i] <= mem[i][in_rbx[0]][in_raddr[i]];
  always_comb for (int i = 0; i < 3; i++) in_count[i] = (IDX_W + 1)'(cnt[i][in_rbx[0]]);

  stub_t exp_q [3][$];   // expected AllStubs contents per event
  int cyc = 0, t_start [$], nwr [3], first_wr [3];
  always @(posedge clk) cyc++;

  always @(negedge clk) if (!rst) begin
    if (as_we) begin
      automatic int e = int'(out_bx);
      automatic int k = nwr[e];
      if (k == 0) first_wr[e] = cyc;
      check(e < 3 && k < exp_q[e].size(), "unexpected AllStubs write");
      if (e < 3 && k < exp_q[e].size()) begin
        check(as_data == exp_q[e][k], $sformatf("AllStubs ev %0d entry %0d", e, k));
        check(vm_we == NVM'(1) << exp_q[e][k].phi[13:11], "one WR_EN, selected by top phi bits");
        check(vm_data.idx == 6'(k) && vm_data.zbin == exp_q[e][k].z[11:7] &&
              vm_data.phif == exp_q[e][k].phi[10:7] && vm_data.bend == exp_q[e][k].bend, "VM stub fields");
      end
      nwr[e]++;
    end else check(vm_we == 0, "no VM write without AllStubs write");
  end

  int ndone = 0;
  always @(negedge clk) if (!rst && done) begin
    check(cyc - t_start[ndone] == TMUX + LAT_VMR, $sformatf("DONE at START+%0d", cyc - t_start[ndone]));
    ndone++;
  end

  initial begin
    int n [2][3] = '{'{10, 0, 25}, '{40, 40, 40}};
    for (int e = 0; e < 2; e++)
      for (int i = 0; i < 3; i++) begin
        cnt[i][e] = n[e][i];
        for (int a = 0; a < 64; a++) begin
          mem[i][e][a] = stub_t'({$urandom, $urandom});
          if (a < n[e][i] && exp_q[e].size() < 64) exp_q[e].push_back(mem[i][e][a]);
        end
      end
    foreach (nwr[e]) nwr[e] = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int e = 0; e < 3; e++) begin
      if (e == 2) for (int i = 0; i < 3; i++) cnt[i][0] = 0;
      start <= 1;
      t_start.push_back(cyc + 1);
      @(posedge clk);
      start <= 0;
      repeat (TMUX - 1) @(posedge clk);
    end
    repeat (TMUX) @(posedge clk);
    check(nwr[0] == 35 && nwr[1] == 64 && nwr[2] == 0, $sformatf("stub counts %0d %0d %0d", nwr[0], nwr[1], nwr[2]));
    check(first_wr[0] - t_start[0] == LAT_VMR, $sformatf("first write at START+%0d", first_wr[0] - t_start[0]));
    check(ndone == 3, "three DONE pulses");
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
