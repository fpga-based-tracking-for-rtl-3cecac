// tb_projection_router: a behavioural projection memory holds 20, 0 and 45 projections
// for three events. The testbench checks that each projection is routed, in order, to
// exactly the VM given by its top three phi bits, with its memory address, z bin and fine
// phi, and checks the first write at START+5 and DONE at START+108+5.
// The 5-cycle latency and 108-cycle window are the published figures; the VM projection format is this design's.
module tb_projection_router;
  import tracklet_pkg::*;
  localparam int TMUX = 108;
  logic clk = 1'b0, rst = 1'b1, start = 1'b0, done, clr;
  logic [BX_W-1:0] in_rbx, clr_bx, out_bx;
  logic [IDX_W-1:0] pj_raddr;
  logic [IDX_W:0] pj_count;
  proj_t pj_rdata;
  logic [NVM-1:0] vm_we;
  vmproj_t vm_data;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  projection_router dut (.*);

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  proj_t pm [4][64];
  int    pc [4];
  always_ff @(posedge clk) pj_rdata <= pm[in_rbx[1:0]][pj_raddr];
  assign pj_count = (IDX_W + 1)'(pc[in_rbx[1:0]]);

  int cyc = 0, t_start [$], nwr [4], first_wr = -1, ndone = 0;
  always @(posedge clk) cyc++;
  always @(negedge clk) if (!rst) begin
    if (vm_we != 0) begin
      automatic int e = int'(out_bx);
      automatic proj_t p = pm[e][nwr[e]];
      if (first_wr < 0) first_wr = cyc;
      check(vm_we == NVM'(1) << p.phi[13:11], $sformatf("VM select ev %0d #%0d", e, nwr[e]));
      check(vm_data.pidx == 6'(nwr[e]) && vm_data.zbin == p.z[11:7] && vm_data.phif == p.phi[10:7],
            $sformatf("VM projection ev %0d #%0d", e, nwr[e]));
      nwr[e]++;
    end
    if (done) begin
      check(cyc - t_start[ndone] == TMUX + LAT_PR, "DONE at START+113");
      ndone++;
    end
  end

  initial begin
    pc = '{20, 0, 45, 0};
    foreach (pm[e, a]) pm[e][a] = proj_t'({$urandom, $urandom});
    nwr = '{0, 0, 0, 0};
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int e = 0; e < 3; e++) begin
      start <= 1;
      t_start.push_back(cyc + 1);
      @(posedge clk);
      start <= 0;
      repeat (TMUX - 1) @(posedge clk);
    end
    repeat (TMUX) @(posedge clk);
    check(nwr[0] == 20 && nwr[1] == 0 && nwr[2] == 45, $sformatf("counts %0d %0d %0d", nwr[0], nwr[1], nwr[2]));
    check(first_wr - t_start[0] == LAT_PR, $sformatf("first write at START+%0d", first_wr - t_start[0]));
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
