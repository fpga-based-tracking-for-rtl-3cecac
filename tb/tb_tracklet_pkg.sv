// tb_tracklet_pkg: checks the shared formats and constants. The stub must be 36 bits,
// the VM stub 18 bits and the stub pair 12 bits; the window must be 450 ns at 240 MHz;
// the step latencies must add up to 111 cycles; K_MAX must be the curvature of a
// 2 GeV track in a 3.8 T field expressed in phi units per mm (x 2^10); vm_of() must
// return phi / 2048 for random phi values and iabs() the absolute value.
// The widths, window, latencies and the 2 GeV cut are published figures; the phi unit
// and field value used to check K_MAX are this design's.
module tb_tracklet_pkg;
  import tracklet_pkg::*;
  logic clk = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    real rho_mm, kmax;
    check($bits(stub_t) == 36, "stub is 36 bits");
    check($bits(vmstub_t) == 18, "VM stub is 18 bits");
    check($bits(stubpair_t) == 12, "stub pair is 12 bits");
    check(TMUX_CYCLES == 108, "450 ns at 240 MHz is 108 cycles");
    check(LAT_VMR + LAT_TE + LAT_TC + LAT_PR + LAT_ME + LAT_MC + LAT_TF + LAT_PD == 111, "latency sum 111");
    check((1 << BX_W) == 8, "eight events in flight");
    // radius of curvature [m] = pT [GeV] / (0.3 B [T]); k = dphi/dr = 1/(2 rho)
    rho_mm = 2.0 / (0.3 * 3.8) * 1000.0;
    kmax = 1.0 / (2.0 * rho_mm) / PHI_LSB * 1024.0;
    check(K_MAX > kmax - 20 && K_MAX < kmax + 20, $sformatf("K_MAX %0d vs %f", K_MAX, kmax));
    for (int i = 0; i < 200; i++) begin
      automatic int p = int'($urandom_range(16383));
      automatic int v = int'($urandom) - 32'sh4000_0000;
      check(int'(vm_of(PHI_W'(p))) == p / 2048, $sformatf("vm_of(%0d)", p));
      check(iabs(v) == (v < 0 ? -v : v) && iabs(v) >= 0, "iabs");
    end
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
