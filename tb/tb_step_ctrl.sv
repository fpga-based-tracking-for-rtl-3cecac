// tb_step_ctrl: checks the step sequencer. START is pulsed every 108 cycles; the test
// checks that the issue window is exactly 108 cycles (cycles 1..108 after START), that
// `first` marks cycle 1, that `clr` coincides with START and names the next event, that
// bx counts events and that DONE comes LAT cycles after the window, i.e. START+108+LAT.
// The 108-cycle window follows the published timing; the cycle numbering checked here is this design's.
module tb_step_ctrl;
  localparam int TMUX = 108, LAT = 4;
  logic clk = 1'b0, rst = 1'b1, start = 1'b0;
  logic [2:0] bx, bx_next;
  logic clr, first, issue, done;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  step_ctrl #(.TMUX(TMUX), .LAT(LAT)) dut (.clk, .rst, .start, .bx, .bx_next, .clr, .first, .issue, .done);

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int cyc = 0, last_start = -1, nissue = 0, ndone = 0;
  int start_times [$];
  always @(posedge clk) cyc++;

  initial begin
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    for (int e = 0; e < 6; e++) begin
      @(posedge clk);
      start <= 1'b1;
      @(posedge clk);
      start <= 1'b0;
      repeat (TMUX - 2) @(posedge clk);
    end
    repeat (TMUX + 20) @(posedge clk);
    check(ndone == 6, $sformatf("6 DONE pulses, got %0d", ndone));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor (sampled before the clock edge updates)
  always @(negedge clk) if (!rst) begin
    if (issue) begin
      nissue++;
      check(bx == 3'(start_times.size() - 1), "bx is the event in process");
      check(first == (nissue == 1), "first marks the first issue cycle");
    end
    if (start) begin
      check(clr && bx_next == 3'(start_times.size()), "clr with START names the next event");
      if (start_times.size() > 0) check(nissue == TMUX, $sformatf("issue window %0d cycles", nissue));
      start_times.push_back(cyc);
      nissue = 0;
    end
    if (done) begin
      check(ndone < start_times.size() && cyc - start_times[ndone] == TMUX + LAT,
            $sformatf("DONE %0d cycles after START", cyc - start_times[ndone]));
      ndone++;
    end
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
