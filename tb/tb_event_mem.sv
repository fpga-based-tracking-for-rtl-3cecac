// tb_event_mem: checks the paged buffer memory. Event 0 is written to page 0 while
// event 1 goes to page 1; both are read back with one-cycle latency and compared with
// the values written; counts per page, the write address (wcount), drop-on-full with
// the overflow flag after 64 entries, and emptying a page with clr are checked.
// Paging by event identifier follows the published memory scheme; 64 entries per page and drop-on-full are this design's choices.
module tb_event_mem;
  logic clk = 1'b0, rst = 1'b1;
  logic clr = 0, we = 0;
  logic [2:0] clr_bx = 0, wbx = 0, rbx = 0;
  logic [35:0] wdata = 0, rdata;
  logic [5:0] raddr = 0;
  logic [6:0] rcount, wcount;
  logic overflow;
  int checks = 0, failures = 0, novf = 0;
  always #5 clk = ~clk;

  event_mem #(.W(36), .AW(6), .NPAGE(2)) dut (.*);

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask
  function automatic logic [35:0] val(input int e, input int a);
    return 36'(e * 1000003 + a * 7919 + 17);
  endfunction

  always @(posedge clk) if (!rst && overflow) novf++;

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    // event 0: 20 entries, event 1: 70 entries (6 dropped)
    for (int e = 0; e < 2; e++) begin
      for (int a = 0; a < (e == 0 ? 20 : 70); a++) begin
        we <= 1; wbx <= 3'(e); wdata <= val(e, a);
        @(posedge clk);
        #1 if (a < 64) check(wcount == 7'(a + 1), "wcount counts appended entries");
      end
      we <= 0;
      @(posedge clk);
    end
    repeat (2) @(posedge clk);
    check(novf == 6, $sformatf("6 overflow pulses, got %0d", novf));
    for (int e = 0; e < 2; e++) begin
      rbx <= 3'(e);
      @(posedge clk);
      check(rcount == (e == 0 ? 7'd20 : 7'd64), $sformatf("count of page %0d = %0d", e, rcount));
      for (int a = 0; a < (e == 0 ? 20 : 64); a++) begin
        raddr <= 6'(a);
        @(posedge clk);
        #1 check(rdata == val(e, a), $sformatf("read event %0d addr %0d", e, a));
      end
    end
    // event 2 reuses page 0: clear and refill
    clr <= 1; clr_bx <= 3'd2;
    @(posedge clk);
    clr <= 0;
    rbx <= 3'd2;
    @(posedge clk);
    check(rcount == 0, "clr empties the page");
    rbx <= 3'd1;
    @(posedge clk);
    check(rcount == 64, "clr leaves the other page");
    we <= 1; wbx <= 3'd2; wdata <= val(2, 0);
    @(posedge clk);
    we <= 0; rbx <= 3'd2; raddr <= 0;
    @(posedge clk);
    @(posedge clk);
    #1 check(rdata == val(2, 0) && rcount == 1, "event 2 written to page 0");
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
