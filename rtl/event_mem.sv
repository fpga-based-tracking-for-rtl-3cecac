// event_mem: buffer memory between two processing steps.
//
// The memory holds NPAGE events of up to 2^AW entries each. The low bits of the event
// identifier (bx) select the page and form the top bits of the RAM address, so the
// writing step fills the page of one event while the reading step reads the page of an
// earlier one (NPAGE = 2 for data used by the next step, 8 for data used several steps
// later). Writes append: the entry count of the page is the write address. `clr`
// empties a page at the writer's START. Writes to a full page are dropped and flagged
// on `overflow` (truncation). Reads are synchronous: rdata is valid one cycle after
// raddr. `rcount` (entries in page rbx) and `wcount` (entries in page wbx, which is the
// address the current write goes to) are combinational.
// The paging and the shallow two-event depth follow the paper; append addressing,
// count outputs and drop-on-full are this design's choices.
module event_mem #(
  parameter int unsigned W     = 36,
  parameter int unsigned AW    = 6,
  parameter int unsigned NPAGE = 2,
  parameter int unsigned BX_W  = 3
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            clr,
  input  logic [BX_W-1:0] clr_bx,
  input  logic            we,
  input  logic [BX_W-1:0] wbx,
  input  logic [W-1:0]    wdata,
  input  logic [BX_W-1:0] rbx,
  input  logic [AW-1:0]   raddr,
  output logic [W-1:0]    rdata,
  output logic [AW:0]     rcount,
  output logic [AW:0]     wcount,
  output logic            overflow
);
  localparam int unsigned PW    = $clog2(NPAGE);
  localparam int unsigned DEPTH = NPAGE << AW;

  logic [W-1:0]  ram [DEPTH];
  logic [AW:0]   count [NPAGE];
  logic [PW-1:0] wpage, rpage, cpage;

  assign wpage  = wbx[PW-1:0];
  assign rpage  = rbx[PW-1:0];
  assign cpage  = clr_bx[PW-1:0];
  assign wcount = count[wpage];
  assign rcount = count[rpage];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int p = 0; p < int'(NPAGE); p++) count[p] <= '0;
      overflow <= 1'b0;
    end else begin
      overflow <= we && wcount[AW];
      if (we && !wcount[AW]) count[wpage] <= wcount + 1'b1;
      if (clr) count[cpage] <= '0;
    end
  end

  always_ff @(posedge clk) begin
    if (we && !wcount[AW]) ram[{wpage, wcount[AW-1:0]}] <= wdata;
    rdata <= ram[{rpage, raddr}];
  end

  initial assert (NPAGE >= 2 && (1 << PW) == NPAGE) else $error("event_mem: NPAGE must be a power of 2, at least 2");
endmodule
