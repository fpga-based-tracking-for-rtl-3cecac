// match_table: per-event table of the best stub match of each tracklet in one layer.
//
// The MatchCalculator writes accepted matches with the tracklet index as address and
// the absolute phi residual as `wkey`. An entry is replaced only when the page holds no
// valid match at that address yet or the new key is strictly smaller, so the table ends
// up with the stub of smallest phi residual per tracklet, as the algorithm requires.
// NPAGE pages indexed by the low bits of the event identifier; `clr` invalidates a
// page. Reads are synchronous (rdata and rvalid one cycle after raddr). The key compare
// uses a register copy of the keys that is read combinationally.
module match_table #(
  parameter int unsigned W     = 30,
  parameter int unsigned KW    = 12,
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
  input  logic [AW-1:0]   waddr,
  input  logic [KW-1:0]   wkey,
  input  logic [W-1:0]    wdata,
  input  logic [BX_W-1:0] rbx,
  input  logic [AW-1:0]   raddr,
  output logic [W-1:0]    rdata,
  output logic            rvalid,
  output logic            replaced    // a stored match was replaced by a better one
);
  localparam int unsigned PW    = $clog2(NPAGE);
  localparam int unsigned DEPTH = NPAGE << AW;

  logic [W-1:0]  ram  [DEPTH];
  logic [KW-1:0] keys [DEPTH];
  logic [DEPTH-1:0] vld;
  logic [PW+AW-1:0] wa, ra;
  logic take;

  assign wa   = {wbx[PW-1:0], waddr};
  assign ra   = {rbx[PW-1:0], raddr};
  assign take = we && (!vld[wa] || (wkey < keys[wa]));

  always_ff @(posedge clk) begin
    if (rst) begin
      vld <= '0; replaced <= 1'b0; rvalid <= 1'b0;
    end else begin
      replaced <= take && vld[wa];
      if (take) vld[wa] <= 1'b1;
      if (clr) vld[{clr_bx[PW-1:0], AW'(0)} +: (1 << AW)] <= '0;
      rvalid <= vld[ra];
    end
  end

  always_ff @(posedge clk) begin
    if (take) begin
      ram[wa]  <= wdata;
      keys[wa] <= wkey;
    end
    rdata <= ram[ra];
  end

  initial assert (NPAGE >= 2 && (1 << PW) == NPAGE) else $error("match_table: NPAGE must be a power of 2, at least 2");
endmodule
