// step_ctrl: sequencer shared by every processing step.
//
// A processing step receives START once per event (every TMUX cycles). The controller
// then opens an issue window of TMUX cycles (cycles 1..TMUX after START) in which the
// step may start one operation per cycle; whatever is not started in the window is
// truncated. It keeps the event identifier (bx): `bx` is the event being processed,
// `bx_next` the event the next START will begin. At START it pulses `clr` so that the
// step's output memories empty the page of `bx_next`. DONE pulses LAT cycles after
// the last issue cycle, i.e. at START+TMUX+LAT, and is the next step's START
// ("DONE (Inc Next BX)" in the VMRouter and TrackletEngine diagrams). The window and
// latency model follow the paper's latency tables; the exact cycle numbering is this
// design's choice.
module step_ctrl #(
  parameter int unsigned TMUX = 108,
  parameter int unsigned LAT  = 4,
  parameter int unsigned BX_W = 3
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            start,
  output logic [BX_W-1:0] bx,
  output logic [BX_W-1:0] bx_next,
  output logic            clr,
  output logic            first,   // first issue cycle of the window
  output logic            issue,   // inside the issue window
  output logic            done
);
  logic [$clog2(TMUX+1)-1:0] cnt;
  logic [LAT-1:0] sr;

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt <= '0; issue <= 1'b0; bx <= '0; bx_next <= '0; sr <= '0;
    end else begin
      sr <= {sr[LAT-2:0], issue && (cnt == ($clog2(TMUX+1))'(TMUX))};
      if (start) begin
        issue   <= 1'b1;
        cnt     <= 1;
        bx      <= bx_next;
        bx_next <= bx_next + 1'b1;
      end else if (issue) begin
        if (cnt == ($clog2(TMUX+1))'(TMUX)) issue <= 1'b0;
        else cnt <= cnt + 1'b1;
      end
    end
  end

  assign first = issue && (cnt == 1);
  assign clr   = start;
  assign done  = sr[LAT-1];

  initial assert (LAT >= 2) else $error("step_ctrl: LAT must be at least 2");
endmodule
