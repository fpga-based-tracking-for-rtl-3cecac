// purge_duplicate: PurgeDuplicate step, removal of tracks found more than once.
//
// Works directly on the track stream from the track fit (no processing window of its
// own). It remembers the stub lists of up to NKEEP tracks already sent for the current
// event. An incoming track that shares at least NSHARE stubs (same layer, same AllStubs
// index; the two seed stubs count as layers) with a remembered track is a duplicate and
// is dropped; otherwise it is sent and remembered. The list is emptied when the event
// identifier of the stream changes. Because the first-found copy is already sent when a
// duplicate arrives, the choice between copies is "first found" and does not use the
// fit chi2.
// Timing: a kept track leaves exactly LAT (6) cycles after it enters; one track per
// cycle, back-to-back tracks compare correctly against each other.
// Removing tracks found several times via shared stubs is the paper's; the sharing
// threshold, list size and first-found rule are this design's choices.
module purge_duplicate
  import tracklet_pkg::*;
#(
  parameter int unsigned NKEEP  = 16,
  parameter int unsigned NSHARE = 3,
  parameter int unsigned LAT    = LAT_PD
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            in_valid,
  input  logic [BX_W-1:0] in_bx,
  input  track_t          in_trk,
  output logic            out_valid,
  output logic [BX_W-1:0] out_bx,
  output track_t          out_trk,
  output logic            dup         // an incoming track was dropped as a duplicate
);
  typedef struct packed {
    logic [IDX_W-1:0]            seed_in, seed_out;
    logic [NPROJ-1:0]            hits;
    logic [NPROJ-1:0][IDX_W-1:0] sidx;
  } sig_t;

  // stage 1: register the input
  logic            v1;
  logic [BX_W-1:0] bx1;
  track_t          t1;
  always_ff @(posedge clk) begin
    if (rst) v1 <= 1'b0; else v1 <= in_valid;
    bx1 <= in_bx; t1 <= in_trk;
  end

  // stage 2: compare with the remembered tracks of this event
  sig_t            keep [NKEEP];
  logic [NKEEP-1:0] kv;
  logic [BX_W-1:0] kbx;
  logic            same_ev, is_dup;
  sig_t            s1;
  always_comb begin
    int sh;
    s1.seed_in = t1.seed_in; s1.seed_out = t1.seed_out; s1.hits = t1.hits; s1.sidx = t1.sidx;
    same_ev = (kbx == bx1);
    is_dup  = 1'b0;
    for (int e = 0; e < int'(NKEEP); e++) begin
      sh = 0;
      if (keep[e].seed_in  == s1.seed_in)  sh++;
      if (keep[e].seed_out == s1.seed_out) sh++;
      for (int l = 0; l < int'(NPROJ); l++)
        if (keep[e].hits[l] && s1.hits[l] && keep[e].sidx[l] == s1.sidx[l]) sh++;
      if (same_ev && kv[e] && sh >= int'(NSHARE)) is_dup = 1'b1;
    end
  end

  logic [$clog2(NKEEP+1)-1:0] nk;
  always_ff @(posedge clk) begin
    if (rst) begin
      kv <= '0; kbx <= '0; nk <= '0;
    end else if (v1) begin
      if (!same_ev) begin
        kbx <= bx1; kv <= '0; kv[0] <= 1'b1; keep[0] <= s1; nk <= 1;
      end else if (!is_dup && int'(nk) < int'(NKEEP)) begin
        kv[nk[$clog2(NKEEP)-1:0]]   <= 1'b1;
        keep[nk[$clog2(NKEEP)-1:0]] <= s1;
        nk <= nk + 1'b1;
      end
    end
  end
  assign dup = v1 && same_ev && is_dup;

  typedef struct packed { logic [BX_W-1:0] bx; track_t trk; } pd_t;
  pd_t p_in, p_out;
  assign p_in.bx  = bx1;
  assign p_in.trk = t1;
  delay_pipe #(.W($bits(pd_t)), .N(LAT - 1)) u_pad (
    .clk, .rst, .in_valid(v1 && !dup), .in_data(p_in), .out_valid(out_valid), .out_data(p_out));
  assign out_bx  = p_out.bx;
  assign out_trk = p_out.trk;
endmodule
