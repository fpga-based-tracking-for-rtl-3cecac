// tracklet_pkg: data formats and constants shared by the tracklet sector-processor RTL.
//
// Every processing step works in a fixed time window of TMUX_CYCLES clock cycles
// (450 ns at 240 MHz with time-multiplexing factor 18, i.e. 108 cycles) and passes its
// results to the next step through event-paged memories with 64 entries per event
// (6-bit stub index). The stub is 36 bits and the virtual-module (VM) stub 18 bits, as
// in the original firmware; the split of those bits into fields is this design's own
// choice, as are the detector units: phi in 14-bit sector-local units of PHI_LSB = 0.75/2^14 rad
// (about 46 microradians), z and r in millimetres.
//
// The geometry covers the barrel only: seeding in layers 1+2, projections into layers 3-6.
package tracklet_pkg;

  // ---------------- timing ----------------
  localparam int unsigned TMUX_CYCLES = 108;  // 450 ns * 240 MHz
  localparam int unsigned BX_W        = 3;    // event identifier: up to 8 events in flight

  // step latencies (clock cycles from START to first write), tracklet 2.0 latency table
  localparam int unsigned LAT_VMR = 4;
  localparam int unsigned LAT_TE  = 5;
  localparam int unsigned LAT_TC  = 43;
  localparam int unsigned LAT_PR  = 5;
  localparam int unsigned LAT_ME  = 6;
  localparam int unsigned LAT_MC  = 16;
  localparam int unsigned LAT_TF  = 26;
  localparam int unsigned LAT_PD  = 6;

  // ---------------- geometry ----------------
  localparam int unsigned NLAYER = 6;
  localparam int unsigned NPROJ  = 4;          // projection layers L3..L6 for the L1+L2 seed
  localparam int unsigned NVM    = 8;          // phi VMs per layer (WR_EN1..WR_EN8)
  localparam int unsigned IDX_W  = 6;          // index into AllStubs / per-event entries
  localparam int unsigned PHI_W  = 14;
  localparam int unsigned Z_W    = 12;
  localparam int unsigned R_W    = 7;
  // nominal layer radii in mm (layers 1..6 from 230 mm to 1100 mm)
  localparam int RADIUS [NLAYER] = '{230, 350, 500, 680, 880, 1100};
  // 14-bit phi covers 0.75 rad (one of 9 sectors plus overlap): LSB = 45.78 urad
  localparam real PHI_LSB = 0.75 / 16384.0;
  // pT > 2 GeV <=> radius of curvature > 1750 mm <=> |dphi/dr| < 1/3500 rad/mm.
  // K_MAX is that slope in phi LSB per mm, scaled by 2^K_FRAC.
  localparam int unsigned K_FRAC = 10;
  localparam int K_MAX  = 6391;                // round(1/3500/PHI_LSB*1024)
  localparam int Z0_MAX = 150;                 // |z0| < 15 cm
  // match-calculator residual windows per projection layer (phi LSB, mm)
  localparam int PHI_WIN [NPROJ] = '{64, 64, 64, 64};
  localparam int Z_WIN   [NPROJ] = '{16, 50, 50, 50};

  // ---------------- data formats ----------------
  typedef struct packed {             // 36-bit stub as delivered by the input links
    logic [PHI_W-1:0]        phi;     // sector-local phi
    logic signed [Z_W-1:0]   z;       // mm
    logic signed [R_W-1:0]   r;       // mm, offset from the layer's nominal radius
    logic [2:0]              bend;
  } stub_t;

  typedef struct packed {             // 18-bit VM stub
    logic [IDX_W-1:0]  idx;           // address of the full stub in AllStubs
    logic signed [4:0] zbin;          // z[11:7]
    logic [3:0]        phif;          // phi bits below the VM number
    logic [2:0]        bend;
  } vmstub_t;

  typedef struct packed {             // 12-bit stub pair from the TrackletEngine
    logic [IDX_W-1:0] inner;
    logic [IDX_W-1:0] outer;
  } stubpair_t;

  typedef struct packed {             // tracklet parameters
    logic signed [15:0] k;            // dphi/dr, phi LSB per mm * 2^K_FRAC (= -rinv/2)
    logic signed [15:0] phi0;         // phi at r = 0
    logic signed [15:0] t;            // dz/dr (tan lambda) * 2^K_FRAC
    logic signed [Z_W-1:0] z0;        // mm
    logic [IDX_W-1:0] inner;          // seed stub indices
    logic [IDX_W-1:0] outer;
  } tpar_t;

  typedef struct packed {             // projection to a layer's nominal radius
    logic [IDX_W-1:0]      tidx;      // tracklet index
    logic [PHI_W-1:0]      phi;
    logic signed [Z_W-1:0] z;
    logic signed [15:0]    k;         // dphi/dr derivative
    logic signed [15:0]    t;         // dz/dr derivative
  } proj_t;

  typedef struct packed {             // projection in a VM
    logic [IDX_W-1:0]  pidx;          // address in the layer's projection memory
    logic signed [4:0] zbin;
    logic [3:0]        phif;
  } vmproj_t;

  typedef struct packed {             // candidate match from the MatchEngine
    logic [IDX_W-1:0] pidx;
    logic [IDX_W-1:0] sidx;
  } cmatch_t;

  typedef struct packed {             // full match, stored per tracklet
    logic [IDX_W-1:0]   sidx;
    logic signed [11:0] dphi;         // residual, phi LSB
    logic signed [11:0] dz;           // residual, mm
  } fmatch_t;

  typedef struct packed {             // fitted track
    logic signed [15:0] k;
    logic signed [15:0] phi0;
    logic signed [15:0] t;
    logic signed [Z_W-1:0] z0;
    logic [15:0]        chi2;
    logic [NPROJ-1:0]   hits;         // matched projection layers
    logic [IDX_W-1:0]   tidx;
    logic [IDX_W-1:0]   seed_in;
    logic [IDX_W-1:0]   seed_out;
    logic [NPROJ-1:0][IDX_W-1:0] sidx;
  } track_t;

  // ---------------- helpers ----------------
  function automatic logic [$clog2(NVM)-1:0] vm_of(input logic [PHI_W-1:0] phi);
    return phi[PHI_W-1 -: $clog2(NVM)];
  endfunction

  function automatic int iabs(input int v);
    return (v < 0) ? -v : v;
  endfunction

endpackage
