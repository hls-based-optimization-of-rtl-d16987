// tau_pkg: geometry constants and data types shared by the tau-trigger
// front end (event buffering, top-16 seed sorting, neighbourhood
// preselection).
//
// An event is 36 calorimeter/tracker regions laid out as a 9-row by
// 4-column grid (region id = 4*row + col). Rows wrap around (the grid is
// an unfolded torus in phi), columns do not. Every region carries 22
// charged tracks, 13 photon tracks and 10 neutral tracks. The first 4
// charged tracks of each region are the region's seed candidates, so an
// event has 144 candidates of which the 16 with the largest pT become
// seeds. These numbers, the 16-bit pT and the 8-bit candidate index are
// the source publication's. The other track fields (eta, phi, aux) and
// their widths are this design's choice: the source only says a
// candidate is a structure with 6 members.
package tau_pkg;

  localparam int unsigned N_ROWS           = 9;
  localparam int unsigned N_COLS           = 4;
  localparam int unsigned N_REGIONS        = N_ROWS * N_COLS;   // 36
  localparam int unsigned N_CHARGED        = 22;
  localparam int unsigned N_PHOTON         = 13;
  localparam int unsigned N_NEUTRAL        = 10;
  localparam int unsigned SEEDS_PER_REGION = 4;
  localparam int unsigned N_CANDIDATES     = N_REGIONS * SEEDS_PER_REGION; // 144
  localparam int unsigned N_SEEDS          = 16;
  localparam int unsigned N_NEIGHBOURS     = 4;   // regions per seed neighbourhood

  localparam int unsigned PT_W     = 16;
  localparam int unsigned IDX_W    = 8;            // candidate index = 4*region + slot
  localparam int unsigned REGION_W = 6;

  // Track payload. Only pt takes part in sorting. eta and phi are the
  // track's signed position inside its region; their signs choose the
  // neighbouring row and column (see region_locator).
  typedef struct packed {
    logic [PT_W-1:0]   pt;
    logic signed [7:0] eta;
    logic signed [7:0] phi;
    logic [15:0]       aux;   // remaining members, carried but not interpreted
  } track_t;

  // All tracks of one region.
  typedef struct packed {
    track_t [N_CHARGED-1:0] charged;
    track_t [N_PHOTON-1:0]  photon;
    track_t [N_NEUTRAL-1:0] neutral;
  } region_t;

  // Seed candidate: the track plus its 8-bit index (4*region + slot).
  typedef struct packed {
    logic [IDX_W-1:0] idx;
    track_t           trk;
  } seed_t;

  // Neighbourhood of a seed in the row/column representation: one even
  // and one odd row (numbered 0..3 inside their parity class, rows
  // 0,2,4,6 and 1,3,5,7), whether the last grid row (row 8) replaces one
  // of them and, if so, which, and one even and one odd column
  // (columns 0,2 and 1,3, numbered 0..1).
  typedef struct packed {
    logic [1:0] even_row;
    logic [1:0] odd_row;
    logic       last_used;
    logic       last_is_odd;
    logic       even_col;
    logic       odd_col;
  } nbhd_t;

  function automatic logic [REGION_W-1:0] idx_region(input logic [IDX_W-1:0] idx);
    return REGION_W'(idx >> 2);
  endfunction

endpackage
