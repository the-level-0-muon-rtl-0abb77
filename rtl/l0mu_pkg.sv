// l0mu_pkg -- constants and types shared by the Level-0 muon trigger processor.
//
// The tower geometry follows the pad counts of one tower (48 pads in M1, 96 in
// M2 and M3, 24 in M4 and M5) and the x-granularity ratios between stations
// (M2/M3 pads half as wide as M1 pads, M4/M5 pads twice as wide).  The number of
// pad rows per tower (4) is this design's choice: the pad counts fix only the
// product rows x columns.  With 4 rows a tower holds 24 M3 columns, 12 M1
// columns and 6 M4/M5 columns.
//
// Neighbour extensions (how many pads beyond the tower edge each station sees)
// are set by the largest field of interest the design supports; these maxima
// are this design's own choice.
//
// Link words: every optical link carries one 32-bit word per bunch crossing.
// The 4 most significant bits carry the low bits of the bunch crossing
// identifier (BCID) of the crossing, the 28 others carry hits.  That split is
// an assumption of this design.
package l0mu_pkg;

  // ---------------------------------------------------------------- timing
  localparam int unsigned BX_PER_ORBIT = 3564;   // BCID runs 0..3563
  localparam int unsigned BCID_W       = 12;

  // ---------------------------------------------------------------- links
  localparam int unsigned LINK_W     = 32;       // word per crossing per link
  localparam int unsigned LINK_BC_W  = 4;        // BCID LSBs carried in a word
  localparam int unsigned LINK_HIT_W = LINK_W - LINK_BC_W;  // 28 hit bits
  localparam int unsigned N_LINKS    = 8;        // optical links per PU

  // Link allocation inside a PU (two links per station for M1..M3).
  localparam int unsigned LNK_M1A = 0, LNK_M1B = 1, LNK_M2 = 2, LNK_M2B = 3,
                          LNK_M3  = 4, LNK_M3B = 5, LNK_M4 = 6, LNK_M5  = 7;

  // ---------------------------------------------------------------- tower
  localparam int unsigned NY   = 4;              // pad rows per tower
  localparam int unsigned NX3  = 24;             // M2/M3 pad columns
  localparam int unsigned NX1  = 12;             // M1 pad columns
  localparam int unsigned NX45 = 6;              // M4/M5 pad columns
  localparam int unsigned N_M3 = NY * NX3;       // 96 M3 pads = 96 algorithms

  // largest fields of interest (half widths, in pads of the station)
  localparam int unsigned FOI1_MAX  = 3;
  localparam int unsigned FOI2_MAX  = 5;
  localparam int unsigned FOI45_MAX = 2;
  localparam int unsigned M1_GAIN   = 1;         // M1 pads per M2 pad of offset

  // pads seen beyond each side of the tower
  localparam int unsigned EXT_M2 = FOI2_MAX;
  localparam int unsigned EXT_M1 = FOI2_MAX * M1_GAIN + FOI1_MAX;  // 8
  localparam int unsigned EXT_45 = FOI45_MAX;
  localparam int unsigned W1E  = NX1 + 2 * EXT_M1;    // 28
  localparam int unsigned W2E  = NX3 + 2 * EXT_M2;    // 34
  localparam int unsigned W45E = NX45 + 2 * EXT_45;   // 10

  // ---------------------------------------------------------------- tracks
  localparam int unsigned M3A_W = 7;             // 0..95
  localparam int unsigned D2_W  = 4;             // M2 offset, -5..+5
  localparam int unsigned D1_W  = 3;             // M1 offset, -3..+3
  localparam int unsigned PT_W  = 7;             // pT magnitude
  localparam int unsigned LUT_AW = 12;           // {x3[4:0], d2, d1}

  typedef struct packed {
    logic                    valid;              // muon track flagged
    logic                    m1_found;           // a hit was found in M1 FOI
    logic [M3A_W-1:0]        m3;                 // M3 pad: row*NX3 + column
    logic signed [D2_W-1:0]  d2;                 // M2 pad - M3 pad (M2 pads)
    logic signed [D1_W-1:0]  d1;                 // M1 pad - extrapolation
  } track_t;

  typedef struct packed {
    logic                    valid;
    logic [1:0]              pu;                 // PU of the board
    logic [M3A_W-1:0]        m3;
    logic signed [D2_W-1:0]  d2;
    logic signed [D1_W-1:0]  d1;
    logic                    charge;
    logic [PT_W-1:0]         pt;
  } cand_t;                                      // 25 bits

  // ---------------------------------------------------------------- neighbours
  typedef struct packed {                        // columns on one x side
    logic [NY-1:0][EXT_M1-1:0] m1;
    logic [NY-1:0][EXT_M2-1:0] m2;
    logic [NY-1:0][EXT_45-1:0] m4;
    logic [NY-1:0][EXT_45-1:0] m5;
  } nb_side_t;                                   // 68 bits

  typedef struct packed {                        // one M4/M5 row, y side
    logic [NX45-1:0] m4;
    logic [NX45-1:0] m5;
  } nb_row_t;                                    // 12 bits

  typedef struct packed {                        // M4/M5 corner, diagonal
    logic [EXT_45-1:0] m4;
    logic [EXT_45-1:0] m5;
  } nb_corner_t;                                 // 4 bits

  typedef struct packed {
    nb_side_t   left, right;
    nb_row_t    top, bottom;
    nb_corner_t tl, tr, bl, br;
  } nb_t;                                        // 176 bits

  // ---------------------------------------------------------------- readout
  localparam int unsigned RO_W    = 16;          // derandomizer word
  localparam int unsigned PU_L0_W = 532;         // PU L0 buffer width
  localparam int unsigned PU_EV_W = PU_L0_W + BCID_W;      // 544
  localparam int unsigned BCSU_EV_W = 352;
  localparam int unsigned CU_EV_W   = 704;
  localparam int unsigned SU_EV_W   = 720;

  typedef struct packed {
    logic            valid;
    logic            last;                       // last word of an event
    logic [RO_W-1:0] data;
  } ro_word_t;

  // ---------------------------------------------------------------- ECS
  // configuration held by the ECS registers of a processing unit
  typedef struct packed {
    logic             test_mode;                 // injection buffers drive the core
    logic [3:0]       align_delay;               // crossings of time alignment
    logic [6:0]       l0_latency;                // L0 buffer depth in use
    logic [3:0]       foi_m2;
    logic [1:0]       foi_m1;
    logic [1:0]       foi_m4;
    logic [1:0]       foi_m5;
    logic [1:0]       nb_mode_l;                 // formatting towards left PU
    logic [1:0]       nb_mode_r;                 // formatting towards right PU
  } pu_cfg_t;

  // neighbour formatting modes
  localparam logic [1:0] NBF_SAME   = 2'd0;      // same granularity
  localparam logic [1:0] NBF_COARSE = 2'd1;      // receiver pads twice as wide
  localparam logic [1:0] NBF_FINE   = 2'd2;      // receiver pads half as wide

  // board-to-controller link words
  function automatic logic [LINK_W-1:0] pack_word_a(input logic [BCID_W-1:0] bcid,
                                                    input cand_t c0, input cand_t c1);
    return {bcid[3:0], c1.pt, c1.m3, c0.pt, c0.m3};
  endfunction

  function automatic logic [LINK_W-1:0] pack_word_b(input logic [BCID_W-1:0] bcid,
                                                    input cand_t c0, input cand_t c1);
    return {bcid[3:0], 2'b00, c1.valid, c0.valid,
            c1.pu, c1.d2, c1.d1, c1.charge,
            c0.pu, c0.d2, c0.d1, c0.charge, 4'b0000};
  endfunction

  function automatic logic [BCID_W-1:0] bcid_sub(input logic [BCID_W-1:0] b,
                                                 input int unsigned d);
    int v;
    v = int'(b) - int'(d % BX_PER_ORBIT);
    if (v < 0) v += BX_PER_ORBIT;
    return BCID_W'(v);
  endfunction

endpackage
