// retina_pkg -- shared constants, types and geometry functions of the
// artificial-retina track finder.
//
// Units used everywhere in the datapath:
//   x  : strip coordinate in half-strip units (91.5 um), 10 bits, 0..1022.
//        A cluster spanning strips a..b has x = a + b (its centre, doubled).
//   z  : plane position in units of 0.1 mm, 10 bits. Plane k sits at
//        Z_FIRST + k*Z_STEP (0.8 cm spacing, as in the prototype telescope).
//   q  : "quarter" units, x scaled by 4 (two fractional bits); track
//        intercepts and cluster-to-receptor distances use them.
// The cell grid spans (x-, x+) with the same step Delta in both directions;
// DXP_Q = 70 quarter units makes Delta = 1.601 mm, the grid step the
// prototype uses. Plane count, strip count, the 2048 cells and the
// 1024 x 16-bit look-up tables follow the prototype; the grid shape
// (32 x- rows by 64 x+ columns), the units and the widths are this design's
// own choices.
package retina_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned N_LAYERS   = 8;     // detector planes
  localparam int unsigned N_STRIPS   = 512;   // strips per plane
  localparam int unsigned N_LANES    = 16;    // analog readout channels per plane
  localparam int unsigned LANE_STRIPS = N_STRIPS / N_LANES;  // 32 strips per channel
  localparam int unsigned N_BOARDS   = 4;     // DAQ boards, two planes each
  localparam int unsigned N_REGIONS  = 4;     // FPGAs of the retina board
  localparam int unsigned N_GROUPS   = 16;    // second-level switch outputs per region
  localparam int unsigned N_XM       = 32;    // x- rows of the cell grid
  localparam int unsigned N_XP       = 64;    // x+ columns of the cell grid
  localparam int unsigned REG_XP     = N_XP / N_REGIONS;   // 16 columns per region
  localparam int unsigned ENG_PER_ROW = REG_XP / 2;        // 8 double engines per row
  localparam int unsigned N_ENGINES  = N_XM * ENG_PER_ROW; // 256 double engines per region
  localparam int unsigned N_TRK_UNITS = 10;   // centre-of-mass units per region

  localparam int unsigned X_W   = 10;
  localparam int unsigned Z_W   = 10;
  localparam int unsigned L_W   = 3;
  localparam int unsigned ADC_W = 12;
  localparam int unsigned LUT_W = 16;         // word width of every LUT
  localparam int unsigned D_W   = 10;         // distance address of LUT exp (1024 words)
  localparam int unsigned WGT_W = 24;         // accumulated weight
  localparam int unsigned POS_W = 16;         // track parameter, cell units, Q8
  localparam int unsigned FRAC  = 8;
  localparam int unsigned EVT_W = 8;

  // -------------------------------------------------------------- geometry
  localparam int Z_FIRST = 40;
  localparam int Z_STEP  = 80;
  localparam int DXP_Q   = 70;                // grid step Delta in quarter units
  localparam real SIGMA_Q = 70.0;             // receptor width sigma = Delta
  // x+ centre of column 0, chosen so that the 64 columns are centred on the
  // 0..1022 strip range: (1022*4 - 63*70)/2
  localparam int XP0_Q   = (1022*4 - 63*DXP_Q) / 2;

  function automatic int z_of_layer(int k);
    return Z_FIRST + k * Z_STEP;
  endfunction

  // z+ and z- of the first and last planes: z+ = (zf+zl)/2, z- = (zf-zl)/2
  localparam real Z_PLUS  = real'(Z_FIRST + Z_FIRST + (N_LAYERS-1)*Z_STEP) / 2.0;
  localparam real Z_MINUS = -real'((N_LAYERS-1)*Z_STEP) / 2.0;

  // x- of row i, quarter units (rows symmetric around zero)
  function automatic real xm_q(int i);
    return (real'(i) - real'(N_XM-1) / 2.0) * real'(DXP_Q);
  endfunction

  // x+ of column j, quarter units
  function automatic int xp_q(int j);
    return XP0_Q + j * DXP_Q;
  endfunction

  // slope term x-*(z - z+)/z- of row i at plane position z, rounded
  function automatic int slope_q(int i, int z);
    real v;
    v = xm_q(i) * (real'(z) - Z_PLUS) / Z_MINUS;
    return (v >= 0.0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5));
  endfunction

  // intercept of the ideal track of cell (i,j) with the plane at z (LUT s)
  function automatic int intercept_q(int i, int j, int z);
    return xp_q(j) + slope_q(i, z);
  endfunction

  // receptor response for distance d (quarter units): Gaussian with sigma,
  // cut to zero at 2 sigma (LUT exp)
  function automatic logic [LUT_W-1:0] exp_weight(int d);
    real s;
    s = real'(d) / SIGMA_Q;
    if (real'(d) >= 2.0 * SIGMA_Q) return '0;
    return LUT_W'(int'($floor(65535.0 * $exp(-0.5 * s * s) + 0.5)));
  endfunction

  // natural log scaled by 4096, for 10-bit arguments (log LUT)
  function automatic logic [LUT_W-1:0] log_weight(int w);
    if (w <= 1) return '0;
    return LUT_W'(int'($floor(4096.0 * $ln(real'(w)) + 0.5)));
  endfunction

  // A row i of x- cells has a non-zero response to cluster x on plane z
  // when x - slope lies within 2 sigma of the x+ span [jlo, jhi]. Used to
  // fill the routing LUTs of both switch levels.
  localparam int ROUTE_MARGIN_Q = 2 * DXP_Q + 2;
  function automatic bit row_sees(int i, int jlo, int jhi, int x, int z);
    int p;
    p = 4 * x - slope_q(i, z);
    return (p > xp_q(jlo) - ROUTE_MARGIN_Q) && (p < xp_q(jhi) + ROUTE_MARGIN_Q);
  endfunction

  // ----------------------------------------------------------------- types
  // Token carried by the switch network: a cluster or an end-of-event mark.
  typedef struct packed {
    logic             eoe;     // end of event (x, z, layer unused)
    logic [L_W-1:0]   layer;
    logic [Z_W-1:0]   z;
    logic [X_W-1:0]   x;
  } token_t;

  // A local maximum and the four weights around it.
  typedef struct packed {
    logic [EVT_W-1:0] evt;
    logic [4:0]       xm_idx;
    logic [5:0]       xp_idx;
    logic [WGT_W-1:0] w0;
    logic [WGT_W-1:0] wm_lo;   // x- row below
    logic [WGT_W-1:0] wm_hi;   // x- row above
    logic [WGT_W-1:0] wp_lo;   // x+ column left
    logic [WGT_W-1:0] wp_hi;   // x+ column right
  } peak_t;

  // Reconstructed track: x- and x+ in cell units with FRAC fractional bits.
  typedef struct packed {
    logic [EVT_W-1:0]        evt;
    logic signed [POS_W-1:0] xm;
    logic signed [POS_W-1:0] xp;
    logic [WGT_W-1:0]        w0;
  } track_t;

  typedef enum logic {INTERP_COM = 1'b0, INTERP_GAUSS = 1'b1} interp_e;

endpackage
