// retina_pkg: types, geometry and arithmetic shared by the artificial-retina
// track processor.
//
// The retina discretises the (u,v) plane of track parameters into a grid of
// cells. A cell's centre (u,v) is a straight track from the nominal
// interaction point that crosses a "virtual plane" at z = Z_VP_MM at (u,v).
// It crosses detector layer k, at z = LAYER_Z_MM[k], in the point
// (u,v)*z_k/Z_VP: the cell's receptor on that layer. Each hit excites a cell
// with weight exp(-s^2/(2 sigma^2)), s being the distance on the layer
// between the hit and the receptor; the weights are read from a table that
// weight_of() computes at elaboration.
//
// Numbers that follow the paper: 10 layers (the last eight VELO pixel layers
// and the two axial UT layers), one sigma for all layers, the Gaussian
// weight. Everything else is this design's choice: the coordinate unit (one
// LSB = 10 um), the layer z positions, the virtual-plane position, the cell
// pitch, sigma's value, the table size and the word widths. The two UT layers
// are microstrip layers that measure x only, so on them the distance is taken
// in x only (AXIAL_ONLY).
package retina_pkg;

  // ---------------------------------------------------------------- geometry
  localparam int N_LAYERS = 10;                   // 8 VELO + 2 UT axial layers
  localparam int COORD_W  = 18;                   // signed, 1 LSB = 10 um
  localparam int Z_VP_MM  = 1000;                 // virtual plane position
  localparam int LAYER_Z_MM [N_LAYERS] =
    '{300, 350, 400, 450, 500, 550, 600, 650, 2350, 2650};
  // bit k set: layer k measures x only (UT axial microstrip layers)
  localparam logic [N_LAYERS-1:0] AXIAL_ONLY = 10'b11_0000_0000;

  // ------------------------------------------------------ retina parameters
  localparam int CELL_PITCH = 300;                // cell pitch on the virtual plane, LSB
  localparam int SIGMA      = 100;                // sigma on the layer, LSB (1 mm)
  localparam int CUT_NSIGMA = 3;                  // hits further than this are not routed
  localparam int IDX_W      = 8;                  // cell index width (grids up to 256x256)
  localparam int W_W        = 8;                  // weight width
  localparam int W_MAX      = 255;                // weight of a hit on the receptor
  localparam int R_W        = 16;                 // cell response width (saturating)
  localparam int LUT_BITS   = 8;                  // weight table has 2**LUT_BITS entries
  localparam int S2_SHIFT   = 9;                  // table index = s^2 >> S2_SHIFT
  localparam int D_W        = 9;                  // |dx|,|dy| below 2**D_W LSB are looked up
  localparam int FRAC       = 4;                  // fraction bits of the interpolated offset

  // ------------------------------------------------------------------ types
  typedef logic signed [COORD_W-1:0] coord_t;
  typedef logic [IDX_W-1:0]          idx_t;
  typedef logic [R_W-1:0]            resp_t;

  // one hit on one layer (the layer is the lane it travels on)
  typedef struct packed {
    logic   valid;
    coord_t x;
    coord_t y;
  } hit_t;

  typedef hit_t [N_LAYERS-1:0] hit_bus_t;

  // "zip-code" of a hit: the rectangle of cells it is delivered to
  typedef struct packed {
    idx_t u_lo;
    idx_t u_hi;
    idx_t v_lo;
    idx_t v_hi;
  } zip_t;

  typedef struct packed {
    hit_t h;
    zip_t z;
  } routed_hit_t;

  // word travelling through the switching network
  typedef struct packed {
    routed_hit_t [N_LAYERS-1:0] lanes;
    logic                       evt_last;
  } switch_word_t;

  // what one engine receives each clock cycle
  typedef struct packed {
    hit_bus_t hits;
    logic     evt_last;
  } cell_feed_t;

  // a reconstructed track, in virtual-plane units (LSB)
  typedef struct packed {
    logic   valid;
    coord_t u;
    coord_t v;
    resp_t  r;
  } track_t;

  // -------------------------------------------------------------- functions
  // weight table entry: W_MAX * exp(-(idx << S2_SHIFT) / (2 sigma^2)), rounded
  function automatic int weight_of(int idx);
    real s2;
    s2 = real'(idx) * real'(2 ** S2_SHIFT);
    return int'($floor(real'(W_MAX) * $exp(-s2 / (2.0 * real'(SIGMA) * real'(SIGMA))) + 0.5));
  endfunction

  // receptor coordinate on layer k of a cell whose centre is at c (virtual plane)
  function automatic int receptor_of(int c, int k);
    longint p;
    p = longint'(c) * longint'(LAYER_Z_MM[k]);
    // round to nearest, symmetric about zero
    if (p >= 0) return int'((p + longint'(Z_VP_MM / 2)) / longint'(Z_VP_MM));
    else        return -int'((-p + longint'(Z_VP_MM / 2)) / longint'(Z_VP_MM));
  endfunction

  // projection factor layer k -> virtual plane, fixed point with 12 fraction bits
  function automatic int proj_mult(int k);
    return (Z_VP_MM * 4096 + LAYER_Z_MM[k] / 2) / LAYER_Z_MM[k];
  endfunction

  // routing half-window on the virtual plane for layer k, LSB: the cut
  // distance on the layer scaled to the virtual plane, plus a guard of
  // one eighth of a pitch against rounding
  function automatic int route_cut(int k);
    return (CUT_NSIGMA * SIGMA * Z_VP_MM + LAYER_Z_MM[k] - 1) / LAYER_Z_MM[k] + CELL_PITCH / 8;
  endfunction

  function automatic int clog2_min1(int n);
    return (n <= 1) ? 0 : $clog2(n);
  endfunction

endpackage
