// hit_zipcode: computes the "zip-code" of one hit, the rectangle of cells of
// this device's grid that the switching network must deliver the hit to.
//
// The hit (x,y) on layer K is projected onto the virtual plane along a
// straight line from the interaction point, p = (x,y) * Z_VP / z_K, in fixed
// point. The cells to reach are those whose centre lies within route_cut(K)
// of p in u (and in v): the cut distance on the layer, CUT_NSIGMA * sigma,
// seen from the virtual plane, plus a small guard against rounding. The
// rectangle is clipped to the grid; a hit whose rectangle misses the grid
// leaves with valid = 0. On a layer that measures x only (AXIAL_ONLY) the v
// range is the whole grid.
//
// The paper says that a zip-code is associated with every possible hit and
// that the switch nodes route by it; it obtains the mapping from simulation.
// Computing it from the straight-line geometry instead is this design's
// choice. Purely combinational; the switching network registers the result.
module hit_zipcode
  import retina_pkg::*;
#(
  parameter int K        = 0,      // layer this lane carries
  parameter int NU       = 30,     // grid size in u
  parameter int NV       = 30,     // grid size in v
  parameter int U_ORIGIN = 1500,   // u of the centre of cell (0,*), LSB
  parameter int V_ORIGIN = 1500    // v of the centre of cell (*,0), LSB
) (
  input  hit_t        hit,
  output routed_hit_t rhit
);

  localparam longint MULT = longint'(proj_mult(K));             // 12 fraction bits
  localparam longint CUT  = longint'(route_cut(K));
  localparam longint INVP = (64'sd1 <<< 24) / longint'(CELL_PITCH) + 1;  // 24 fraction bits, rounded up

  // floor(t / CELL_PITCH) for the magnitudes that occur here
  function automatic longint cell_floor(longint t);
    return (t * INVP) >>> 24;
  endfunction

  // lo/hi cell index of a window [p - CUT, p + CUT] on an axis of n cells
  function automatic logic [2*IDX_W:0] window(longint p, longint origin, int n);
    longint lo, hi;
    logic   hit_grid;
    lo = cell_floor(p - CUT - origin) + 1;
    hi = cell_floor(p + CUT - origin);
    hit_grid = (hi >= 0) && (lo <= (longint'(n) - 1)) && (lo <= hi);
    if (lo < 0)                  lo = 0;
    if (hi > (longint'(n) - 1))    hi = (longint'(n) - 1);
    return {hit_grid, idx_t'(lo), idx_t'(hi)};
  endfunction

  longint          pu, pv;
  logic [2*IDX_W:0] wu, wv;

  always_comb begin
    pu = (longint'(hit.x) * MULT) >>> 12;
    pv = (longint'(hit.y) * MULT) >>> 12;
    wu = window(pu, longint'(U_ORIGIN), NU);
    if (AXIAL_ONLY[K]) wv = {1'b1, idx_t'(0), idx_t'(NV - 1)};
    else               wv = window(pv, longint'(V_ORIGIN), NV);

    rhit.h       = hit;
    rhit.h.valid = hit.valid && wu[2*IDX_W] && wv[2*IDX_W];
    rhit.z.u_lo  = wu[2*IDX_W-1:IDX_W];
    rhit.z.u_hi  = wu[IDX_W-1:0];
    rhit.z.v_lo  = wv[2*IDX_W-1:IDX_W];
    rhit.z.v_hi  = wv[IDX_W-1:0];
  end

endmodule
