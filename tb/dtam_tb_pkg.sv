// dtam_tb_pkg -- reference geometry for the testbenches.
//
// Generates straight muon tracks through a 10-cell group and the drift times
// they leave, and recomputes collision time and fit results with real
// arithmetic, independently of the integer formulas of the RTL. A track is
// x(y) = xc + m*(y - 1.5) in drift counts relative to the apex wire, with y the
// layer index (0..3) of the superlayer. Layer l holds wires at half-cell
// positions -(3-l), -(3-l)+2, ..., (3-l); a layer is hit in the wire cell
// the track crosses, if that wire is part of the group.
package dtam_tb_pkg;
  import dtam_pkg::*;

  localparam real TH = real'(HALF_CELL_T);

  typedef struct {
    logic       hit  [4];
    int         xw   [4];   // half cells
    int         t    [4];   // rounded hit time
    real        drift[4];
    logic       lat  [4];
  } track_hits_t;

  function automatic real track_x(real xc, real m, real y);
    return xc + m * (y - 1.5);
  endfunction

  function automatic track_hits_t make_hits(real t0, real xc, real m);
    track_hits_t h;
    for (int l = 0; l < 4; l++) begin
      real x, best;
      int  bw;
      x = track_x(xc, m, real'(l));
      best = 1.0e9;
      bw = 0;
      for (int w = -(3 - l); w <= (3 - l); w += 2) begin
        real dd;
        dd = x - real'(w) * TH;
        if (dd < 0) dd = -dd;
        if (dd < best) begin best = dd; bw = w; end
      end
      h.hit[l]   = (best <= TH);
      h.xw[l]    = bw;
      h.drift[l] = best;
      h.t[l]     = int'($floor(t0 + best + 0.5));
      h.lat[l]   = (x >= real'(bw) * TH);
    end
    return h;
  endfunction

  // cell index of wire w in layer l of the group
  function automatic int cell_index(int l, int w);
    case (l)
      0: return (w + 3) / 2;
      1: return 4 + (w + 2) / 2;
      2: return 7 + (w + 1) / 2;
      default: return 9;
    endcase
  endfunction

  // Collision time making three points collinear, found from the signed
  // area of the triangle, which is linear in t0.
  function automatic real area(int l[3], int xw[3], int t[3], logic lat[3], real t0);
    real x[3];
    for (int i = 0; i < 3; i++)
      x[i] = real'(xw[i]) * TH + (lat[i] ? 1.0 : -1.0) * (real'(t[i]) - t0);
    return (x[1] - x[0]) * real'(l[2] - l[0]) - (x[2] - x[0]) * real'(l[1] - l[0]);
  endfunction

  function automatic bit ref_t0(int l[3], int xw[3], int t[3], logic lat[3], output real t0);
    real a0, a1;
    a0 = area(l, xw, t, lat, 0.0);
    a1 = area(l, xw, t, lat, 1000.0);
    if (a1 == a0) begin t0 = 0; return 0; end
    t0 = -a0 * 1000.0 / (a1 - a0);
    return 1;
  endfunction

  // Least-squares line through the present hits, position at y = 1.5.
  function automatic void ref_fit(logic mask[4], int xw[4], int t[4], logic lat[4],
                                  real t0, output real pos, output real slope,
                                  output real chi2);
    real n, ym, xm, syy, sxy;
    real x[4];
    n = 0; ym = 0; xm = 0;
    for (int l = 0; l < 4; l++) if (mask[l]) begin
      x[l] = real'(xw[l]) * TH + (lat[l] ? 1.0 : -1.0) * (real'(t[l]) - t0);
      n += 1; ym += l; xm += x[l];
    end
    ym /= n; xm /= n;
    syy = 0; sxy = 0;
    for (int l = 0; l < 4; l++) if (mask[l]) begin
      syy += (l - ym) * (l - ym);
      sxy += (l - ym) * (x[l] - xm);
    end
    slope = sxy / syy;
    pos = xm + slope * (1.5 - ym);
    chi2 = 0;
    for (int l = 0; l < 4; l++) if (mask[l]) begin
      real r;
      r = x[l] - (xm + slope * (l - ym));
      chi2 += r * r;
    end
  endfunction

  // Chamber frame: layer l, cell c has its wire at half cell 2c + (l even).
  // Returns the hit a track at position x (drift counts) leaves in layer l.
  function automatic bit chamber_hit(real t0, real x, int l, int ncell,
                                     output int c, output int t, output real drift);
    int par;
    real dd;
    par = (l % 2 == 0) ? 1 : 0;
    c = int'($floor((x / TH - real'(par)) / 2.0 + 0.5));
    dd = x - real'(2 * c + par) * TH;
    drift = (dd < 0) ? -dd : dd;
    t = int'($floor(t0 + drift + 0.5));
    return (c >= 0 && c < ncell && drift <= TH);
  endfunction

  function automatic real rabs(real v);
    return (v < 0) ? -v : v;
  endfunction

  // uniform real in [lo, hi)
  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * (real'($urandom) / 4294967296.0);
  endfunction

endpackage
