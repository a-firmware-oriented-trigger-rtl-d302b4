// dtam_lsq_fit -- least-squares straight-line fit of 3 or 4 hits, t0 known.
//
// With the collision time t0 and a laterality per hit, hit i lies at
// x_i = X_i*HALF_CELL_T + s_i*(t_i - t0) (drift counts, relative to the group
// apex wire) and at height y_i = layer index. The fit uses the exact
// least-squares sums over the n present hits:
//     K = n*Sxy - Sx*Sy,  Delta = n*Syy - Sy^2,
//     slope = K / Delta,   position at y = 1.5 (superlayer centre)
//           = Sx/n + slope*(1.5 - Sy/n),
//     n*Delta*chi2 = Delta*(n*Sxx - Sx^2) - K^2.
// All of it is integer arithmetic; the three outputs are rounded once at the
// end. The position is returned in the chamber frame by adding the apex wire
// position. `physical` is low if a present hit would need a drift time below
// -DRIFT_TOL or above TDRIFT_MAX + DRIFT_TOL.
// The paper specifies exact least-squares formulas once t0 is known; the
// reference height, units and the physical-solution window are this design's.
// Purely combinational.
module dtam_lsq_fit
  import dtam_pkg::*;
(
  input  logic [3:0] mask,        // layers holding a hit (3 or 4 set)
  input  xloc_t      xw   [4],    // wire position per layer, half cells
  input  tdc_t       t    [4],    // hit time per layer
  input  logic [3:0] lat,         // laterality per layer
  input  tdc_t       t0,
  input  apex_t      apex,        // apex wire of the group, chamber half cells
  output pos_t       pos,         // POS_FRAC fraction bits
  output slope_t     slope,       // SLOPE_FRAC fraction bits
  output chi2_t      chi2,        // units of 1/16 count^2, saturating
  output logic       physical,
  output logic       enough       // at least 3 hits
);

  always_comb begin
    longint n, sx, sy, sxx, sxy, syy, x, d, k, del, c2n, p, q;
    n = 0; sx = 0; sy = 0; sxx = 0; sxy = 0; syy = 0;
    x = 0; d = 0; p = 0; q = 0; c2n = 0;
    physical = 1'b1;
    for (int i = 0; i < NLAYERS; i++) begin
      if (mask[i]) begin
        d = longint'(t[i]) - longint'(t0);
        x = longint'(xw[i]) * longint'(HALF_CELL_T) + (lat[i] ? d : -d);
        if (d < -longint'(DRIFT_TOL) || d > longint'(TDRIFT_MAX) + longint'(DRIFT_TOL))
          physical = 1'b0;
        n   += 1;
        sx  += x;
        sy  += longint'(i);
        sxx += x * x;
        sxy += x * longint'(i);
        syy += longint'(i * i);
      end
    end
    enough = (n >= 3);
    k   = n * sxy - sx * sy;
    del = n * syy - sy * sy;
    if (!enough || del == 0) begin
      pos   = '0;
      slope = '0;
      chi2  = '1;
    end else begin
      // slope with SLOPE_FRAC fraction bits
      slope = slope_t'(div_round(k * (longint'(1) << SLOPE_FRAC), del));
      // position * 2^POS_FRAC = (2^P*Sx*Delta + 2^P*(1.5n - Sy)*K) / (n*Delta)
      p = (longint'(1) << POS_FRAC) * sx * del
        + (longint'(1) << (POS_FRAC - 1)) * (3 * n - 2 * sy) * k;
      q = div_round(p, n * del)
        + (longint'(apex) * longint'(HALF_CELL_T) << POS_FRAC);
      pos = pos_t'(q);
      // chi2 * 16
      c2n = del * (n * sxx - sx * sx) - k * k;
      if (c2n < 0) c2n = 0;
      c2n = div_round(16 * c2n, n * del);
      chi2 = (c2n > longint'(32'hFFFF_FFFF)) ? '1 : chi2_t'(c2n);
    end
  end

endmodule
