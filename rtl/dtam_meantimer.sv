// dtam_meantimer -- collision time from three hits of one superlayer.
//
// For three hits in layers la < lb < lc (vertical position = layer index), a
// laterality hypothesis places each hit at x_i = X_i*HALF_CELL_T +
// s_i*(t_i - t0), where X_i is the wire position in half cells and s_i = +1
// (hit right of the wire) or -1. A straight track makes the three points
// collinear: sum c_i x_i = 0 with c = (lc-lb, la-lc, lb-la). Because the c_i
// sum to zero the track slope and the group offset drop out, and the condition
// is linear in t0:
//     t0 = (HALF_CELL_T * sum c_i X_i + sum c_i s_i t_i) / D,  D = sum c_i s_i.
// D is always even, |D| is 2, 4 or 6; D = 0 (e.g. all hits on the same side)
// leaves t0 undetermined and the result is flagged invalid. The quotient is
// rounded to the nearest count.
// That t0 follows from three cells with the slope factored out is the paper's;
// the closed form, the fixed-point units and the rounding are this design's.
// Purely combinational.
module dtam_meantimer
  import dtam_pkg::*;
(
  input  logic [1:0] lay [3],   // layer index of each hit, lay[0]<lay[1]<lay[2]
  input  xloc_t      xw  [3],   // wire position, half cells
  input  tdc_t       t   [3],   // hit times
  input  logic       lat [3],   // 1 = hit right of its wire
  output tdc_t       t0,
  output logic       valid      // t0 determined and not negative
);

  always_comb begin
    int   c [3];
    longint num, den, q;
    c[0] = int'(lay[2]) - int'(lay[1]);
    c[1] = int'(lay[0]) - int'(lay[2]);
    c[2] = int'(lay[1]) - int'(lay[0]);
    num = 0;
    den = 0;
    for (int i = 0; i < 3; i++) begin
      num += longint'(c[i]) * longint'(xw[i]) * longint'(HALF_CELL_T);
      if (lat[i]) begin
        num += longint'(c[i]) * longint'(t[i]);
        den += longint'(c[i]);
      end else begin
        num -= longint'(c[i]) * longint'(t[i]);
        den -= longint'(c[i]);
      end
    end
    q = (den == 0) ? 0 : div_round(num, den);
    valid = (den != 0) && (q >= 0) && (q < (longint'(1) << TIME_W));
    t0    = valid ? tdc_t'(q) : '0;
  end

endmodule
