// dtam_pkg -- shared constants and types of the drift-tube trigger primitive
// generator ("analytical method").
//
// Units used throughout the design:
//   * Time: TDC counts of 25/32 ns (32 counts per 25 ns bunch crossing),
//     counted from the start of the LHC orbit. The orbit has 3564 bunch
//     crossings, so 17 bits hold any hit time.
//   * Position: "drift counts", the distance an electron drifts in one TDC
//     count (54 um/ns * 25/32 ns = 42.19 um). A wire position is an integer
//     number of half cells; one half cell (21 mm) is HALF_CELL_T counts.
//     Positions carry POS_FRAC fraction bits.
//   * Layer height h (13 mm) is the unit of the vertical coordinate. Slopes are
//     drift counts per layer height with SLOPE_FRAC fraction bits; the
//     physical tan(phi) is slope * 42.19 um / 13 mm.
// The cell size (42 x 13 mm), drift velocity (54 um/ns), maximum drift time
// (~390 ns), four staggered layers per superlayer, the 10-cell groups and the
// +/-25 ns correlation window follow the paper. The TDC count size, bit
// widths, drift tolerance and the SL1-SL3 distance are this design's choices.
package dtam_pkg;

  localparam int unsigned TIME_W      = 17;   // hit time since orbit start
  localparam int unsigned BX_W        = 12;   // bunch crossing number
  localparam int unsigned CNT_PER_BX  = 32;   // TDC counts per 25 ns
  // 21 mm / (54 um/ns) / (25/32 ns) = 497.8 counts for half a cell
  localparam int unsigned HALF_CELL_T = 498;
  // maximum drift time ~390 ns = 499 counts, plus a tolerance for resolution
  localparam int unsigned TDRIFT_MAX  = 499;
  localparam int unsigned DRIFT_TOL   = 16;

  localparam int unsigned NLAYERS     = 4;    // layers per superlayer
  localparam int unsigned NCELLS      = 10;   // cells in one group
  localparam int unsigned NPATHS      = 8;    // 4-cell patterns in a group

  localparam int unsigned POS_W       = 24;
  localparam int unsigned POS_FRAC    = 2;
  localparam int unsigned SLOPE_W     = 18;
  localparam int unsigned SLOPE_FRAC  = 6;
  localparam int unsigned CHI2_W      = 32;   // chi2 in 1/16 count^2
  localparam int unsigned APEX_W      = 10;   // group apex, signed half cells

  typedef logic [TIME_W-1:0]         tdc_t;
  typedef logic signed [3:0]         xloc_t;  // half cells from the apex wire
  typedef logic signed [APEX_W-1:0]  apex_t;
  typedef logic signed [POS_W-1:0]   pos_t;
  typedef logic signed [SLOPE_W-1:0] slope_t;
  typedef logic [CHI2_W-1:0]         chi2_t;

  // One cell of a group: at most one hit per cell and event.
  typedef struct packed {
    logic valid;
    tdc_t t;
  } hit_t;

  // A single-superlayer segment candidate.
  typedef struct packed {
    tdc_t          t0;     // collision time
    logic [BX_W-1:0] bx;   // bunch crossing of t0
    pos_t          pos;    // position at the superlayer centre, chamber frame
    slope_t        slope;
    chi2_t         chi2;
    logic [2:0]    nhits;  // 3 or 4
    logic [3:0]    lat;    // laterality per layer, 1 = hit right of its wire
  } cand_t;

  typedef enum logic [1:0] {
    TP_SL1  = 2'd0,   // uncorrelated SL1 candidate
    TP_SL3  = 2'd1,   // uncorrelated SL3 candidate
    TP_CORR = 2'd2    // correlated SL1 + SL3 primitive
  } tp_kind_e;

  // Trigger primitive leaving the generator.
  typedef struct packed {
    tp_kind_e      kind;
    tdc_t          t0;
    logic [BX_W-1:0] bx;
    pos_t          pos;
    slope_t        slope;
    logic [2:0]    nhits_sl1;  // 0 when SL1 does not contribute
    logic [2:0]    nhits_sl3;  // 0 when SL3 does not contribute
  } tp_t;

  // Bunch crossing nearest to a time in TDC counts.
  function automatic logic [BX_W-1:0] time_to_bx(tdc_t t);
    logic [TIME_W:0] r;
    r = {1'b0, t} + (TIME_W+1)'(CNT_PER_BX / 2);
    return BX_W'(r >> $clog2(CNT_PER_BX));
  endfunction

  // Signed division rounded to nearest, halves away from zero.
  function automatic longint div_round(longint num, longint den);
    longint an, ad, q;
    an = (num < 0) ? -num : num;
    ad = (den < 0) ? -den : den;
    q  = (2 * an + ad) / (2 * ad);
    return ((num < 0) != (den < 0)) ? -q : q;
  endfunction

endpackage
