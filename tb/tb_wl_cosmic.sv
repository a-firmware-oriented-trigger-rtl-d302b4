// tb_wl_cosmic -- cosmic-ray test with partly instrumented superlayers.
//
// Reproduces the layout of the first test with a spare chamber: only the
// front-end signals of cells 1-4 of SL1 and of cells 17-20 of SL1 and SL3
// reach the generator; all other inputs stay silent. Cosmic muons arrive at
// random times (not aligned to any bunch crossing) with angles up to 35
// degrees and cross either cells 1-4 or cells 17-20 of SL1. Hits are smeared
// by a 250 um single-hit resolution.
// Checks, for the full-size generator at default parameters:
//   * a muon leaving 4 hits in instrumented SL1 cells gives a primitive
//     with its time within 16 counts (12.5 ns) and its SL1 position within
//     one half cell;
//   * muons through cells 1-4 give only SL1 primitives (SL3 is blind there);
//   * muons leaving 4 hits in the instrumented cells of both superlayers
//     give a correlated primitive with the right time and slope.
module tb_wl_cosmic;
  import dtam_pkg::*;
  import dtam_tb_pkg::*;

  localparam int  NCELL = 60;
  localparam real DSL = 235000.0 / 13000.0;
  localparam real HIT_SIGMA_UM = 250.0;
  localparam real UM_PER_COUNT = 54.0 * 25.0 / 32.0;
  localparam real M_PER_TAN = 13000.0 / UM_PER_COUNT;      // counts/layer per unit tan

  logic  clk = 0, rst_n = 0, start = 0;
  hit_t  sl1_hits [NLAYERS][NCELL];
  hit_t  sl3_hits [NLAYERS][NCELL];
  logic  busy, tp_valid, done;
  tp_t   tp;
  logic [15:0] dropped;

  dtam_tpg dut (.clk, .rst_n, .start, .sl1_hits, .sl3_hits,
                .busy, .tp_valid, .tp, .done, .dropped);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(1, 1000000))) / 1000001.0;
    u2 = (real'($urandom_range(0, 1000000))) / 1000001.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307 * u2);
  endfunction

  // cells wired to the phase-2 chain (0-based): 0..3 in SL1, 16..19 in both
  function automatic bit instrumented(bit sl3, int c);
    return (c >= 16 && c <= 19) || (!sl3 && c >= 0 && c <= 3);
  endfunction

  task automatic fill(bit sl3, real t0, real x0, real m, real yc,
                      output hit_t h [NLAYERS][NCELL], output int nhit);
    foreach (h[l, c]) h[l][c] = '0;
    nhit = 0;
    for (int l = 0; l < 4; l++) begin
      int c, t;
      real d, ts;
      if (chamber_hit(t0, x0 + m * (yc + real'(l) - 1.5), l, NCELL, c, t, d)
          && instrumented(sl3, c)) begin
        ts = t0 + d + gauss() * HIT_SIGMA_UM / UM_PER_COUNT;
        if (ts < t0) ts = t0;
        h[l][c].valid = 1'b1;
        h[l][c].t = tdc_t'(int'($floor(ts + 0.5)));
        nhit++;
      end
    end
  endtask

  initial begin
    int n_a4, ok_a4, n_b4, ok_b4, n_bb, ok_bb, n_a, bad_a, n_tp;
    n_a4 = 0; ok_a4 = 0; n_b4 = 0; ok_b4 = 0; n_bb = 0; ok_bb = 0;
    n_a = 0; bad_a = 0; n_tp = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int it = 0; it < 400; it++) begin
      real t0, x0, m;
      int h1, h3, cyc;
      bit region_a, got_sl1, got_corr, wrong_sl;
      region_a = (it % 2 == 0);
      t0 = urand(2000.0, 120000.0);                 // asynchronous arrival
      x0 = (region_a ? urand(0.0, 8.0) : urand(32.0, 40.0)) * TH;
      m  = urand(-0.7, 0.7) * M_PER_TAN;
      fill(1'b0, t0, x0, m, 0.0, sl1_hits, h1);
      fill(1'b1, t0, x0, m, DSL, sl3_hits, h3);
      got_sl1 = 0; got_corr = 0; wrong_sl = 0;
      start = 1;
      @(posedge clk); #1;
      start = 0;
      cyc = 0;
      while (!done && cyc < 100000) begin
        @(posedge clk); #1;
        cyc++;
        if (tp_valid) begin
          real dt, dpos, dslope;
          n_tp++;
          dt = real'(tp.t0) - t0;
          if (tp.kind == TP_CORR) begin
            dpos   = real'(tp.pos) / 4.0 - (x0 + m * DSL / 2.0);
            dslope = real'(tp.slope) / 64.0 - m;
            if (rabs(dt) <= 16.0 && rabs(dpos) <= TH && rabs(dslope) <= 8.0)
              got_corr = 1;
            // the SL1 side of a correlation also counts as an SL1 primitive
            if (rabs(dt) <= 16.0) got_sl1 = 1;
          end else if (tp.kind == TP_SL1) begin
            dpos = real'(tp.pos) / 4.0 - x0;
            if (rabs(dt) <= 16.0 && rabs(dpos) <= TH) got_sl1 = 1;
          end
          if (region_a && tp.kind != TP_SL1) wrong_sl = 1;
        end
      end
      check(done, "done");
      if (region_a) begin
        n_a++;
        if (wrong_sl) bad_a++;
        if (h1 == 4) begin n_a4++; if (got_sl1) ok_a4++; end
      end else begin
        if (h1 == 4) begin n_b4++; if (got_sl1) ok_b4++; end
        if (h1 == 4 && h3 == 4) begin n_bb++; if (got_corr) ok_bb++; end
      end
      @(posedge clk); #1;
    end
    $display("primitives sent: %0d", n_tp);
    $display("cells 1-4  : %0d/%0d muons with 4 SL1 hits triggered, %0d of %0d events with a non-SL1 primitive",
             ok_a4, n_a4, bad_a, n_a);
    $display("cells 17-20: %0d/%0d muons with 4 SL1 hits triggered", ok_b4, n_b4);
    $display("cells 17-20: %0d/%0d muons with 4+4 hits correlated", ok_bb, n_bb);
    check(n_a4 > 50 && n_b4 > 50 && n_bb > 20, "enough muons in each category");
    check(ok_a4 * 100 >= n_a4 * 95, "SL1 trigger efficiency from cells 1-4");
    check(ok_b4 * 100 >= n_b4 * 95, "SL1 trigger efficiency from cells 17-20");
    check(ok_bb * 100 >= n_bb * 90, "correlation efficiency in cells 17-20");
    check(bad_a == 0, "cells 1-4 give SL1 primitives only");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
