// tb_wl_resolution -- time and slope resolution of the trigger primitives.
//
// Runs muon tracks through the full generator at default parameters with
// every drift time smeared by a Gaussian of HIT_SIGMA_UM (a typical single-hit
// resolution of drift cells, 250 um = 5.9 counts). For each event the
// primitive closest in position to the true track is taken, as in the
// resolution studies of the method:
//   * SL1 4-hit segments (read at the SL1 scanner output): time and slope
//     resolution;
//   * correlated 4+4 primitives: time and slope resolution.
// The spreads are computed over the core (|dt| < 20 ns, |dslope| < 10 mrad)
// and checked against the published figures: about 3 ns for SL1 4-hit time,
// below 3 ns for correlated time and below 1 mrad for correlated slope. The
// SL1 4-hit slope is compared with the ~7 mrad published for a fit of clean
// hits (|dslope| < 50 mrad core, limit 12 mrad).
module tb_wl_resolution;
  import dtam_pkg::*;
  import dtam_tb_pkg::*;

  localparam int  NCELL = 60;
  localparam real DSL = 235000.0 / 13000.0;
  localparam real HIT_SIGMA_UM = 250.0;
  localparam real UM_PER_COUNT = 54.0 * 25.0 / 32.0;          // 42.19 um
  localparam real NS_PER_COUNT = 25.0 / 32.0;
  localparam real MRAD_PER_SLOPE = UM_PER_COUNT / 13000.0 * 1000.0;  // per count/layer

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

  task automatic fill(real t0, real x0, real m, real yc, output hit_t h [NLAYERS][NCELL],
                      output bit ok);
    foreach (h[l, c]) h[l][c] = '0;
    ok = 1;
    for (int l = 0; l < 4; l++) begin
      int c, t;
      real d, ts;
      if (!chamber_hit(t0, x0 + m * (yc + real'(l) - 1.5), l, NCELL, c, t, d)) ok = 0;
      else begin
        ts = t0 + d + gauss() * HIT_SIGMA_UM / UM_PER_COUNT;
        if (ts < t0) ts = t0;
        h[l][c].valid = 1'b1;
        h[l][c].t = tdc_t'(int'($floor(ts + 0.5)));
      end
    end
  endtask

  // SL1 4-hit candidates straight from the SL1 scanner
  real best_sl1_dx, best_sl1_dt, best_sl1_ds, x_sl1, cur_m;
  real cur_t0;
  bit  have_sl1;
  always @(posedge clk)
    if (dut.u_sl1.cand_valid && dut.u_sl1.cand.nhits == 3'd4) begin
      real dx;
      dx = rabs(real'(dut.u_sl1.cand.pos) / 4.0 - x_sl1);
      if (!have_sl1 || dx < best_sl1_dx) begin
        best_sl1_dx = dx;
        best_sl1_dt = real'(dut.u_sl1.cand.t0) - cur_t0;
        best_sl1_ds = (real'(dut.u_sl1.cand.slope) / 64.0 - cur_m) * MRAD_PER_SLOPE;
        have_sl1 = 1;
      end
    end

  real s1_sum, s1_sq, c_sum, c_sq, k_sum, k_sq, q_sum, q_sq;
  int  s1_n, c_n, k_n, q_n;

  initial begin
    int n_ev;
    s1_sum = 0; s1_sq = 0; c_sum = 0; c_sq = 0; k_sum = 0; k_sq = 0; q_sum = 0; q_sq = 0; q_n = 0;
    s1_n = 0; c_n = 0; k_n = 0; n_ev = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      real t0, x0, m, xmid, bdx, bdt, bds;
      bit ok1, ok3, have_c;
      int cyc;
      t0 = real'($urandom_range(3000, 100000));
      x0 = urand(12.0, 2.0 * NCELL - 12.0) * TH;
      m  = urand(-150.0, 150.0);
      fill(t0, x0, m, 0.0, sl1_hits, ok1);
      fill(t0, x0, m, DSL, sl3_hits, ok3);
      if (!(ok1 && ok3)) continue;
      n_ev++;
      x_sl1 = x0;
      cur_t0 = t0;
      cur_m = m;
      have_sl1 = 0;
      have_c = 0;
      xmid = x0 + m * DSL / 2.0;
      start = 1;
      @(posedge clk); #1;
      start = 0;
      cyc = 0;
      while (!done && cyc < 100000) begin
        @(posedge clk); #1;
        cyc++;
        if (tp_valid && tp.kind == TP_CORR && tp.nhits_sl1 == 4 && tp.nhits_sl3 == 4) begin
          real dx;
          dx = rabs(real'(tp.pos) / 4.0 - xmid);
          if (!have_c || dx < bdx) begin
            bdx = dx;
            bdt = (real'(tp.t0) - t0) * NS_PER_COUNT;
            bds = (real'(tp.slope) / 64.0 - m) * MRAD_PER_SLOPE;
            have_c = 1;
          end
        end
      end
      check(done, "done");
      if (have_sl1 && rabs(best_sl1_dt * NS_PER_COUNT) < 20.0) begin
        s1_sum += best_sl1_dt * NS_PER_COUNT;
        s1_sq  += (best_sl1_dt * NS_PER_COUNT) ** 2;
        s1_n++;
      end
      if (have_sl1 && rabs(best_sl1_ds) < 50.0) begin
        q_sum += best_sl1_ds; q_sq += best_sl1_ds ** 2; q_n++;
      end
      if (have_c && rabs(bdt) < 20.0) begin
        c_sum += bdt; c_sq += bdt * bdt; c_n++;
      end
      if (have_c && rabs(bds) < 10.0) begin
        k_sum += bds; k_sq += bds * bds; k_n++;
      end
      @(posedge clk); #1;
    end
    begin
      real s1, sc, sk, sq;
      s1 = $sqrt(s1_sq / s1_n - (s1_sum / s1_n) ** 2);
      sc = $sqrt(c_sq / c_n - (c_sum / c_n) ** 2);
      sk = $sqrt(k_sq / k_n - (k_sum / k_n) ** 2);
      sq = $sqrt(q_sq / q_n - (q_sum / q_n) ** 2);
      $display("events %0d, hit resolution %0.0f um", n_ev, HIT_SIGMA_UM);
      $display("SL1 4-hit time resolution  %0.2f ns (%0d segments, published ~3 ns)", s1, s1_n);
      $display("SL1 4-hit slope resolution %0.2f mrad (%0d segments, published ~7 mrad for clean hits)", sq, q_n);
      $display("correlated time resolution %0.2f ns (%0d primitives, published <3 ns)", sc, c_n);
      $display("correlated slope resolution %0.3f mrad (%0d primitives, published <1 mrad)", sk, k_n);
      check(s1_n > n_ev * 8 / 10 && c_n > n_ev * 8 / 10, "efficiency of 4-hit and correlated primitives");
      check(s1 < 4.0, "SL1 4-hit time resolution about 3 ns");
      check(sc < 3.0, "correlated time resolution below 3 ns");
      check(sc < s1, "correlation improves the time resolution");
      check(sk < 1.0, "correlated slope resolution below 1 mrad");
      check(sq < 12.0, "SL1 4-hit slope resolution near 7 mrad");
      check(sk < sq, "the SL1-SL3 lever arm improves the slope resolution");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
