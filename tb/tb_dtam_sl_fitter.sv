// tb_dtam_sl_fitter -- random tracks through one 4-cell path.
// 4 hits: exactly one candidate, with the generating lateralities, t0 within
// 3 counts, position and slope near the track, chi2 the minimum over all
// physical hypotheses (recomputed in the testbench). 3 hits: every emitted
// candidate is physical and one of them is the generating hypothesis.
// Latency: `done` 16 cycles after `start`.
module tb_dtam_sl_fitter;
  import dtam_pkg::*;
  import dtam_tb_pkg::*;

  logic       clk = 0, rst_n = 0, start = 0;
  logic [3:0] mask_in;
  xloc_t      xw_in [4];
  tdc_t       t_in  [4];
  apex_t      apex_in;
  logic       busy, cand_valid, done;
  cand_t      cand;

  dtam_sl_fitter dut (.clk, .rst_n, .start, .mask_in, .xw_in, .t_in, .apex_in,
                      .busy, .cand_valid, .cand, .done);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    #3000000;
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

  localparam int TRI [4][3] = '{'{0,1,2}, '{0,1,3}, '{0,2,3}, '{1,2,3}};

  // best chi2 over the physical hypotheses of a 4-hit path, real arithmetic
  function automatic real min_chi2(int xi[4], int ti[4]);
    real best, p, s, c, t0s;
    best = 1.0e30;
    for (int h = 0; h < 16; h++) begin
      logic la[4], mk[4], ok;
      int n;
      for (int l = 0; l < 4; l++) begin la[l] = h[l]; mk[l] = 1; end
      t0s = 0; n = 0;
      for (int k = 0; k < 4; k++) begin
        int li[3], xx[3], tt[3];
        logic ll[3];
        real r;
        for (int j = 0; j < 3; j++) begin
          li[j] = TRI[k][j]; xx[j] = xi[li[j]]; tt[j] = ti[li[j]]; ll[j] = la[li[j]];
        end
        if (ref_t0(li, xx, tt, ll, r) && r >= 0) begin t0s += $floor(r + 0.5); n++; end
      end
      if (n == 0) continue;
      t0s = $floor(t0s / n + 0.5);
      ok = 1;
      for (int l = 0; l < 4; l++)
        if (real'(ti[l]) - t0s < -real'(DRIFT_TOL) ||
            real'(ti[l]) - t0s > real'(TDRIFT_MAX + DRIFT_TOL)) ok = 0;
      if (!ok) continue;
      ref_fit(mk, xi, ti, la, t0s, p, s, c);
      if (c < best) best = c;
    end
    return best;
  endfunction

  initial begin
    int n4 = 0, n3 = 0, ncand3 = 0, n3_undet = 0, n4_mirror = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int it = 0; it < 400; it++) begin
      real t0r, xc, m;
      track_hits_t h;
      int drop, nh, ap, xi[4], ti[4], ncand, lat_ok, cyc;
      bit good, same_side;
      logic first_lat;
      t0r = real'($urandom_range(2000, 100000));
      xc = urand(-0.9 * TH, 0.9 * TH);
      m  = urand(-250.0, 250.0);
      h  = make_hits(t0r, xc, m);
      good = 1;
      for (int l = 0; l < 4; l++)
        if (!h.hit[l] || h.drift[l] < 25.0 || h.drift[l] > TH - 25.0) good = 0;
      if (!good) continue;
      drop = (it % 2 == 1) ? $urandom_range(0, 3) : -1;
      ap = $urandom_range(0, 100) - 50;
      nh = 0;
      for (int l = 0; l < 4; l++) begin
        mask_in[l] = (l != drop);
        nh += mask_in[l];
        xi[l] = h.xw[l];
        ti[l] = h.t[l];
        xw_in[l] = xloc_t'(xi[l]);
        t_in[l]  = tdc_t'(ti[l]);
      end
      apex_in = apex_t'(ap);
      same_side = 1;
      first_lat = h.lat[drop == 0 ? 1 : 0];
      for (int l = 0; l < 4; l++)
        if (mask_in[l] && h.lat[l] != first_lat) same_side = 0;
      #1 start = 1;
      @(posedge clk);
      #1 start = 0;
      ncand = 0; lat_ok = 0; cyc = 0;
      do begin
        @(posedge clk);
        #1;
        cyc++;
        if (cand_valid) begin
          ncand++;
          check(cand.nhits == 3'(nh), "nhits");
          for (int l = 0; l < 4; l++)
            if (mask_in[l]) begin
              int d;
              d = ti[l] - int'(cand.t0);
              check(d >= -int'(DRIFT_TOL) && d <= int'(TDRIFT_MAX + DRIFT_TOL), "physical");
            end
          if (((cand.lat ^ {h.lat[3], h.lat[2], h.lat[1], h.lat[0]}) & mask_in) == 4'h0 &&
              rabs(real'(cand.t0) - t0r) <= 3.0) begin
            lat_ok++;
            check(rabs(real'(cand.pos) / 4.0 - (xc + real'(ap) * TH)) <= 3.0, "pos");
            check(rabs(real'(cand.slope) / 64.0 - m) <= 1.5, "slope");
            check(cand.bx == BX_W'((int'(cand.t0) + 16) / 32), "bx");
          end
          if (nh == 4) begin
            real mc;
            mc = min_chi2(xi, ti);
            check(rabs(real'(cand.chi2) / 16.0 - mc) <= 0.1 + 1e-3 * mc,
                  $sformatf("min chi2 %0d ref %f", cand.chi2, mc * 16));
          end
        end
      end while (!done && cyc < 40);
      check(cyc == 16, $sformatf("latency %0d", cyc));
      if (nh == 4) begin
        n4++;
        check(ncand == 1, "one 4-hit candidate");
        // a mirror hypothesis can fit better than the generating one; it
        // must stay rare
        if (lat_ok != 1) n4_mirror++;
      end else begin
        n3++;
        ncand3 += ncand;
        // with all three hits on the same side of their wires t0 is not
        // determined, so the generating hypothesis cannot be a solution
        if (!same_side) check(lat_ok >= 1, "true 3-hit hypothesis emitted");
        else n3_undet++;
      end
      @(posedge clk);
    end
    $display("4-hit paths %0d (%0d mirror solutions), 3-hit paths %0d with %0d candidates (%0d undetermined)",
             n4, n4_mirror, n3, ncand3, n3_undet);
    check(n4 > 50 && n3 > 50, "coverage");
    check(n4_mirror * 20 <= n4, "mirror solutions rare");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
