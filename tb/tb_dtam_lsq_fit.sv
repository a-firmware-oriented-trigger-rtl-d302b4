// tb_dtam_lsq_fit -- random 3- and 4-hit tracks fitted with the true t0 and
// lateralities (and with random lateralities), compared with a real-valued
// least-squares fit; a shifted t0 must be flagged unphysical.
module tb_dtam_lsq_fit;
  import dtam_pkg::*;
  import dtam_tb_pkg::*;

  logic [3:0] mask;
  xloc_t      xw [4];
  tdc_t       t  [4];
  logic [3:0] lat;
  tdc_t       t0;
  apex_t      apex;
  pos_t       pos;
  slope_t     slope;
  chi2_t      chi2;
  logic       physical, enough;

  dtam_lsq_fit dut (.mask, .xw, .t, .lat, .t0, .apex, .pos, .slope, .chi2,
                    .physical, .enough);

  int checks = 0, failures = 0;

  initial begin
    #1000000;
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

  initial begin
    int n4 = 0, n3 = 0, nunphys = 0;
    for (int it = 0; it < 3000; it++) begin
      int t0i, ap, xi[4], ti[4], drop, nh;
      real xc, m, rpos, rslope, rchi2;
      track_hits_t h;
      logic mk[4], la[4];
      t0i = $urandom_range(2000, 100000);
      xc = urand(-TH, TH);
      m  = urand(-300.0, 300.0);
      ap = $urandom_range(0, 200) - 100;
      h  = make_hits(real'(t0i), xc, m);
      drop = (it % 3 == 0) ? $urandom_range(0, 3) : -1;
      nh = 0;
      for (int l = 0; l < 4; l++) begin
        mk[l] = h.hit[l] && (l != drop);
        nh += mk[l];
        xi[l] = h.xw[l];
        ti[l] = h.t[l];
        la[l] = (it % 4 == 1) ? 1'($urandom_range(0, 1)) : h.lat[l];
        mask[l] = mk[l];
        xw[l]   = xloc_t'(xi[l]);
        t[l]    = tdc_t'(ti[l]);
        lat[l]  = la[l];
      end
      t0   = tdc_t'(t0i);
      apex = apex_t'(ap);
      #1;
      check(enough == (nh >= 3), "enough");
      if (nh < 3) continue;
      if (nh == 4) n4++; else n3++;
      ref_fit(mk, xi, ti, la, real'(t0i), rpos, rslope, rchi2);
      rpos += real'(ap) * TH;
      check(rabs(real'(pos) / 4.0 - rpos) <= 0.26, $sformatf("pos %0d ref %f", pos, rpos * 4));
      check(rabs(real'(slope) / 64.0 - rslope) <= 0.5 / 64.0 + 1e-6,
            $sformatf("slope %0d ref %f", slope, rslope * 64));
      check(rabs(real'(chi2) / 16.0 - rchi2) <= 0.04 + 1e-6 * rchi2,
            $sformatf("chi2 %0d ref %f", chi2, rchi2 * 16));
      if (it % 4 != 1) begin
        // true hypothesis: physical, near the generating track
        check(physical, "physical");
        check(rabs(real'(pos) / 4.0 - (xc + real'(ap) * TH)) <= 1.5, "pos vs track");
        check(rabs(real'(slope) / 64.0 - m) <= 1.0, "slope vs track");
        // t0 far too early: drift times exceed the maximum
        t0 = tdc_t'(t0i - 700);
        #1;
        check(!physical, "unphysical early t0");
        nunphys++;
      end
    end
    $display("4-hit fits %0d, 3-hit fits %0d, unphysical %0d", n4, n3, nunphys);
    check(n4 > 100 && n3 > 100, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
