// tb_dtam_meantimer -- random tracks, random triplets and lateralities.
// Checks the collision time against the generating t0 (true lateralities)
// and against a real-valued collinearity solution (any laterality), and the
// valid flag against whether t0 is determined.
module tb_dtam_meantimer;
  import dtam_pkg::*;
  import dtam_tb_pkg::*;

  logic [1:0] lay [3];
  xloc_t      xw  [3];
  tdc_t       t   [3];
  logic       lat [3];
  tdc_t       t0;
  logic       valid;

  dtam_meantimer dut (.lay, .xw, .t, .lat, .t0, .valid);

  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int TRI [4][3] = '{'{0,1,2}, '{0,1,3}, '{0,2,3}, '{1,2,3}};

  initial begin
    int n_true = 0, n_any = 0, n_undet = 0;
    for (int it = 0; it < 3000; it++) begin
      real t0_true, xc, m, rt0;
      track_hits_t h;
      int k, li[3], xi[3], ti[3];
      logic la[3];
      bit det;
      t0_true = real'($urandom_range(2000, 100000));
      xc = urand(-TH, TH);
      m  = urand(-300.0, 300.0);
      h  = make_hits(t0_true, xc, m);
      k  = $urandom_range(0, 3);
      if (!(h.hit[TRI[k][0]] && h.hit[TRI[k][1]] && h.hit[TRI[k][2]])) continue;
      for (int j = 0; j < 3; j++) begin
        li[j] = TRI[k][j];
        xi[j] = h.xw[li[j]];
        ti[j] = h.t[li[j]];
        la[j] = (it % 2 == 0) ? h.lat[li[j]] : 1'($urandom_range(0, 1));
        lay[j] = 2'(li[j]);
        xw[j]  = xloc_t'(xi[j]);
        t[j]   = tdc_t'(ti[j]);
        lat[j] = la[j];
      end
      #1;
      det = ref_t0(li, xi, ti, la, rt0);
      checks++;
      if (det != valid && !(det && rt0 < 0)) begin
        failures++;
        $display("FAIL valid: det=%0d valid=%0d rt0=%f", det, valid, rt0);
      end
      if (!det) n_undet++;
      if (det && valid) begin
        checks++;
        n_any++;
        if (rabs(real'(t0) - rt0) > 0.51) begin
          failures++;
          $display("FAIL t0=%0d ref=%f", t0, rt0);
        end
        if (it % 2 == 0) begin
          checks++;
          n_true++;
          if (rabs(real'(t0) - t0_true) > 3.0) begin
            failures++;
            $display("FAIL t0=%0d true=%f", t0, t0_true);
          end
        end
      end
    end
    $display("true-laterality checks %0d, any-laterality %0d, undetermined %0d",
             n_true, n_any, n_undet);
    checks++;
    if (n_true < 100 || n_undet < 10) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
