// tb_dtam_correlator -- random SL1/SL3 candidate sets. The expected stream
// (matching pairs in SL1-major order, then unmatched SL1, then unmatched SL3)
// and the combined time, position and slope are recomputed in the testbench;
// the cycle count of each event and the overflow counter are checked too.
module tb_dtam_correlator;
  import dtam_pkg::*;
  import dtam_tb_pkg::*;

  localparam int DEPTH = 16;

  logic  clk = 0, rst_n = 0, clear = 0, wr1 = 0, wr3 = 0, start = 0;
  cand_t cand1, cand3;
  logic  busy, tp_valid, done;
  tp_t   tp;
  logic [15:0] dropped;

  dtam_correlator dut (.clk, .rst_n, .clear, .wr1, .cand1, .wr3, .cand3, .start,
                       .busy, .tp_valid, .tp, .done, .dropped);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    #5000000;
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

  function automatic cand_t rand_cand(int base);
    cand_t c;
    c.t0    = tdc_t'(base + $urandom_range(0, 120) - 60);
    c.bx    = time_to_bx(c.t0);
    c.pos   = pos_t'($urandom_range(0, 400000) - 200000);
    c.slope = slope_t'($urandom_range(0, 20000) - 10000);
    c.chi2  = chi2_t'($urandom_range(0, 1000));
    c.nhits = 3'($urandom_range(3, 4));
    c.lat   = 4'($urandom_range(0, 15));
    return c;
  endfunction

  initial begin
    int nmatch = 0, nun = 0, ndrop_events = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      cand_t c1 [$], c3 [$];
      tp_t   exp_q [$];
      bit    u1 [32], u3 [32];
      int n1, n3, base, cyc, nout, ncyc, drop0, nw1;
      c1.delete();
      c3.delete();
      exp_q.delete();
      base = $urandom_range(1000, 100000);
      n1 = $urandom_range(0, 5);
      n3 = $urandom_range(0, 5);
      nw1 = (it % 50 == 7) ? DEPTH + 2 : n1;
      @(posedge clk); #1;
      clear = 1;
      @(posedge clk); #1;
      clear = 0;
      drop0 = dropped;
      for (int k = 0; k < nw1 || k < n3; k++) begin
        cand_t a, b;
        a = rand_cand(base);
        b = rand_cand(base);
        wr1 = (k < nw1);
        wr3 = (k < n3);
        cand1 = a;
        cand3 = b;
        if (k < nw1 && k < DEPTH) c1.push_back(a);
        if (k < n3) c3.push_back(b);
        @(posedge clk); #1;
      end
      wr1 = 0; wr3 = 0;
      if (nw1 > DEPTH) begin
        ndrop_events++;
        check(int'(dropped) - drop0 == nw1 - DEPTH, "dropped count");
      end
      n1 = c1.size();
      foreach (u1[i]) u1[i] = 0;
      foreach (u3[i]) u3[i] = 0;
      for (int i = 0; i < n1; i++)
        for (int j = 0; j < n3; j++) begin
          int dt;
          dt = int'(c1[i].t0) - int'(c3[j].t0);
          if (dt <= 32 && dt >= -32) begin
            tp_t e;
            real rt, rp, rs;
            rt = (real'(c1[i].t0) + real'(c3[j].t0)) / 2.0;
            rp = (real'(c1[i].pos) + real'(c3[j].pos)) / 2.0;
            // positions in quarter counts, slope in 1/64 counts per 13 mm
            rs = (real'(c3[j].pos) - real'(c1[i].pos)) / 4.0 * 13.0 / 235.0 * 64.0;
            e.kind = TP_CORR;
            e.t0 = tdc_t'(int'($floor(rt + 0.5)));
            e.bx = time_to_bx(e.t0);
            e.pos = pos_t'(longint'(rp >= 0 ? $floor(rp + 0.5) : -$floor(-rp + 0.5)));
            e.slope = slope_t'(longint'(rs >= 0 ? $floor(rs + 0.5) : -$floor(-rs + 0.5)));
            e.nhits_sl1 = c1[i].nhits;
            e.nhits_sl3 = c3[j].nhits;
            exp_q.push_back(e);
            u1[i] = 1; u3[j] = 1;
            nmatch++;
          end
        end
      for (int i = 0; i < n1; i++) if (!u1[i]) begin
        tp_t e;
        e = '{TP_SL1, c1[i].t0, c1[i].bx, c1[i].pos, c1[i].slope, c1[i].nhits, 3'd0};
        exp_q.push_back(e);
        nun++;
      end
      for (int j = 0; j < n3; j++) if (!u3[j]) begin
        tp_t e;
        e = '{TP_SL3, c3[j].t0, c3[j].bx, c3[j].pos, c3[j].slope, 3'd0, c3[j].nhits};
        exp_q.push_back(e);
        nun++;
      end
      start = 1;
      @(posedge clk); #1;
      start = 0;
      cyc = 0; nout = 0;
      ncyc = ((n1 > 0 && n3 > 0) ? n1 * n3 : 0) + n1 + n3 + 3;
      while (!done && cyc < 500) begin
        @(posedge clk); #1;
        cyc++;
        if (tp_valid) begin
          if (nout < exp_q.size()) begin
            tp_t e;
            e = exp_q[nout];
            check(tp.kind == e.kind && tp.nhits_sl1 == e.nhits_sl1 &&
                  tp.nhits_sl3 == e.nhits_sl3, "kind/quality");
            check(tp.t0 == e.t0 && tp.bx == e.bx, $sformatf("t0 %0d exp %0d", tp.t0, e.t0));
            check(tp.pos == e.pos, $sformatf("pos %0d exp %0d", tp.pos, e.pos));
            check(tp.slope - e.slope <= 1 && e.slope - tp.slope <= 1,
                  $sformatf("slope %0d exp %0d", tp.slope, e.slope));
          end
          nout++;
        end
      end
      check(nout == exp_q.size(), $sformatf("outputs %0d exp %0d", nout, exp_q.size()));
      check(cyc == ncyc, $sformatf("cycles %0d exp %0d", cyc, ncyc));
    end
    $display("matched pairs %0d, unmatched %0d, overflow events %0d", nmatch, nun, ndrop_events);
    check(nmatch > 50 && nun > 50 && ndrop_events > 0, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
