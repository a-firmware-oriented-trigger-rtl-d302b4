// tb_dtam_tpg -- end-to-end test of the trigger primitive generator at its
// default parameters (60 cells per layer). Straight muon tracks cross SL1 and
// SL3 of a chamber; the testbench derives the hit times in both superlayers
// and checks the primitives against the generating track:
//   * clean events: a correlated 4+4 primitive with t0 within 3 counts,
//     position within 3 counts and slope within 0.25 counts per layer height;
//   * events with one layer missing in one superlayer: a correlated primitive
//     built from a 3-hit candidate;
//   * events whose SL3 hits are delayed by 200 counts, far outside the 25 ns
//     window: no correlated 4+4 primitive, both superlayers reported
//     separately;
//   * noise events filling three layers of SL1 with random hits: candidate
//     buffer overflow.
// It also counts hypotheses rejected as unphysical inside the fitters, and
// fails if any of these mechanisms never occurred.
module tb_dtam_tpg;
  import dtam_pkg::*;
  import dtam_tb_pkg::*;

  localparam int  NCELL = 60;
  localparam real DSL = 235000.0 / 13000.0;  // SL3 centre above SL1, layer heights

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
    #50000000;
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

  // hypotheses rejected because a drift time is unphysical
  int n_unphys = 0;
  always @(posedge clk) begin
    if (dut.u_sl1.u_fit.sweeping && dut.u_sl1.u_fit.fit_enough &&
        dut.u_sl1.u_fit.hyp_t0_ok && !dut.u_sl1.u_fit.fit_phys) n_unphys++;
    if (dut.u_sl3.u_fit.sweeping && dut.u_sl3.u_fit.fit_enough &&
        dut.u_sl3.u_fit.hyp_t0_ok && !dut.u_sl3.u_fit.fit_phys) n_unphys++;
  end

  // hits of a track x(y) = x0 + m*y (y in layer heights from the SL1 centre)
  // in the superlayer centred at height yc; `clean` if all four layers are
  // hit away from wire and cell border
  task automatic fill(real t0, real x0, real m, real yc, int drop,
                      output hit_t h [NLAYERS][NCELL], output bit clean);
    foreach (h[l, c]) h[l][c] = '0;
    clean = 1;
    for (int l = 0; l < 4; l++) begin
      int c, t;
      real d;
      if (!chamber_hit(t0, x0 + m * (yc + real'(l) - 1.5), l, NCELL, c, t, d)) clean = 0;
      else begin
        if (d < 25.0 || d > TH - 25.0) clean = 0;
        if (l != drop) begin
          h[l][c].valid = 1'b1;
          h[l][c].t = tdc_t'(t);
        end
      end
    end
  endtask

  initial begin
    int n_corr = 0, n_corr44 = 0, n_3h = 0, n_nomatch = 0, n_sl1 = 0, n_sl3 = 0;
    int n_events = 0, max_cyc = 0, max_clean = 0, n_noise = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int it = 0; it < 160; it++) begin
      real t0, x0, m, xmid;
      int kind, drop1, drop3, cyc;
      bit c1, c3, found44, found3, any_corr44, got1, got3;
      kind = it % 4;   // 0,1: clean  2: missing layer  3: delayed SL3
      t0 = real'($urandom_range(3000, 100000));
      x0 = urand(12.0, 2.0 * NCELL - 12.0) * TH;
      m  = urand(-150.0, 150.0);
      drop1 = -1; drop3 = -1;
      if (kind == 2) begin
        if ($urandom_range(0, 1)) drop1 = $urandom_range(0, 3);
        else drop3 = $urandom_range(0, 3);
      end
      fill(t0, x0, m, 0.0, drop1, sl1_hits, c1);
      fill(t0 + ((kind == 3) ? 200.0 : 0.0), x0, m, DSL, drop3, sl3_hits, c3);
      if (it % 20 == 19) begin
        // noise: layers 1-3 of 24 SL1 cells hit at random times, layer 0
        // empty, so that every group yields 3-hit patterns only
        for (int l = 0; l < 4; l++)
          for (int c = 10; c < 34; c++) begin
            sl1_hits[l][c].valid = (l != 0);
            sl1_hits[l][c].t = tdc_t'(int'(t0) + $urandom_range(0, 480));
          end
        kind = 4;
        n_noise++;
      end else if (!(c1 && c3)) continue;
      n_events++;
      start = 1;
      @(posedge clk); #1;
      start = 0;
      cyc = 0;
      found44 = 0; found3 = 0; any_corr44 = 0; got1 = 0; got3 = 0;
      xmid = x0 + m * DSL / 2.0;
      while (!done && cyc < 100000) begin
        @(posedge clk); #1;
        cyc++;
        if (tp_valid) begin
          if (tp.kind == TP_CORR) begin
            if (tp.nhits_sl1 == 4 && tp.nhits_sl3 == 4) any_corr44 = 1;
            n_corr++;
            if (tp.nhits_sl1 == 4 && tp.nhits_sl3 == 4 &&
                rabs(real'(tp.t0) - t0) <= 3.0 &&
                rabs(real'(tp.pos) / 4.0 - xmid) <= 3.0 &&
                rabs(real'(tp.slope) / 64.0 - m) <= 0.25) begin
              found44 = 1;
              check(tp.bx == BX_W'((int'(tp.t0) + 16) / 32), "bx");
            end
            if ((tp.nhits_sl1 == 3 || tp.nhits_sl3 == 3) &&
                rabs(real'(tp.t0) - t0) <= 3.0 &&
                rabs(real'(tp.pos) / 4.0 - xmid) <= 4.0) found3 = 1;
          end else if (tp.kind == TP_SL1) begin
            got1 = 1;
            n_sl1++;
          end else begin
            got3 = 1;
            n_sl3++;
          end
        end
      end
      check(done, "done");
      if (cyc > max_cyc) max_cyc = cyc;
      if (kind < 2 && cyc > max_clean) max_clean = cyc;
      case (kind)
        0, 1: begin
          check(found44, $sformatf("event %0d: correlated 4+4 primitive", it));
          n_corr44 += found44;
        end
        2: if (found3) n_3h++;
        3: begin
          // spurious 3-hit solutions may still pair up, the true 4-hit
          // segments must not
          check(!any_corr44, $sformatf("event %0d: no 4+4 correlation across 200 counts", it));
          check(got1 && got3, $sformatf("event %0d: both superlayers kept", it));
          n_nomatch += (!any_corr44 && got1 && got3);
        end
        default: ;
      endcase
      @(posedge clk); #1;
    end
    $display("events %0d: correlated 4+4 %0d, via 3-hit %0d, no-match %0d, primitives corr %0d sl1 %0d sl3 %0d",
             n_events, n_corr44, n_3h, n_nomatch, n_corr, n_sl1, n_sl3);
    $display("noise events %0d, unphysical hypotheses %0d, dropped candidates %0d, longest event %0d cycles, longest clean event %0d",
             n_noise, n_unphys, dropped, max_cyc, max_clean);
    check(n_corr44 > 0, "4+4 correlation happened");
    check(n_3h > 0, "3-hit fit used in a correlation");
    check(n_nomatch > 0, "no-match case happened");
    check(n_unphys > 0, "unphysical hypotheses rejected");
    check(dropped > 0, "candidate buffer overflow happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
