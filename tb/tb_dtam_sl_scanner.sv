// tb_dtam_sl_scanner -- single straight tracks anywhere across a superlayer
// of 60 cells per layer. Checks that a 4-hit candidate close to the track
// (t0 within 3 counts, position within 3 counts, slope within 1.5 counts per
// layer) is among the candidates, that every candidate is physical for the
// hits it was built from, that an empty superlayer gives no candidate and
// finishes in NCELL+1 cycles, and that tracks in the edge cells are found.
module tb_dtam_sl_scanner;
  import dtam_pkg::*;
  import dtam_tb_pkg::*;

  localparam int NCELL = 60;

  logic  clk = 0, rst_n = 0, start = 0;
  hit_t  hits_in [NLAYERS][NCELL];
  logic  busy, cand_valid, done;
  cand_t cand;

  dtam_sl_scanner dut (.clk, .rst_n, .start, .hits_in, .busy, .cand_valid, .cand, .done);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    #20000000;
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
    int nfound = 0, nedge = 0, ncand_tot = 0, max_cyc = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int it = 0; it < 120; it++) begin
      real t0, x0, m;
      int cyc, ncand, tl[4];
      bit found, good, at_edge;
      t0 = real'($urandom_range(3000, 100000));
      m  = urand(-200.0, 200.0);
      case (it % 6)
        0: x0 = urand(0.2, 1.5) * TH;                         // left edge
        1: x0 = (2.0 * NCELL - urand(1.2, 2.5)) * TH;         // right edge
        default: x0 = urand(4.0, 2.0 * NCELL - 4.0) * TH;
      endcase
      at_edge = (it % 6 < 2);
      foreach (hits_in[l, c]) hits_in[l][c] = '0;
      good = 1;
      if (it % 10 != 9) begin
        for (int l = 0; l < 4; l++) begin
          int c, t;
          real d;
          if (!chamber_hit(t0, x0 + m * (real'(l) - 1.5), l, NCELL, c, t, d)) good = 0;
          else begin
            if (d < 25.0 || d > TH - 25.0) good = 0;
            hits_in[l][c].valid = 1'b1;
            hits_in[l][c].t = tdc_t'(t);
          end
          tl[l] = t;
        end
        if (!good) continue;
      end
      start = 1;
      @(posedge clk); #1;
      start = 0;
      cyc = 0; ncand = 0; found = 0;
      while (!done && cyc < 20000) begin
        @(posedge clk); #1;
        cyc++;
        if (cand_valid) begin
          ncand++;
          if (cand.nhits == 3'd4 && rabs(real'(cand.t0) - t0) <= 3.0 &&
              rabs(real'(cand.pos) / 4.0 - x0) <= 3.0 &&
              rabs(real'(cand.slope) / 64.0 - m) <= 1.5) found = 1;
          // the candidate's t0 must be physical for at least 3 of the hits
          begin
            int nphys;
            nphys = 0;
            for (int l = 0; l < 4; l++) begin
              int d;
              d = tl[l] - int'(cand.t0);
              if (d >= -int'(DRIFT_TOL) && d <= int'(TDRIFT_MAX + DRIFT_TOL)) nphys++;
            end
            if (it % 10 != 9) check(nphys >= 3, "candidate physical");
          end
        end
      end
      check(done, "done");
      if (cyc > max_cyc) max_cyc = cyc;
      if (it % 10 == 9) begin
        check(ncand == 0, "no candidate without hits");
        check(cyc == NCELL + 1, $sformatf("empty scan %0d cycles", cyc));
      end else begin
        check(found, $sformatf("track %0d found (x0=%f m=%f)", it, x0, m));
        nfound += found;
        nedge += (found && at_edge);
        ncand_tot += ncand;
      end
      @(posedge clk); #1;
    end
    $display("tracks found %0d (edge %0d), candidates %0d, longest scan %0d cycles",
             nfound, nedge, ncand_tot, max_cyc);
    check(nfound > 50 && nedge > 5, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
