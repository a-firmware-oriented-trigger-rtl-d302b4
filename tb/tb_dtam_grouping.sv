// tb_dtam_grouping -- random hit maps of a 10-cell group. The testbench plays
// the fitter (done after a random delay) and checks that exactly the 4-cell
// patterns with at least 3 hits are sent, in pattern order, with the right
// mask, wire positions and times, and that `done` comes 8 cycles plus the
// waiting time after `start`.
module tb_dtam_grouping;
  import dtam_pkg::*;
  import dtam_tb_pkg::*;

  logic       clk = 0, rst_n = 0, start = 0;
  hit_t       cells_in [NCELLS];
  apex_t      apex_in;
  logic       busy, done, fit_start, fit_done = 0;
  logic [3:0] fit_mask;
  xloc_t      fit_xw [4];
  tdc_t       fit_t  [4];
  apex_t      fit_apex;

  dtam_grouping dut (.clk, .rst_n, .start, .cells_in, .apex_in, .busy, .done,
                     .fit_start, .fit_mask, .fit_xw, .fit_t, .fit_apex, .fit_done);

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

  initial begin
    int nsent = 0, nempty = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int it = 0; it < 300; it++) begin
      int exp_w [8][4];
      bit exp_send [8];
      int nexp, got, cyc, waited, ap;
      for (int c = 0; c < NCELLS; c++) begin
        cells_in[c].valid = ($urandom_range(0, 99) < ((it % 5) * 20 + 10));
        cells_in[c].t     = tdc_t'($urandom_range(0, 120000));
      end
      ap = $urandom_range(0, 400) - 200;
      #1 apex_in = apex_t'(ap);
      // expected patterns: walk down from the apex wire
      nexp = 0;
      for (int p = 0; p < 8; p++) begin
        int w, cnt;
        w = 0;
        cnt = 0;
        for (int l = 3; l >= 0; l--) begin
          if (l == 2) w += (p & 4) ? 1 : -1;
          if (l == 1) w += (p & 2) ? 1 : -1;
          if (l == 0) w += (p & 1) ? 1 : -1;
          exp_w[p][l] = w;
          cnt += cells_in[cell_index(l, w)].valid;
        end
        exp_send[p] = (cnt >= 3);
        nexp += exp_send[p];
      end
      start = 1;
      @(posedge clk);
      #1 start = 0;
      got = 0; cyc = 0; waited = 0;
      for (int p = 0; p < 8; p++) begin
        if (!exp_send[p]) continue;
        while (!fit_start && cyc < 200) begin @(posedge clk); #1; cyc++; end
        check(fit_start, "fit_start");
        got++;
        check(fit_apex == apex_t'(ap), "apex");
        for (int l = 0; l < 4; l++) begin
          hit_t c;
          c = cells_in[cell_index(l, exp_w[p][l])];
          check(fit_xw[l] == xloc_t'(exp_w[p][l]), $sformatf("xw p%0d l%0d", p, l));
          check(fit_mask[l] == c.valid, $sformatf("mask p%0d l%0d", p, l));
          if (c.valid) check(fit_t[l] == c.t, "time");
        end
        begin
          int d;
          d = $urandom_range(1, 6);
          repeat (d) begin @(posedge clk); #1; cyc++; waited++; end
          check(!done && !fit_start, "waits for the fitter");
          fit_done = 1;
          @(posedge clk); #1; cyc++;
          fit_done = 0;
        end
      end
      while (!done && cyc < 200) begin
        check(!fit_start, "no extra pattern");
        @(posedge clk); #1; cyc++;
      end
      check(done, "done");
      check(got == nexp, "pattern count");
      nsent += got;
      if (nexp == 0) begin
        nempty++;
        check(cyc == 8, $sformatf("scan time %0d", cyc));
      end
      @(posedge clk);
    end
    $display("patterns sent %0d, empty groups %0d", nsent, nempty);
    check(nsent > 100 && nempty > 10, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
