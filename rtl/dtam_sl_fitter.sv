// dtam_sl_fitter -- laterality sweep and candidate selection for one path.
//
// A path is one cell per layer of a superlayer, with 3 or 4 of them hit. On
// `start` the path is latched and the 16 laterality hypotheses are evaluated,
// one per clock. For each hypothesis the four triplets (layers 012, 013, 023,
// 123) that lie inside the hit mask go through a mean-timer; t0 is the
// arithmetic mean of the triplet times that are determined (for a 3-hit path
// there is exactly one triplet). The least-squares fit then gives position,
// slope and chi2, and the hypothesis is kept only if every drift time is
// physical.
//   * 4 hits: the single physical hypothesis with minimum chi2 is emitted after
//     the sweep (ties go to the lower laterality code).
//   * 3 hits: every physical hypothesis is emitted as soon as it is evaluated;
//     hypotheses differing only in the laterality bit of the empty layer are
//     skipped.
// Timing: with `start` sampled at clock edge 0, hypothesis h is evaluated
// between edges h and h+1; a 3-hit candidate is valid after edge h+1, the
// 4-hit candidate and the one-cycle `done` pulse after edge 16. `start` is
// ignored while busy, so a new path can start on the cycle `done` is high.
// The selection rules (mean of triplets, minimum chi2 for 4 hits, all physical
// solutions for 3 hits) are the paper's; the serial one-hypothesis-per-clock
// sweep is this design's choice.
module dtam_sl_fitter
  import dtam_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [3:0] mask_in,
  input  xloc_t      xw_in [4],
  input  tdc_t       t_in  [4],
  input  apex_t      apex_in,
  output logic       busy,
  output logic       cand_valid,
  output cand_t      cand,
  output logic       done
);

  // latched path
  logic [3:0] mask;
  xloc_t      xw [4];
  tdc_t       t  [4];
  apex_t      apex;
  logic [4:0] hyp;        // 0..15 while sweeping
  logic       sweeping;

  logic [3:0] lat;
  assign lat = hyp[3:0];

  // the four triplets of a superlayer
  localparam logic [1:0] TRI [4][3] = '{'{2'd0, 2'd1, 2'd2}, '{2'd0, 2'd1, 2'd3},
                                        '{2'd0, 2'd2, 2'd3}, '{2'd1, 2'd2, 2'd3}};

  tdc_t tri_t0    [4];
  logic tri_valid [4];
  logic tri_in    [4];

  for (genvar k = 0; k < 4; k++) begin : g_tri
    logic [1:0] lay_k [3];
    xloc_t      xw_k  [3];
    tdc_t       t_k   [3];
    logic       lat_k [3];
    always_comb begin
      for (int j = 0; j < 3; j++) begin
        lay_k[j] = TRI[k][j];
        xw_k[j]  = xw[TRI[k][j]];
        t_k[j]   = t[TRI[k][j]];
        lat_k[j] = lat[TRI[k][j]];
      end
      tri_in[k] = mask[TRI[k][0]] && mask[TRI[k][1]] && mask[TRI[k][2]];
    end
    dtam_meantimer u_mt (
      .lay(lay_k), .xw(xw_k), .t(t_k), .lat(lat_k),
      .t0(tri_t0[k]), .valid(tri_valid[k])
    );
  end

  // mean of the determined triplet times
  tdc_t hyp_t0;
  logic hyp_t0_ok;
  always_comb begin
    logic [TIME_W+2:0] sum;
    int cnt;
    sum = '0;
    cnt = 0;
    for (int k = 0; k < 4; k++)
      if (tri_in[k] && tri_valid[k]) begin
        sum += (TIME_W+3)'(tri_t0[k]);
        cnt++;
      end
    hyp_t0_ok = (cnt != 0);
    hyp_t0    = (cnt == 0) ? '0 : tdc_t'(div_round(longint'(sum), longint'(cnt)));
  end

  pos_t   fit_pos;
  slope_t fit_slope;
  chi2_t  fit_chi2;
  logic   fit_phys, fit_enough;

  dtam_lsq_fit u_fit (
    .mask(mask), .xw(xw), .t(t), .lat(lat), .t0(hyp_t0), .apex(apex),
    .pos(fit_pos), .slope(fit_slope), .chi2(fit_chi2),
    .physical(fit_phys), .enough(fit_enough)
  );

  logic four;
  assign four = (mask == 4'hF);

  // a hypothesis is skipped if it sets the laterality of an empty layer
  logic hyp_ok;
  assign hyp_ok = sweeping && ((lat & ~mask) == 4'h0) && hyp_t0_ok &&
                  fit_phys && fit_enough;

  cand_t hyp_cand;
  always_comb begin
    hyp_cand.t0    = hyp_t0;
    hyp_cand.bx    = time_to_bx(hyp_t0);
    hyp_cand.pos   = fit_pos;
    hyp_cand.slope = fit_slope;
    hyp_cand.chi2  = fit_chi2;
    hyp_cand.nhits = four ? 3'd4 : 3'd3;
    hyp_cand.lat   = lat;
  end

  cand_t best;
  logic  best_ok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mask       <= '0;
      apex       <= '0;
      hyp        <= '0;
      sweeping   <= 1'b0;
      best       <= '0;
      best_ok    <= 1'b0;
      cand_valid <= 1'b0;
      cand       <= '0;
      done       <= 1'b0;
      for (int i = 0; i < 4; i++) begin
        xw[i] <= '0;
        t[i]  <= '0;
      end
    end else begin
      cand_valid <= 1'b0;
      done       <= 1'b0;
      if (!sweeping) begin
        if (start) begin
          mask     <= mask_in;
          xw       <= xw_in;
          t        <= t_in;
          apex     <= apex_in;
          hyp      <= '0;
          best_ok  <= 1'b0;
          sweeping <= 1'b1;
        end
      end else begin
        if (hyp_ok) begin
          if (four) begin
            if (!best_ok || hyp_cand.chi2 < best.chi2) begin
              best    <= hyp_cand;
              best_ok <= 1'b1;
            end
          end else begin
            cand_valid <= 1'b1;
            cand       <= hyp_cand;
          end
        end
        if (hyp == 5'd15) begin
          sweeping <= 1'b0;
          done     <= 1'b1;
          if (four) begin
            // include the last hypothesis in the comparison
            if (hyp_ok && (!best_ok || hyp_cand.chi2 < best.chi2)) begin
              cand_valid <= 1'b1;
              cand       <= hyp_cand;
            end else if (best_ok) begin
              cand_valid <= 1'b1;
              cand       <= best;
            end
          end
        end
        hyp <= hyp + 5'd1;
      end
    end
  end

  assign busy = sweeping;

endmodule
