// dtam_sl_scanner -- pattern search over a whole superlayer.
//
// The superlayer has four layers of NCELL cells. Layers 1 and 3 have their
// wires at even half-cell positions (cell c at 2c), layers 0 and 2 are
// staggered by half a cell (cell c at 2c+1). On `start` the hits of all cells
// are latched and a 10-cell group is placed under every apex position k =
// 0..NCELL (apex wire at half cell 2k in layer 3): the group takes cells
// k-2..k+1 of layer 0, k-1..k+1 of layer 1, k-1..k of layer 2 and k of
// layer 3, cells outside the layer being empty. A group holding fewer than 3
// hits is skipped in one cycle; otherwise it goes through the grouping unit
// and the fitter, and the scanner moves on when the grouping unit is done.
// Candidates leave on `cand_valid`/`cand` as the fitter produces them; `done`
// pulses after the last group. A track is normally seen by several
// overlapping groups and so gives several copies of its candidates.
// Timing: one cycle per empty group, about 10 cycles plus 17 per fitted
// pattern for a group with hits.
// Working on 10 cells at a time so as to cover every trajectory of the
// superlayer follows the paper; the sliding placement of the groups, the
// 3-hit skip rule and the cell numbering are this design's.
module dtam_sl_scanner
  import dtam_pkg::*;
#(
  parameter int unsigned NCELL = 60
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  hit_t  hits_in [NLAYERS][NCELL],
  output logic  busy,
  output logic  cand_valid,
  output cand_t cand,
  output logic  done
);

  localparam int unsigned KW = $clog2(NCELL + 2);

  typedef enum logic [1:0] {S_IDLE, S_GROUP, S_WAIT} sstate_e;

  sstate_e       state;
  hit_t          hits [NLAYERS][NCELL];
  logic [KW-1:0] k;

  // cells of the group under apex k
  localparam int FIRST [4] = '{-2, -1, -1, 0};  // first cell of each layer
  localparam int BASE  [4] = '{0, 4, 7, 9};     // group index of that cell
  localparam int NUM   [4] = '{4, 3, 2, 1};

  hit_t       grp [NCELLS];
  logic [3:0] grp_cnt;
  always_comb begin
    int c;
    grp_cnt = '0;
    for (int l = 0; l < 4; l++)
      for (int j = 0; j < NUM[l]; j++) begin
        c = int'(k) + FIRST[l] + j;
        if (c >= 0 && c < int'(NCELL)) grp[BASE[l] + j] = hits[l][c];
        else                            grp[BASE[l] + j] = '0;
        grp_cnt = grp_cnt + {3'b0, grp[BASE[l] + j].valid};
      end
  end

  apex_t grp_apex;
  assign grp_apex = apex_t'(2 * int'(k));

  logic       g_start, g_done;
  logic       fit_start, fit_done;
  logic [3:0] fit_mask;
  xloc_t      fit_xw [4];
  tdc_t       fit_t  [4];
  apex_t      fit_apex;

  dtam_grouping u_grp (
    .clk, .rst_n, .start(g_start), .cells_in(grp), .apex_in(grp_apex),
    .busy(), .done(g_done),
    .fit_start, .fit_mask, .fit_xw, .fit_t, .fit_apex, .fit_done
  );

  dtam_sl_fitter u_fit (
    .clk, .rst_n, .start(fit_start),
    .mask_in(fit_mask), .xw_in(fit_xw), .t_in(fit_t), .apex_in(fit_apex),
    .busy(), .cand_valid, .cand, .done(fit_done)
  );

  assign g_start = (state == S_GROUP) && (grp_cnt >= 4'd3);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      k     <= '0;
      done  <= 1'b0;
      for (int l = 0; l < NLAYERS; l++)
        for (int c = 0; c < NCELL; c++) hits[l][c] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          hits  <= hits_in;
          k     <= '0;
          state <= S_GROUP;
        end
        S_GROUP: begin
          if (g_start) state <= S_WAIT;
          else if (k == KW'(NCELL)) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else k <= k + 1'b1;
        end
        S_WAIT: if (g_done) begin
          if (k == KW'(NCELL)) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            k     <= k + 1'b1;
            state <= S_GROUP;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
