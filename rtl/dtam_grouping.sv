// dtam_grouping -- pattern selection inside a 10-cell group of a superlayer.
//
// A group is a pyramid of 4 + 3 + 2 + 1 = 10 cells over the four staggered
// layers: layer 3 holds the apex cell, each layer below holds the two
// half-cell-shifted neighbours of every cell above it. Cell indices:
//     layer 0: cells 0..3  (wires at -3,-1,+1,+3 half cells from the apex)
//     layer 1: cells 4..6  (-2, 0, +2)
//     layer 2: cells 7..8  (-1, +1)
//     layer 3: cell  9     ( 0)
// Going down from the apex one half cell left or right per layer gives the 8
// 4-cell patterns; pattern p steps right from layer 3 to 2 if p[2] is set,
// from 2 to 1 if p[1], from 1 to 0 if p[0]. On `start` the hits are latched
// and the patterns are visited in order 0..7; a pattern with at least 3 hit
// cells is handed to the fitter (`fit_start` pulse with mask, wire positions
// and times) and the next one waits for `fit_done`. `done` pulses once after
// the last pattern. Cost: 1 cycle per pattern, plus the fitter time of each
// pattern sent.
// That patterns of 4 tubes and their 3-tube subpatterns over 10 cells are
// selected is the paper's; the pyramid shape, visiting order and handshake are
// this design's. Identical 3-hit subpatterns of two patterns are not merged.
module dtam_grouping
  import dtam_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  hit_t       cells_in [NCELLS],
  input  apex_t      apex_in,
  output logic       busy,
  output logic       done,
  // to the fitter
  output logic       fit_start,
  output logic [3:0] fit_mask,
  output xloc_t      fit_xw [4],
  output tdc_t       fit_t  [4],
  output apex_t      fit_apex,
  input  logic       fit_done
);

  typedef enum logic [1:0] {G_IDLE, G_SCAN, G_WAIT} gstate_e;

  gstate_e    state;
  hit_t       cells [NCELLS];
  apex_t      apex;
  logic [2:0] path;

  localparam int BASE [4] = '{0, 4, 7, 9};

  // cells of the current pattern
  logic [3:0] p_mask;
  xloc_t      p_xw [4];
  tdc_t       p_t  [4];
  logic [2:0] p_cnt;
  always_comb begin
    int x, idx;
    x = 0;
    p_cnt = '0;
    for (int l = 3; l >= 0; l--) begin
      if (l < 3) x = path[l] ? x + 1 : x - 1;
      idx = BASE[l] + (x + (3 - l)) / 2;
      p_xw[l]   = xloc_t'(x);
      p_mask[l] = cells[idx].valid;
      p_t[l]    = cells[idx].t;
      p_cnt     = p_cnt + {2'b0, cells[idx].valid};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= G_IDLE;
      apex      <= '0;
      path      <= '0;
      done      <= 1'b0;
      fit_start <= 1'b0;
      fit_mask  <= '0;
      fit_apex  <= '0;
      for (int i = 0; i < NCELLS; i++) cells[i] <= '0;
      for (int l = 0; l < 4; l++) begin
        fit_xw[l] <= '0;
        fit_t[l]  <= '0;
      end
    end else begin
      done      <= 1'b0;
      fit_start <= 1'b0;
      unique case (state)
        G_IDLE: if (start) begin
          cells <= cells_in;
          apex  <= apex_in;
          path  <= '0;
          state <= G_SCAN;
        end
        G_SCAN: begin
          if (p_cnt >= 3'd3) begin
            fit_start <= 1'b1;
            fit_mask  <= p_mask;
            fit_xw    <= p_xw;
            fit_t     <= p_t;
            fit_apex  <= apex;
            state     <= G_WAIT;
          end else if (path == 3'(NPATHS - 1)) begin
            done  <= 1'b1;
            state <= G_IDLE;
          end else begin
            path <= path + 3'd1;
          end
        end
        G_WAIT: if (fit_done) begin
          if (path == 3'(NPATHS - 1)) begin
            done  <= 1'b1;
            state <= G_IDLE;
          end else begin
            path  <= path + 3'd1;
            state <= G_SCAN;
          end
        end
        default: state <= G_IDLE;
      endcase
    end
  end

  assign busy = (state != G_IDLE);

endmodule
