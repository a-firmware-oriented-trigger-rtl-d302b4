// dtam_correlator -- matching of SL1 and SL3 segments into chamber primitives.
//
// Candidates of the two phi superlayers are written into two buffers of DEPTH
// entries (`clear` empties both; a write to a full buffer is dropped and
// counted in `dropped`). After `start` every SL1/SL3 pair is examined, one
// pair per clock. A pair whose times differ by at most WINDOW counts
// (25 ns) gives a correlated primitive:
//     t0    = (t0_SL1 + t0_SL3) / 2
//     pos   = (pos_SL1 + pos_SL3) / 2
//     slope = (pos_SL3 - pos_SL1) / (SL1-SL3 distance)
// (the slope is converted to the design's unit, drift counts per layer height,
// by the factor LAYER_H_UM / SL_DIST_UM). After the pair scan every candidate
// of either buffer that took part in no match is passed on unchanged, SL1
// first. `done` pulses once at the end. Output: at most one primitive per clock
// on `tp_valid`/`tp`, no back-pressure. Cost: n1*n3 + n1 + n3 + 3 cycles
// (no pair scan when a buffer is empty).
// The window, the three combination formulas and keeping all candidates when
// there is no match are the paper's. The buffers, the pair order, emitting one
// primitive per matching pair and the SL distance (the paper says only more
// than 20 cm) are this design's choices; SL3 is taken to lie above SL1.
module dtam_correlator
  import dtam_pkg::*;
#(
  parameter int unsigned DEPTH      = 16,
  parameter int unsigned WINDOW     = 32,      // 25 ns in TDC counts
  parameter int unsigned SL_DIST_UM = 235000,  // centre of SL1 to centre of SL3
  parameter int unsigned LAYER_H_UM = 13000    // layer height
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  input  logic  wr1,
  input  cand_t cand1,
  input  logic  wr3,
  input  cand_t cand3,
  input  logic  start,
  output logic  busy,
  output logic  tp_valid,
  output tp_t   tp,
  output logic  done,
  output logic [15:0] dropped
);

  localparam int unsigned IW = $clog2(DEPTH + 1);

  typedef enum logic [2:0] {C_IDLE, C_PAIR, C_UNM1, C_UNM3, C_DONE} cstate_e;

  cand_t mem1 [DEPTH];
  cand_t mem3 [DEPTH];
  logic [IW-1:0] n1, n3, i, j;
  logic [DEPTH-1:0] used1, used3;
  cstate_e state;

  cand_t a, b;
  assign a = mem1[i[$clog2(DEPTH)-1:0]];
  assign b = mem3[j[$clog2(DEPTH)-1:0]];

  logic full1, full3;
  logic [1:0] drops;
  assign full1 = (n1 == IW'(DEPTH));
  assign full3 = (n3 == IW'(DEPTH));
  assign drops = {1'b0, wr1 && full1} + {1'b0, wr3 && full3};

  logic match;
  tp_t  corr_tp, sl1_tp, sl3_tp;
  always_comb begin
    longint dt, sum_t, dpos;
    dt    = longint'(a.t0) - longint'(b.t0);
    match = (dt <= longint'(WINDOW)) && (dt >= -longint'(WINDOW));
    sum_t = longint'(a.t0) + longint'(b.t0);
    dpos  = longint'(b.pos) - longint'(a.pos);
    corr_tp.kind      = TP_CORR;
    corr_tp.t0        = tdc_t'(div_round(sum_t, 2));
    corr_tp.bx        = time_to_bx(corr_tp.t0);
    corr_tp.pos       = pos_t'(div_round(longint'(a.pos) + longint'(b.pos), 2));
    corr_tp.slope     = slope_t'(div_round(
                          dpos * (longint'(1) << (SLOPE_FRAC - POS_FRAC)) * LAYER_H_UM,
                          longint'(SL_DIST_UM)));
    corr_tp.nhits_sl1 = a.nhits;
    corr_tp.nhits_sl3 = b.nhits;

    sl1_tp.kind      = TP_SL1;
    sl1_tp.t0        = a.t0;
    sl1_tp.bx        = a.bx;
    sl1_tp.pos       = a.pos;
    sl1_tp.slope     = a.slope;
    sl1_tp.nhits_sl1 = a.nhits;
    sl1_tp.nhits_sl3 = 3'd0;

    sl3_tp.kind      = TP_SL3;
    sl3_tp.t0        = b.t0;
    sl3_tp.bx        = b.bx;
    sl3_tp.pos       = b.pos;
    sl3_tp.slope     = b.slope;
    sl3_tp.nhits_sl1 = 3'd0;
    sl3_tp.nhits_sl3 = b.nhits;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= C_IDLE;
      n1       <= '0;
      n3       <= '0;
      i        <= '0;
      j        <= '0;
      used1    <= '0;
      used3    <= '0;
      tp_valid <= 1'b0;
      tp       <= '0;
      done     <= 1'b0;
      dropped  <= '0;
      for (int k = 0; k < DEPTH; k++) begin
        mem1[k] <= '0;
        mem3[k] <= '0;
      end
    end else begin
      tp_valid <= 1'b0;
      done     <= 1'b0;
      if (clear) begin
        n1    <= '0;
        n3    <= '0;
        used1 <= '0;
        used3 <= '0;
      end else begin
        if (wr1 && !full1) begin
          mem1[n1[$clog2(DEPTH)-1:0]] <= cand1;
          n1 <= n1 + 1'b1;
        end
        if (wr3 && !full3) begin
          mem3[n3[$clog2(DEPTH)-1:0]] <= cand3;
          n3 <= n3 + 1'b1;
        end
        if (drops != 2'd0)
          dropped <= (17'(dropped) + 17'(drops) > 17'hFFFF) ? 16'hFFFF
                                                          : dropped + 16'(drops);
      end
      unique case (state)
        C_IDLE: if (start) begin
          i <= '0;
          j <= '0;
          state <= (n1 != 0 && n3 != 0) ? C_PAIR : C_UNM1;
        end
        C_PAIR: begin
          if (match) begin
            tp_valid <= 1'b1;
            tp       <= corr_tp;
            used1[i[$clog2(DEPTH)-1:0]] <= 1'b1;
            used3[j[$clog2(DEPTH)-1:0]] <= 1'b1;
          end
          if (j + 1'b1 < n3) j <= j + 1'b1;
          else begin
            j <= '0;
            if (i + 1'b1 < n1) i <= i + 1'b1;
            else begin
              i     <= '0;
              state <= C_UNM1;
            end
          end
        end
        C_UNM1: begin
          if (i < n1) begin
            if (!used1[i[$clog2(DEPTH)-1:0]]) begin
              tp_valid <= 1'b1;
              tp       <= sl1_tp;
            end
            i <= i + 1'b1;
          end else begin
            state <= C_UNM3;
          end
        end
        C_UNM3: begin
          if (j < n3) begin
            if (!used3[j[$clog2(DEPTH)-1:0]]) begin
              tp_valid <= 1'b1;
              tp       <= sl3_tp;
            end
            j <= j + 1'b1;
          end else begin
            state <= C_DONE;
          end
        end
        C_DONE: begin
          done  <= 1'b1;
          state <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  assign busy = (state != C_IDLE);

endmodule
