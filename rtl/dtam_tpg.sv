// dtam_tpg -- trigger primitive generator for the phi view of a drift-tube
// chamber.
//
// Implements the "analytical method": the hits of the two phi superlayers
// (SL1, SL3) are searched in parallel by one superlayer scanner each, which
// slides a 10-cell group along the superlayer and, for every group with hits,
// selects the 4-cell patterns, sweeps the laterality hypotheses, computes t0
// with mean-timers and fits the segment. Their candidates are collected by the
// correlator, which merges SL1/SL3 pairs that agree in time within 25 ns and
// forwards all unmatched candidates.
// Interface: `start` (accepted when `busy` is low) latches the hits of one
// event, per superlayer four layers of NCELL cells, each cell one optional
// hit time in TDC counts since orbit start. Trigger primitives then come out
// one per clock on `tp_valid`/`tp`; `done` pulses after the last one.
// Positions are in the chamber frame: half cell 0 is the wire of cell 0 in
// layers 1 and 3 of each superlayer, both superlayers sharing that origin.
// Timing: each superlayer needs NCELL+1 cycles plus about 10 per group with
// hits plus 17 per fitted pattern; the correlator then needs
// n1*n3 + n1 + n3 + 3 cycles for n1, n3 candidates. `dropped` counts
// candidates lost to full correlator buffers since reset.
// The processing chain follows the paper; the cell count default (about 60
// cells per layer, as in the chamber of the paper's test), units, handshake
// and sequencing are this design's.
module dtam_tpg
  import dtam_pkg::*;
#(
  parameter int unsigned NCELL      = 60,
  parameter int unsigned CAND_DEPTH = 64,
  parameter int unsigned WINDOW     = 32,
  parameter int unsigned SL_DIST_UM = 235000,
  parameter int unsigned LAYER_H_UM = 13000
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  hit_t  sl1_hits [NLAYERS][NCELL],
  input  hit_t  sl3_hits [NLAYERS][NCELL],
  output logic  busy,
  output logic  tp_valid,
  output tp_t   tp,
  output logic  done,
  output logic [15:0] dropped
);

  typedef enum logic [1:0] {T_IDLE, T_FIT, T_CORR} tstate_e;
  tstate_e state;

  logic go;
  assign go = (state == T_IDLE) && start;

  logic  s_done  [2];
  logic  s_valid [2];
  cand_t s_cand  [2];
  logic  sl_fin  [2];

  dtam_sl_scanner #(.NCELL(NCELL)) u_sl1 (
    .clk, .rst_n, .start(go), .hits_in(sl1_hits),
    .busy(), .cand_valid(s_valid[0]), .cand(s_cand[0]), .done(s_done[0])
  );

  dtam_sl_scanner #(.NCELL(NCELL)) u_sl3 (
    .clk, .rst_n, .start(go), .hits_in(sl3_hits),
    .busy(), .cand_valid(s_valid[1]), .cand(s_cand[1]), .done(s_done[1])
  );

  logic c_start, c_done;

  dtam_correlator #(
    .DEPTH(CAND_DEPTH), .WINDOW(WINDOW),
    .SL_DIST_UM(SL_DIST_UM), .LAYER_H_UM(LAYER_H_UM)
  ) u_corr (
    .clk, .rst_n, .clear(go),
    .wr1(s_valid[0]), .cand1(s_cand[0]),
    .wr3(s_valid[1]), .cand3(s_cand[1]),
    .start(c_start), .busy(),
    .tp_valid, .tp, .done(c_done), .dropped
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= T_IDLE;
      sl_fin  <= '{default: 1'b0};
      c_start <= 1'b0;
      done    <= 1'b0;
    end else begin
      c_start <= 1'b0;
      done    <= 1'b0;
      unique case (state)
        T_IDLE: if (start) begin
          sl_fin <= '{default: 1'b0};
          state  <= T_FIT;
        end
        T_FIT: begin
          for (int s = 0; s < 2; s++) if (s_done[s]) sl_fin[s] <= 1'b1;
          if ((sl_fin[0] || s_done[0]) && (sl_fin[1] || s_done[1])) begin
            c_start <= 1'b1;
            state   <= T_CORR;
          end
        end
        T_CORR: if (c_done) begin
          done  <= 1'b1;
          state <= T_IDLE;
        end
        default: state <= T_IDLE;
      endcase
    end
  end

  assign busy = (state != T_IDLE);

endmodule
