// epu: Expert Prediction Unit.  Holds the Cross-layer Correlation Table
// (CCT) and the History Table (HT), predicts the experts of the next MoE
// layer and keeps both tables up to date.
//
// CCT: MAX_E rows, one per expert of the current layer; each row holds CAND
// candidate experts of the next layer with a 2-bit confidence score
// (00 strongly not preferred ... 11 strongly preferred).  HT: the top-K
// experts the previous decoded token used in the next layer, each with a
// fixed score of 10.
//
// Prediction (pred_start, sel = the k experts the router picked for the
// current layer): one CCT row is read per cycle and every candidate adds
// its score to a per-expert accumulator (k cycles); then each HT expert adds
// 2 (one cycle); the prediction is every expert whose sum is >= 2.  The
// resulting bitmap pred_set is held (the "prediction buffer") until the next
// prediction starts, so the controller can issue the prefetch later, near
// the end of the next layer's attention.  pred_done pulses after k+2 cycles.
//
// Update (upd_start, act = the experts the router actually picked for the
// predicted layer): for each of the k CCT rows used by the last prediction
// (one row per cycle) every candidate found in act gains 1 (saturating at
// 11); every other candidate loses 1, and one already at 00 is replaced by
// an expert of act not yet in that row, with score 10.  The HT is then
// overwritten with act.  upd_done pulses after k+1 cycles.
//
// Tables are loaded from and written back to off-chip memory row by row
// through the cct_wr/cct_rd and ht_wr/ht ports.
//
// From the paper: table shapes (256 entries x 8 candidates x (8+2) bits, HT
// 8 x 10 bits), scores, threshold 2, Eq. 1 combination, Alg. 2 and Alg. 3.
// This design's choices: the cycle-by-cycle schedule, which expert replaces
// a retired candidate (the first of act, in router order, not yet in the
// row), and keeping a candidate at 00 when no such expert exists.
module epu
  import stmoe_pkg::*;
#(
  parameter int unsigned MAX_E = 256,
  parameter int unsigned CAND  = 8,
  parameter int unsigned KMAX  = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [$clog2(KMAX+1)-1:0] cfg_k,
  // table load / write-back
  input  logic                     cct_wr_en,
  input  logic [$clog2(MAX_E)-1:0] cct_wr_idx,
  input  cand_t                    cct_wr_row [CAND],
  input  logic [$clog2(MAX_E)-1:0] cct_rd_idx,
  output cand_t                    cct_rd_row [CAND],
  input  logic                     ht_wr_en,
  input  expert_t                  ht_wr_data [KMAX],
  output cand_t                    ht        [KMAX],
  // prediction
  input  logic                     pred_start,
  input  expert_t                  sel       [KMAX],
  output logic                     pred_done,
  output logic [MAX_E-1:0]         pred_set,
  // update
  input  logic                     upd_start,
  input  expert_t                  act       [KMAX],
  output logic                     upd_done,
  output expert_t                  used_rows [KMAX],
  output logic                     busy
);
  localparam int unsigned SW = 5;   // score accumulator width: 8*3+2 < 32
  typedef enum logic [1:0] {S_IDLE, S_PRED, S_HT, S_UPD} state_e;

  cand_t   cct [MAX_E][CAND];
  logic [SW-1:0] score [MAX_E];
  state_e  st;
  logic [$clog2(KMAX+1)-1:0] k;
  expert_t rows [KMAX];        // E_i of the last prediction
  expert_t actq [KMAX];

  assign used_rows = rows;
  assign busy = (st != S_IDLE);
  always_comb for (int c = 0; c < CAND; c++) cct_rd_row[c] = cct[cct_rd_idx][c];

  function automatic logic in_act(expert_t e);
    for (int j = 0; j < KMAX; j++) if (j < int'(cfg_k) && actq[j] == e) return 1'b1;
    return 1'b0;
  endfunction

  // new value of one CCT row under Alg. 3
  function automatic void update_row(input cand_t rin [CAND], output cand_t rout [CAND]);
    logic [KMAX-1:0] used;
    for (int j = 0; j < KMAX; j++) begin
      used[j] = (j >= int'(cfg_k));
      for (int c = 0; c < CAND; c++) if (rin[c].idx == actq[j]) used[j] = 1'b1;
    end
    for (int c = 0; c < CAND; c++) begin
      rout[c] = rin[c];
      if (in_act(rin[c].idx)) begin
        if (rin[c].conf != CONF_STRONG) rout[c].conf = rin[c].conf + 2'd1;
      end else if (rin[c].conf != CONF_STRONG_NOT) begin
        rout[c].conf = rin[c].conf - 2'd1;
      end else begin
        for (int j = 0; j < KMAX; j++) if (!used[j]) begin
          rout[c].idx  = actq[j];
          rout[c].conf = CONF_WEAK_PREF;
          used[j] = 1'b1;
          break;
        end
      end
    end
  endfunction

  cand_t row_new [CAND];
  cand_t cur_row [CAND];
  always_comb update_row(cur_row, row_new);

  // CCT storage: one row write port (table load or Alg. 3 update), no reset:
  // the table is always loaded from off-chip memory before use.
  logic                     row_we;
  logic [$clog2(MAX_E)-1:0] row_wa;
  cand_t                    row_wd [CAND];
  always_comb begin
    row_we = 1'b0;
    row_wa = cct_wr_idx;
    row_wd = cct_wr_row;
    if (st == S_UPD) begin
      row_we = 1'b1;
      row_wa = rows[k[$clog2(KMAX)-1:0]];
      row_wd = row_new;
    end else if (st == S_IDLE && cct_wr_en) begin
      row_we = 1'b1;
    end
  end
  always_ff @(posedge clk) if (row_we) cct[row_wa] <= row_wd;
  assign cur_row = cct[rows[k[$clog2(KMAX)-1:0]]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      k <= '0;
      pred_done <= 1'b0;
      upd_done <= 1'b0;
      pred_set <= '0;
      for (int j = 0; j < KMAX; j++) begin
        rows[j] <= '0;
        actq[j] <= '0;
        ht[j] <= '{idx: '0, conf: CONF_WEAK_PREF};
      end
      for (int e = 0; e < MAX_E; e++) score[e] <= '0;
    end else begin
      pred_done <= 1'b0;
      upd_done <= 1'b0;
      if (ht_wr_en && st == S_IDLE)
        for (int j = 0; j < KMAX; j++) ht[j] <= '{idx: ht_wr_data[j], conf: CONF_WEAK_PREF};
      unique case (st)
        S_IDLE: begin
          if (pred_start) begin
            for (int j = 0; j < KMAX; j++) rows[j] <= sel[j];
            for (int e = 0; e < MAX_E; e++) score[e] <= '0;
            k <= '0;
            st <= S_PRED;
          end else if (upd_start) begin
            for (int j = 0; j < KMAX; j++) actq[j] <= act[j];
            k <= '0;
            st <= S_UPD;
          end
        end
        S_PRED: begin   // Alg. 2 lines 5-7: one CCT row per cycle
          for (int e = 0; e < MAX_E; e++) begin
            automatic logic [SW-1:0] s = score[e];
            for (int c = 0; c < CAND; c++)
              if (cur_row[c].idx == expert_t'(e)) s = s + SW'(cur_row[c].conf);
            score[e] <= s;
          end
          if (k + 1'b1 == cfg_k) st <= S_HT;
          k <= k + 1'b1;
        end
        S_HT: begin     // Eq. 1: HT experts add their score (10)
          for (int e = 0; e < MAX_E; e++) begin
            automatic logic [SW-1:0] s = score[e];
            for (int j = 0; j < KMAX; j++)
              if (j < int'(cfg_k) && ht[j].idx == expert_t'(e)) s = s + SW'(ht[j].conf);
            pred_set[e] <= (s >= SW'(CONF_WEAK_PREF));
          end
          pred_done <= 1'b1;
          st <= S_IDLE;
        end
        S_UPD: begin    // Alg. 3: one CCT row per cycle (written above)
          if (k + 1'b1 == cfg_k) begin
            for (int j = 0; j < KMAX; j++) ht[j] <= '{idx: actq[j], conf: CONF_WEAK_PREF};
            upd_done <= 1'b1;
            st <= S_IDLE;
          end
          k <= k + 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

`ifndef SYNTHESIS
  a_k_range: assert property (@(posedge clk) disable iff (!rst_n)
    (pred_start || upd_start) |-> (cfg_k >= 1 && 32'(cfg_k) <= KMAX));
`endif
endmodule
