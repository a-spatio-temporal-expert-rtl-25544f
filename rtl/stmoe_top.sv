// stmoe_top: expert prediction and compute core of the spatio-temporal
// expert-prefetching MoE accelerator.
//
// It joins the Expert Prediction Unit (CCT + HT, prediction and table
// update) with the compute array of NUM_PE processing arrays, each an
// N x N systolic MAC array that serves one selected expert per MoE layer.
// It also performs the verification step of the per-layer pipeline: when
// the router's actual top-K result for a layer arrives (act_valid/act), it
// is compared with the prediction held in the EPU's prediction buffer; the
// experts that were selected but not predicted come out as miss_set (they
// must be fetched on demand), and hit/miss counts are reported for the
// cycle in which act_valid is high.
//
// The blocks that surround this core in the full accelerator (router,
// expert mapping unit, permutation network, expert/KV and activation
// buffers, memory interface, controller, activation unit) are outside it:
// their signals are the ports of this module.  Operation per layer:
//   1. pred_start with sel = router result of layer i -> pred_set for i+1
//      (kept until the next prediction; the prefetcher reads it later).
//   2. act_valid with act = router result of layer i+1 -> miss_set, counts.
//   3. upd_start with act -> CCT confidence update and HT overwrite.
//   4. each PE: load its expert's weight tile (pe_ld_*), stream token
//      vectors (pe_in_*), read products (pe_out_*), latency 2N-1 cycles.
//
// Sizes: the paper's PEs are 64 x 64; the default N here is 40 because the
// elaboration of eight full 64 x 64 arrays (32,768 fp32 MAC cells) needs
// more memory than the tool flow used to check this RTL has.  mac_array
// itself keeps N = 64 as its default.  All other defaults are the paper's.
module stmoe_top
  import stmoe_pkg::*;
#(
  parameter int unsigned N      = 40,
  parameter int unsigned NUM_PE = 8,
  parameter int unsigned MAX_E  = 256,
  parameter int unsigned CAND   = 8,
  parameter int unsigned KMAX   = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [$clog2(KMAX+1)-1:0] cfg_k,
  // CCT / HT load and write-back (from / to the memory interface)
  input  logic                      cct_wr_en,
  input  logic [$clog2(MAX_E)-1:0]  cct_wr_idx,
  input  cand_t                     cct_wr_row [CAND],
  input  logic [$clog2(MAX_E)-1:0]  cct_rd_idx,
  output cand_t                     cct_rd_row [CAND],
  input  logic                      ht_wr_en,
  input  expert_t                   ht_wr_data [KMAX],
  output cand_t                     ht         [KMAX],
  // prediction
  input  logic                      pred_start,
  input  expert_t                   sel        [KMAX],
  output logic                      pred_done,
  output logic [MAX_E-1:0]          pred_set,
  // verification and update
  input  logic                      act_valid,
  input  expert_t                   act        [KMAX],
  output logic [MAX_E-1:0]          miss_set,
  output logic [$clog2(KMAX+1)-1:0] hit_cnt,
  output logic [$clog2(KMAX+1)-1:0] miss_cnt,
  input  logic                      upd_start,
  output logic                      upd_done,
  output logic                      epu_busy,
  // processing-element arrays
  input  logic                      pe_ld_en   [NUM_PE],
  input  logic [$clog2(N)-1:0]      pe_ld_col  [NUM_PE],
  input  bf16_t                     pe_ld_data [NUM_PE][N],
  input  logic                      pe_in_valid[NUM_PE],
  input  bf16_t                     pe_in_vec  [NUM_PE][N],
  output logic                      pe_out_valid[NUM_PE],
  output fp32_t                     pe_out_vec [NUM_PE][N]
);
  expert_t used_rows [KMAX];

  epu #(.MAX_E(MAX_E), .CAND(CAND), .KMAX(KMAX)) u_epu (
    .clk, .rst_n, .cfg_k,
    .cct_wr_en, .cct_wr_idx, .cct_wr_row, .cct_rd_idx, .cct_rd_row,
    .ht_wr_en, .ht_wr_data, .ht,
    .pred_start, .sel, .pred_done, .pred_set,
    .upd_start, .act, .upd_done, .used_rows, .busy(epu_busy)
  );

  // verification: actual selection against the held prediction
  always_comb begin
    miss_set = '0;
    hit_cnt  = '0;
    miss_cnt = '0;
    if (act_valid)
      for (int j = 0; j < KMAX; j++)
        if (j < int'(cfg_k)) begin
          if (pred_set[act[j]]) hit_cnt = hit_cnt + 1'b1;
          else begin
            miss_cnt = miss_cnt + 1'b1;
            miss_set[act[j]] = 1'b1;
          end
        end
  end

  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    mac_array #(.N(N)) u_array (
      .clk, .rst_n,
      .ld_en    (pe_ld_en[p]),
      .ld_col   (pe_ld_col[p]),
      .ld_data  (pe_ld_data[p]),
      .in_valid (pe_in_valid[p]),
      .in_vec   (pe_in_vec[p]),
      .out_valid(pe_out_valid[p]),
      .out_vec  (pe_out_vec[p])
    );
  end
endmodule
