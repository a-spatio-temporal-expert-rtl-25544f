// tb_stmoe_top: end-to-end run of the prediction/compute core over a
// sequence of MoE layers of one decoded token stream.  Per layer it:
// predicts the next layer's experts from the current selection, verifies
// the next layer's actual selection against the prediction (hits, misses
// and the miss set), updates the tables, and lets every PE compute one
// expert's matrix-vector product.  Expected values come from a software
// model of the prediction rules and from exact integer arithmetic.  Each
// mechanism (prediction, hit, miss, CCT replacement, PE compute) must occur
// at least once.
module tb_stmoe_top;
  import stmoe_pkg::*;
  import tb_util_pkg::*;
  localparam int N = 8, NUM_PE = 8, MAX_E = 64, CAND = 8, KMAX = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [3:0] cfg_k = 8;
  logic cct_wr_en = 0; logic [5:0] cct_wr_idx = 0; cand_t cct_wr_row [CAND];
  logic [5:0] cct_rd_idx = 0; cand_t cct_rd_row [CAND];
  logic ht_wr_en = 0; expert_t ht_wr_data [KMAX]; cand_t ht [KMAX];
  logic pred_start = 0; expert_t sel [KMAX]; logic pred_done; logic [MAX_E-1:0] pred_set;
  logic act_valid = 0; expert_t act [KMAX]; logic [MAX_E-1:0] miss_set;
  logic [3:0] hit_cnt, miss_cnt;
  logic upd_start = 0, upd_done, epu_busy;
  logic pe_ld_en [NUM_PE]; logic [2:0] pe_ld_col [NUM_PE]; bf16_t pe_ld_data [NUM_PE][N];
  logic pe_in_valid [NUM_PE]; bf16_t pe_in_vec [NUM_PE][N];
  logic pe_out_valid [NUM_PE]; fp32_t pe_out_vec [NUM_PE][N];

  stmoe_top #(.N(N), .NUM_PE(NUM_PE), .MAX_E(MAX_E), .CAND(CAND), .KMAX(KMAX)) dut (.*);

  int checks = 0, failures = 0;
  int n_pred = 0, n_hit = 0, n_miss = 0, n_repl = 0, n_comp = 0;
  int m_idx [MAX_E][CAND]; int m_conf [MAX_E][CAND]; int m_ht [KMAX];
  int W [NUM_PE][N][N]; int X [N];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 12) $display("FAIL %s", what); end
  endtask

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // a correlated expert stream: layer l selects experts drawn mostly from a
  // small window, so the tables learn and both hits and misses occur
  function automatic void layer_sel(int l, output int v [KMAX]);
    for (int j = 0; j < KMAX; j++) begin
      bit dup;
      do begin
        v[j] = ($urandom_range(0, 3) == 0) ? $urandom_range(0, MAX_E - 1) : (l * 5 + $urandom_range(0, 11)) % MAX_E;
        dup = 0;
        for (int i = 0; i < j; i++) if (v[i] == v[j]) dup = 1;
      end while (dup);
    end
  endfunction

  int cur [KMAX], nxt [KMAX];
  int sc [MAX_E];
  int eh, em;

  initial begin
    for (int p = 0; p < NUM_PE; p++) begin
      pe_ld_en[p] = 0; pe_ld_col[p] = 0; pe_in_valid[p] = 0;
      for (int i = 0; i < N; i++) begin pe_ld_data[p][i] = 0; pe_in_vec[p][i] = 0; end
    end
    for (int j = 0; j < KMAX; j++) begin sel[j] = 0; act[j] = 0; ht_wr_data[j] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    // table load as after profiling: row e holds experts e+1..e+8, score 10
    for (int e = 0; e < MAX_E; e++) begin
      @(negedge clk); cct_wr_en = 1; cct_wr_idx = e[5:0];
      for (int c = 0; c < CAND; c++) begin
        m_idx[e][c] = (e + 1 + c) % MAX_E; m_conf[e][c] = 2;
        cct_wr_row[c] = '{idx: expert_t'(m_idx[e][c]), conf: 2'b10};
      end
    end
    @(negedge clk); cct_wr_en = 0;
    layer_sel(0, cur);
    for (int j = 0; j < KMAX; j++) begin m_ht[j] = j; ht_wr_data[j] = expert_t'(j); end
    ht_wr_en = 1; @(negedge clk); ht_wr_en = 0;

    for (int l = 0; l < 12; l++) begin
      // ---- P: predict layer l+1 from layer l
      for (int j = 0; j < KMAX; j++) sel[j] = expert_t'(cur[j]);
      for (int e = 0; e < MAX_E; e++) sc[e] = 0;
      for (int j = 0; j < KMAX; j++) for (int c = 0; c < CAND; c++) sc[m_idx[cur[j]][c]] += m_conf[cur[j]][c];
      for (int j = 0; j < KMAX; j++) sc[m_ht[j]] += 2;
      pred_start = 1; @(negedge clk); pred_start = 0;
      while (!pred_done) @(negedge clk);
      @(negedge clk);
      n_pred++;
      for (int e = 0; e < MAX_E; e++) check(pred_set[e] == (sc[e] >= 2), $sformatf("l%0d pred e%0d", l, e));
      // ---- V: verify the actual selection of layer l+1
      layer_sel(l + 1, nxt);
      for (int j = 0; j < KMAX; j++) act[j] = expert_t'(nxt[j]);
      act_valid = 1; #1;
      eh = 0; em = 0;
      for (int j = 0; j < KMAX; j++) if (sc[nxt[j]] >= 2) eh++; else em++;
      check(hit_cnt == 4'(eh) && miss_cnt == 4'(em), $sformatf("l%0d hits %0d/%0d misses %0d/%0d", l, hit_cnt, eh, miss_cnt, em));
      for (int j = 0; j < KMAX; j++) check(miss_set[nxt[j]] == (sc[nxt[j]] < 2), "miss_set");
      n_hit += eh; n_miss += em;
      @(negedge clk); act_valid = 0;
      // ---- table update (software model of the same rule)
      for (int r = 0; r < KMAX; r++) begin
        int e; bit used [KMAX];
        e = cur[r];
        for (int j = 0; j < KMAX; j++) begin
          used[j] = 0;
          for (int c = 0; c < CAND; c++) if (m_idx[e][c] == nxt[j]) used[j] = 1;
        end
        for (int c = 0; c < CAND; c++) begin
          bit hit; hit = 0;
          for (int j = 0; j < KMAX; j++) if (nxt[j] == m_idx[e][c]) hit = 1;
          if (hit) begin if (m_conf[e][c] < 3) m_conf[e][c]++; end
          else if (m_conf[e][c] > 0) m_conf[e][c]--;
          else for (int j = 0; j < KMAX; j++) if (!used[j]) begin
            m_idx[e][c] = nxt[j]; m_conf[e][c] = 2; used[j] = 1; n_repl++; break;
          end
        end
      end
      for (int j = 0; j < KMAX; j++) m_ht[j] = nxt[j];
      upd_start = 1; @(negedge clk); upd_start = 0;
      while (!upd_done) @(negedge clk);
      @(negedge clk);
      for (int r = 0; r < KMAX; r++) begin
        cct_rd_idx = cur[r][5:0]; #1;
        for (int c = 0; c < CAND; c++)
          check(cct_rd_row[c].idx == expert_t'(m_idx[cur[r]][c]) && cct_rd_row[c].conf == conf_t'(m_conf[cur[r]][c]), "cct row");
      end
      // ---- Com: each PE computes x * W_e for its expert
      for (int i = 0; i < N; i++) X[i] = int'($urandom_range(0, 8)) - 4;
      for (int p = 0; p < NUM_PE; p++)
        for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) W[p][r][c] = int'($urandom_range(0, 8)) - 4;
      for (int c = 0; c < N; c++) begin
        @(negedge clk);
        for (int p = 0; p < NUM_PE; p++) begin
          pe_ld_en[p] = 1; pe_ld_col[p] = c[2:0];
          for (int r = 0; r < N; r++) pe_ld_data[p][r] = int2bf(W[p][r][c]);
        end
      end
      @(negedge clk);
      for (int p = 0; p < NUM_PE; p++) begin
        pe_ld_en[p] = 0; pe_in_valid[p] = 1;
        for (int r = 0; r < N; r++) pe_in_vec[p][r] = int2bf(X[r]);
      end
      @(negedge clk);
      for (int p = 0; p < NUM_PE; p++) pe_in_valid[p] = 0;
      while (!pe_out_valid[0]) @(negedge clk);
      for (int p = 0; p < NUM_PE; p++)
        for (int c = 0; c < N; c++) begin
          int ev; ev = 0;
          for (int r = 0; r < N; r++) ev += X[r] * W[p][r][c];
          check(pe_out_valid[p] && fp2real(pe_out_vec[p][c]) == real'(ev), $sformatf("pe%0d col%0d", p, c));
        end
      n_comp++;
      for (int j = 0; j < KMAX; j++) cur[j] = nxt[j];
    end
    $display("predictions=%0d hits=%0d misses=%0d replacements=%0d computes=%0d", n_pred, n_hit, n_miss, n_repl, n_comp);
    check(n_pred > 0, "no prediction"); check(n_hit > 0, "no hit"); check(n_miss > 0, "no miss");
    check(n_repl > 0, "no replacement"); check(n_comp > 0, "no compute");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
