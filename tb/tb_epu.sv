// tb_epu: loads a random CCT and HT, then alternates prediction and update
// rounds with random top-K selections.  A software model of the two
// algorithms (score sums over CCT rows plus 2 per HT expert, threshold 2;
// +1/-1 saturating confidence with replacement at 00) gives the expected
// prediction bitmap, CCT rows and HT.  Also checks the k+2 cycle prediction
// latency.
module tb_epu;
  import stmoe_pkg::*;
  localparam int MAX_E = 64, CAND = 8, KMAX = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [3:0] cfg_k;
  logic cct_wr_en = 0; logic [5:0] cct_wr_idx; cand_t cct_wr_row [CAND];
  logic [5:0] cct_rd_idx = 0; cand_t cct_rd_row [CAND];
  logic ht_wr_en = 0; expert_t ht_wr_data [KMAX]; cand_t ht [KMAX];
  logic pred_start = 0; expert_t sel [KMAX]; logic pred_done; logic [MAX_E-1:0] pred_set;
  logic upd_start = 0; expert_t act [KMAX]; logic upd_done; expert_t used_rows [KMAX]; logic busy;
  int checks = 0, failures = 0;
  int m_idx [MAX_E][CAND]; int m_conf [MAX_E][CAND]; int m_ht [KMAX];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  epu #(.MAX_E(MAX_E), .CAND(CAND), .KMAX(KMAX)) dut (.*);

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic void pick(int k, output int v [KMAX]);
    for (int j = 0; j < KMAX; j++) v[j] = 0;
    for (int j = 0; j < k; j++) begin
      bit dup;
      do begin
        v[j] = $urandom_range(0, MAX_E - 1);
        dup = 0;
        for (int i = 0; i < j; i++) if (v[i] == v[j]) dup = 1;
      end while (dup);
    end
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 12) $display("FAIL %s", what); end
  endtask

  int k;
  int s [KMAX], a [KMAX];
  int sc [MAX_E];
  int t0;
  int nrep = 0, nhit = 0;

  initial begin
    for (int j = 0; j < KMAX; j++) begin sel[j] = 0; act[j] = 0; ht_wr_data[j] = 0; end
    cfg_k = 8;
    repeat (3) @(posedge clk); rst_n = 1;
    // load CCT: distinct candidates per row, random confidences
    for (int e = 0; e < MAX_E; e++) begin
      int v [KMAX];
      pick(CAND, v);
      @(negedge clk); cct_wr_en = 1; cct_wr_idx = e[5:0];
      for (int c = 0; c < CAND; c++) begin
        m_idx[e][c] = v[c]; m_conf[e][c] = $urandom_range(0, 3);
        cct_wr_row[c] = '{idx: expert_t'(v[c]), conf: conf_t'(m_conf[e][c])};
      end
    end
    @(negedge clk); cct_wr_en = 0;
    pick(KMAX, m_ht);
    ht_wr_en = 1; for (int j = 0; j < KMAX; j++) ht_wr_data[j] = expert_t'(m_ht[j]);
    @(negedge clk); ht_wr_en = 0;

    for (int it = 0; it < 40; it++) begin
      k = (it % 3 == 2) ? 4 : 8;
      cfg_k = 4'(k);
      // ---- predict
      pick(k, s);
      for (int j = 0; j < KMAX; j++) sel[j] = expert_t'(s[j]);
      for (int e = 0; e < MAX_E; e++) sc[e] = 0;
      for (int j = 0; j < k; j++) for (int c = 0; c < CAND; c++) sc[m_idx[s[j]][c]] += m_conf[s[j]][c];
      for (int j = 0; j < k; j++) sc[m_ht[j]] += 2;
      @(negedge clk); pred_start = 1; t0 = cyc;
      @(negedge clk); pred_start = 0;
      while (!pred_done) @(negedge clk);
      check(cyc - t0 == k + 2, $sformatf("pred latency %0d", cyc - t0));
      for (int e = 0; e < MAX_E; e++) check(pred_set[e] == (sc[e] >= 2), $sformatf("it%0d pred e%0d score %0d", it, e, sc[e]));
      // ---- update with actual selection (half overlaps the prediction)
      pick(k, a);
      for (int j = 0; j < k; j++) if ($urandom_range(0, 1)) a[j] = m_idx[s[0]][j];
      for (int j = 0; j < k; j++) for (int i = 0; i < j; i++) if (a[i] == a[j]) begin
        // re-draw duplicates
        bit dup;
        do begin a[j] = $urandom_range(0, MAX_E - 1); dup = 0; for (int q = 0; q < j; q++) if (a[q] == a[j]) dup = 1; end while (dup);
      end
      for (int j = 0; j < KMAX; j++) act[j] = expert_t'(a[j]);
      for (int r = 0; r < k; r++) begin
        int e; bit used [KMAX];
        e = s[r];
        for (int j = 0; j < KMAX; j++) begin
          used[j] = (j >= k);
          for (int c = 0; c < CAND; c++) if (m_idx[e][c] == a[j]) used[j] = 1;
        end
        for (int c = 0; c < CAND; c++) begin
          bit hit; hit = 0;
          for (int j = 0; j < k; j++) if (a[j] == m_idx[e][c]) hit = 1;
          if (hit) begin nhit++; if (m_conf[e][c] < 3) m_conf[e][c]++; end
          else if (m_conf[e][c] > 0) m_conf[e][c]--;
          else for (int j = 0; j < KMAX; j++) if (!used[j]) begin
            m_idx[e][c] = a[j]; m_conf[e][c] = 2; used[j] = 1; nrep++; break;
          end
        end
      end
      for (int j = 0; j < KMAX; j++) m_ht[j] = a[j];
      @(negedge clk); upd_start = 1;
      @(negedge clk); upd_start = 0;
      while (!upd_done) @(negedge clk);
      @(negedge clk);
      for (int e = 0; e < MAX_E; e++) begin
        cct_rd_idx = e[5:0]; #1;
        for (int c = 0; c < CAND; c++)
          check(cct_rd_row[c].idx == expert_t'(m_idx[e][c]) && cct_rd_row[c].conf == conf_t'(m_conf[e][c]),
                $sformatf("it%0d cct[%0d][%0d] got %0d/%0d exp %0d/%0d", it, e, c, cct_rd_row[c].idx, cct_rd_row[c].conf, m_idx[e][c], m_conf[e][c]));
      end
      for (int j = 0; j < k; j++) check(ht[j].idx == expert_t'(m_ht[j]) && ht[j].conf == 2'b10, "ht");
    end
    check(nrep > 0, "no replacement exercised");
    check(nhit > 0, "no hit exercised");
    $display("replacements=%0d hits=%0d", nrep, nhit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
