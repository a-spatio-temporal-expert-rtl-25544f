// tb_mac_array: loads random integer-valued stationary tiles, streams
// back-to-back vectors and compares every output vector with an exact
// integer matrix-vector product.  Also checks the 2N-1 cycle latency and
// one-vector-per-cycle throughput.
module tb_mac_array;
  import stmoe_pkg::*;
  import tb_util_pkg::*;
  localparam int N = 8;
  localparam int NV = 20;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ld_en = 0; logic [$clog2(N)-1:0] ld_col = 0; bf16_t ld_data [N];
  logic in_valid = 0; bf16_t in_vec [N];
  logic out_valid; fp32_t out_vec [N];
  int checks = 0, failures = 0;
  int S [N][N]; int V [NV][N];
  int nout = 0; int t_in0 = -1, t_out0 = -1, cyc = 0;

  mac_array #(.N(N)) dut (.*);

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #200000; failures++; $display("watchdog"); 
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    if (t_out0 < 0) t_out0 = cyc;
    for (int c = 0; c < N; c++) begin
      int exp_v; exp_v = 0;
      for (int r = 0; r < N; r++) exp_v += V[nout][r] * S[r][c];
      checks++;
      if (fp2real(out_vec[c]) != real'(exp_v)) begin
        failures++;
        if (failures < 10) $display("mismatch v%0d c%0d got %f exp %0d", nout, c, fp2real(out_vec[c]), exp_v);
      end
    end
    nout++;
  end

  initial begin
    for (int i = 0; i < N; i++) begin ld_data[i] = 0; in_vec[i] = 0; end
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) S[r][c] = int'($urandom_range(0, 14)) - 7;
    for (int v = 0; v < NV; v++) for (int r = 0; r < N; r++) V[v][r] = int'($urandom_range(0, 14)) - 7;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int c = 0; c < N; c++) begin
      @(negedge clk); ld_en = 1; ld_col = c[$clog2(N)-1:0];
      for (int r = 0; r < N; r++) ld_data[r] = int2bf(S[r][c]);
    end
    @(negedge clk); ld_en = 0;
    for (int v = 0; v < NV; v++) begin
      @(negedge clk); in_valid = 1;
      if (v == 0) t_in0 = cyc;
      for (int r = 0; r < N; r++) in_vec[r] = int2bf(V[v][r]);
    end
    @(negedge clk); in_valid = 0;
    repeat (3 * N + 5) @(posedge clk);
    checks++; if (nout != NV) begin failures++; $display("got %0d vectors", nout); end
    checks++; if (t_out0 - t_in0 != 2 * N - 1) begin failures++; $display("latency %0d", t_out0 - t_in0); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
