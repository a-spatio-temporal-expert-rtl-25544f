// mac_array: the PE's unified N x N MAC array, organised as a systolic array
// with one stationary operand.
//
// Cell (r,c) holds a stationary bfloat16 S[r][c].  A streamed vector v
// (indexed by the reduction index r) enters row r after an r-cycle skew,
// moves right one column per cycle, and the partial sums move down one row
// per cycle.  Column c therefore produces out[c] = sum_r v[r] * S[r][c];
// a de-skew stage aligns all columns so that one whole output vector leaves
// per cycle.  Latency from in_valid to out_valid is 2*N-1 cycles; throughput is
// one vector per cycle.
//
// The stationary operand is loaded one column per cycle (ld_en, ld_col,
// ld_data: ld_data[r] -> S[r][ld_col]).  The same array serves both
// dataflows of the PE: for weight-stationary the columns are weight columns
// and the streamed vectors are tokens; for input-stationary the columns are
// tokens and the streamed vectors are weight columns.  Which one is used is
// decided by the PE's local controller.
//
// Paper: N x N MAC array, systolic organisation, neighbours passing partial
// sums and reused operands (Fig. 5, Sec. 4.3.3).  The column-wise load, the
// skew/de-skew registers and the fp32 partial sums are this design's choices.
module mac_array
  import stmoe_pkg::*;
#(
  parameter int unsigned N = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // stationary operand load
  input  logic                 ld_en,
  input  logic [$clog2(N)-1:0] ld_col,
  input  bf16_t                ld_data [N],
  // streamed operand
  input  logic                 in_valid,
  input  bf16_t                in_vec  [N],
  // results
  output logic                 out_valid,
  output fp32_t                out_vec [N]
);
  localparam int unsigned LAT = 2 * N - 1;

  bf16_t a_w  [N][N+1];     // a_w[r][c]: operand entering cell (r,c)
  fp32_t p_w  [N+1][N];     // p_w[r][c]: partial sum entering cell (r,c)
  logic [LAT-1:0] vld;

  for (genvar r = 0; r < N; r++) begin : g_row
    // skew: row r enters r cycles late
    if (r == 0) begin : g_noskew
      assign a_w[0][0] = in_valid ? in_vec[0] : 16'h0000;
    end else begin : g_skew
      bf16_t sh [r];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) for (int j = 0; j < r; j++) sh[j] <= '0;
        else begin
          sh[0] <= in_valid ? in_vec[r] : 16'h0000;
          for (int j = 1; j < r; j++) sh[j] <= sh[j-1];
        end
      end
      assign a_w[r][0] = sh[r-1];
    end
    for (genvar c = 0; c < N; c++) begin : g_col
      mac_cell u_cell (
        .clk    (clk),
        .rst_n  (rst_n),
        .ld_en  (ld_en && (ld_col == c[$clog2(N)-1:0])),
        .ld_data(ld_data[r]),
        .a_in   (a_w[r][c]),
        .p_in   (p_w[r][c]),
        .a_out  (a_w[r][c+1]),
        .p_out  (p_w[r+1][c])
      );
    end
  end

  for (genvar c = 0; c < N; c++) begin : g_out
    assign p_w[0][c] = 32'd0;
    // column c leaves the array N+c-1 cycles after entry; delay it N-1-c more
    if (c == N - 1) begin : g_nodsk
      assign out_vec[c] = p_w[N][c];
    end else begin : g_dsk
      fp32_t dq [N-1-c];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) for (int j = 0; j < N-1-c; j++) dq[j] <= '0;
        else begin
          dq[0] <= p_w[N][c];
          for (int j = 1; j < N-1-c; j++) dq[j] <= dq[j-1];
        end
      end
      assign out_vec[c] = dq[N-2-c];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[LAT-2:0], in_valid};
  end
  assign out_valid = vld[LAT-1];
endmodule
