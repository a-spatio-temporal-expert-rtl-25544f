// mac_cell: one cell of the systolic MAC array.
//
// Holds one stationary bfloat16 operand (written when ld_en is high), passes
// the streamed operand to its right-hand neighbour and the partial sum to
// the cell below, both through one register stage:
//   a_out <= a_in;   p_out <= p_in + a_in * stat.
// Arithmetic is done by bf16_mac.
module mac_cell
  import stmoe_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  ld_en,
  input  bf16_t ld_data,
  input  bf16_t a_in,
  input  fp32_t p_in,
  output bf16_t a_out,
  output fp32_t p_out
);
  bf16_t stat;
  fp32_t sum;

  bf16_mac u_mac (.a(a_in), .b(stat), .acc_in(p_in), .acc_out(sum));

  always_ff @(posedge clk) if (ld_en) stat <= ld_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out <= '0;
      p_out <= '0;
    end else begin
      a_out <= a_in;
      p_out <= sum;
    end
  end
endmodule
