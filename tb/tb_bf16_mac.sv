// tb_bf16_mac: random bfloat16 operands and fp32 accumulators; the result is
// compared with a double-precision reference (relative error below 2^-21,
// which covers fp32 truncation), plus exact integer cases and zero inputs.
module tb_bf16_mac;
  import stmoe_pkg::*;
  import tb_util_pkg::*;
  bf16_t a, b; fp32_t acc_in, acc_out;
  int checks = 0, failures = 0;
  bf16_mac dut (.*);
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    real r, e, tol;
    for (int i = 0; i < 2000; i++) begin
      a = {1'($urandom), 8'($urandom_range(100, 150)), 7'($urandom)};
      b = {1'($urandom), 8'($urandom_range(100, 150)), 7'($urandom)};
      acc_in = {1'($urandom), 8'($urandom_range(90, 160)), 23'($urandom)};
      if (i % 10 == 0) acc_in = 0;
      #1;
      e = bf2real(a) * bf2real(b) + fp2real(acc_in);
      r = fp2real(acc_out);
      tol = (e < 0 ? -e : e) * 4.8e-7 + 1e-30;
      // cancellation: error bounded by the larger operand
      if ((bf2real(a) * bf2real(b) < 0) != (fp2real(acc_in) < 0)) begin
        real m1, m2;
        m1 = bf2real(a) * bf2real(b); m2 = fp2real(acc_in);
        m1 = m1 < 0 ? -m1 : m1; m2 = m2 < 0 ? -m2 : m2;
        tol = (m1 > m2 ? m1 : m2) * 4.8e-7 + 1e-30;
      end
      checks++;
      if ((r - e) > tol || (e - r) > tol) begin
        failures++;
        if (failures < 10) $display("FAIL a=%h b=%h acc=%h got %g exp %g", a, b, acc_in, r, e);
      end
    end
    for (int i = 0; i < 500; i++) begin
      int x, y, z;
      x = int'($urandom_range(0, 30)) - 15; y = int'($urandom_range(0, 30)) - 15; z = int'($urandom_range(0, 200)) - 100;
      a = int2bf(x); b = int2bf(y); acc_in = {int2bf(z), 16'h0};
      #1;
      checks++;
      if (fp2real(acc_out) != real'(x * y + z)) begin
        failures++;
        if (failures < 10) $display("FAIL %0d*%0d+%0d got %g", x, y, z, fp2real(acc_out));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
