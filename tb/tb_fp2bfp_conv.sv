// tb_fp2bfp_conv -- random blocks (wide and narrow exponent spread, zeros)
// through the FP-to-BFP converter, checked against a reference model,
// including the one-cycle latency.
module tb_fp2bfp_conv;
  import bfp_pkg::*;
  localparam int unsigned N = 16;
  logic clk = 0, rst_n = 0, in_valid, out_valid;
  bf16_t fp_in[N];
  mant_t mant_out[N];
  exp_t e_sh_out;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  fp2bfp_conv #(.N(N)) dut (.*);
  `include "bfp_ref.svh"
  initial begin
    bf16_t v[N];
    in_valid = 0;
    foreach (fp_in[i]) fp_in[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int spread, e;
      spread = (t % 3 == 0) ? 20 : 4;
      foreach (v[i]) begin
        v[i].sign = 1'($urandom_range(1));
        v[i].exp  = 8'(100 + $urandom_range(spread));
        v[i].frac = 7'($urandom);
        if ($urandom_range(9) == 0) v[i] = '0;
      end
      @(negedge clk);
      in_valid = 1; fp_in = v;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL: latency"); end
      e = ref_emax(v, N);
      checks++;
      if (int'(e_sh_out) != e) begin failures++; $display("FAIL: e_sh %0d exp %0d", e_sh_out, e); end
      for (int i = 0; i < N; i++) begin
        checks++;
        if (int'(mant_out[i]) != ref_mant(v[i], e)) begin
          failures++;
          $display("FAIL: m[%0d]=%0d exp %0d", i, mant_out[i], ref_mant(v[i], e));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
