// tb_bfp2fp_conv -- random accumulator values (all magnitudes, zero,
// extremes) and exponent sums (including under/overflow) through the
// BFP-to-FP converter, checked against a reference packing and, where
// the result is normal, against the real value acc * 2^(esum-266).
module tb_bfp2fp_conv;
  import bfp_pkg::*;
  localparam int unsigned N = 8;
  logic clk = 0, rst_n = 0, in_valid, out_valid;
  acc_t acc_in[N];
  esum_t esum_in[N];
  fp32_t fp_out[N];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  bfp2fp_conv #(.N(N)) dut (.*);
  `include "bfp_ref.svh"
  function automatic real pow2r(input int n);
    real r;
    r = 1.0;
    if (n >= 0) for (int k = 0; k < n; k++) r = r * 2.0;
    else        for (int k = 0; k < -n; k++) r = r / 2.0;
    return r;
  endfunction
  initial begin
    longint av[N];
    int ev[N];
    fp32_t e;
    real x, y;
    in_valid = 0;
    foreach (acc_in[i]) begin acc_in[i] = '0; esum_in[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < N; i++) begin
        int sh;
        sh = $urandom_range(21);
        av[i] = longint'($urandom_range((1 << sh) - 1)) * (($urandom_range(1) == 1) ? -1 : 1);
        if (t == 0) av[i] = (i % 2 == 0) ? -(longint'(1) << 21) : (longint'(1) << 21) - 1;
        ev[i] = (t % 5 == 0) ? $urandom_range(511) : 230 + $urandom_range(60);
        acc_in[i] = acc_t'(av[i]);
        esum_in[i] = esum_t'(ev[i]);
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL latency"); end
      for (int i = 0; i < N; i++) begin
        e = ref_fp32(av[i], ev[i]);
        checks++;
        if (fp_out[i] !== e) begin
          failures++;
          $display("FAIL acc=%0d esum=%0d got %h exp %h", av[i], ev[i], fp_out[i], e);
        end
        if (e.exp != 0 && e.exp != 8'hFF) begin
          x = real'(av[i]) * pow2r(ev[i] - 266);
          y = (fp_out[i].sign ? -1.0 : 1.0) * (1.0 + real'(fp_out[i].frac) / 8388608.0)
              * pow2r(int'(fp_out[i].exp) - 127);
          checks++;
          if (x != y) begin failures++; $display("FAIL value %g vs %g", x, y); end
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
