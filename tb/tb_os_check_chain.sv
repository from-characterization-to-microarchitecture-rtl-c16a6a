// tb_os_check_chain -- a chain of R stages fed with skewed columns, as in
// the array: stage i receives A(i, k) at cycle k + i.  Checks that the last
// stage delivers sum_i A(i, k) at cycle k + R.
module tb_os_check_chain;
  import bfp_pkg::*;
  localparam int unsigned A_W = 12;
  localparam int unsigned R = 5;
  localparam int unsigned K = 7;
  logic clk = 0, rst_n = 0, clr;
  logic signed [A_W-1:0] s[R+1];
  mant_t a[R];
  int checks = 0, failures = 0, cyc = 0;
  int A[R][K];
  always #5 clk = ~clk;
  assign s[0] = '0;
  for (genvar i = 0; i < R; i++) begin : g
    os_check_chain #(.A_W(A_W)) u (.clk, .rst_n, .clr, .sum_in(s[i]), .a_in(a[i]),
                                   .sum_out(s[i+1]));
  end
  initial begin
    clr = 0;
    foreach (a[i]) a[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 10; rep++) begin
      foreach (A[i, k]) A[i][k] = int'($urandom_range(254)) - 127;
      clr = 1; @(negedge clk); clr = 0;
      for (int t = 0; t < K + R + 1; t++) begin
        for (int i = 0; i < R; i++)
          a[i] = (t - i >= 0 && t - i < K) ? mant_t'(A[i][t - i]) : '0;
        @(posedge clk); #1;
        // after cycle t the last stage holds column k = t - (R-1)
        if (t - (R - 1) >= 0 && t - (R - 1) < K) begin
          int e;
          e = 0;
          for (int i = 0; i < R; i++) e += A[i][t - (R - 1)];
          checks++;
          if (int'(s[R]) != e) begin failures++; $display("FAIL col %0d: %0d exp %0d", t - R + 1, s[R], e); end
        end
        @(negedge clk);
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
