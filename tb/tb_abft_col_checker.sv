// tb_abft_col_checker -- feeds columns of results with a correct or a
// corrupted checksum, before or after the data, and checks err and
// cmp_done one cycle after cmp.
module tb_abft_col_checker;
  import bfp_pkg::*;
  logic clk = 0, rst_n = 0, clr, data_valid, chk_valid, cmp, err, cmp_done;
  acc_t data, chk;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  abft_col_checker dut (.*);
  initial begin
    clr = 0; data_valid = 0; chk_valid = 0; cmp = 0; data = 0; chk = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      acc_t sum;
      bit bad, chk_first;
      int n;
      acc_t vals[16];
      bad = 1'($urandom_range(1)); chk_first = 1'($urandom_range(1));
      n = 1 + $urandom_range(10);
      sum = '0;
      for (int i = 0; i < n; i++) begin
        vals[i] = acc_t'($urandom);
        sum = sum + vals[i];
      end
      if (chk_first) begin  // OS order: checksum, then data
        chk_valid = 1; chk = bad ? sum ^ acc_t'(1 << $urandom_range(ACC_W - 1)) : sum;
        @(negedge clk); chk_valid = 0;
      end
      for (int i = 0; i < n; i++) begin
        data_valid = 1; data = vals[i];
        @(negedge clk);
      end
      data_valid = 0;
      if (!chk_first) begin  // WS order: data, then checksum
        chk_valid = 1; chk = bad ? sum ^ acc_t'(1 << $urandom_range(ACC_W - 1)) : sum;
        @(negedge clk); chk_valid = 0;
      end
      cmp = 1;
      @(negedge clk); cmp = 0;
      checks += 2;
      if (err != bad) begin failures++; $display("FAIL err=%0d bad=%0d", err, bad); end
      if (!cmp_done) begin failures++; $display("FAIL cmp_done"); end
      @(negedge clk);
      checks++;
      if (err) begin failures++; $display("FAIL err not a pulse"); end
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
