// tb_abft_ingress -- streams random columns through the ingress unit and
// checks the forwarded values, the zero output when idle and the inserted
// checksum after each column.
module tb_abft_ingress;
  import bfp_pkg::*;
  localparam int unsigned A_W = 12;
  logic clk = 0, rst_n = 0, in_valid, in_chk;
  mant_t a_in;
  logic signed [A_W-1:0] a_out;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  abft_ingress #(.A_W(A_W)) dut (.*);
  task automatic check(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin
    in_valid = 0; in_chk = 0; a_in = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      int sum, n;
      sum = 0; n = 1 + $urandom_range(15);
      for (int i = 0; i < n; i++) begin
        in_valid = 1; a_in = mant_t'($urandom);
        sum += int'(a_in);
        @(posedge clk); #1;
        check(int'(a_out) == int'(a_in), "forward");
        @(negedge clk);
      end
      in_valid = 0; in_chk = 1;
      @(posedge clk); #1;
      check(int'(a_out) == sum, $sformatf("checksum %0d exp %0d", a_out, sum));
      @(negedge clk); in_chk = 0;
      @(posedge clk); #1;
      check(a_out == 0, "idle zero");
      @(negedge clk);
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
