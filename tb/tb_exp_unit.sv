// tb_exp_unit -- one Exponent Unit: preload, ring input, A-chain shift,
// both adder operand selections and the saboteur, against expected values.
module tb_exp_unit;
  import bfp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic preload_we, rotate, a_shift, sel_second, fi_en;
  exp_t preload_b, b_from_above, a_from_above, a_bcast, exp_a, exp_b;
  fault_kind_e fi_kind;
  esum_t fi_mask, sum;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  exp_unit dut (.*);
  task automatic check(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin
    int ma, mb;
    preload_we = 0; rotate = 0; a_shift = 0; sel_second = 0; fi_en = 0;
    preload_b = 0; b_from_above = 0; a_from_above = 0; a_bcast = 0;
    fi_kind = FI_FLIP; fi_mask = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    ma = 0; mb = 0;
    for (int t = 0; t < 500; t++) begin
      preload_we = 1'($urandom_range(3) == 0);
      rotate = 1'($urandom_range(1));
      a_shift = 1'($urandom_range(1));
      sel_second = 1'($urandom_range(1));
      fi_en = 1'($urandom_range(7) == 0);
      fi_mask = esum_t'(1 << $urandom_range(ESUM_W - 1));
      preload_b = exp_t'($urandom); b_from_above = exp_t'($urandom);
      a_from_above = exp_t'($urandom); a_bcast = exp_t'($urandom);
      #1;
      check(sum == ((esum_t'(sel_second ? ma : int'(a_bcast)) + esum_t'(mb)) ^ (fi_en ? fi_mask : '0)),
            "sum");
      @(posedge clk);
      if (preload_we) mb = int'(preload_b); else if (rotate) mb = int'(b_from_above);
      if (a_shift) ma = int'(a_from_above);
      #1;
      check(int'(exp_a) == ma && int'(exp_b) == mb, "registers");
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
