// tb_sa_pe -- one PE in both dataflows against a cycle model: WS
// (ps_in + a*w), OS accumulate, clear, bias add, shift, pass-through of
// a and b, and the modulo-2^ACC_W wrap.
module tb_sa_pe;
  import bfp_pkg::*;
  localparam int unsigned A_W = 12;
  logic clk = 0, rst_n = 0;
  dataflow_e mode;
  logic signed [A_W-1:0] a_in, a_out;
  mant_t b_in, w_in, b_out;
  acc_t ps_in, bias_in, fi_mask, ps_out;
  logic w_we, clr, bias_we, shift, fi_en;
  fault_kind_e fi_kind;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  sa_pe #(.A_W(A_W)) dut (.*);
  task automatic check(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin
    longint acc, w, pa, pb;
    w_we = 0; clr = 0; bias_we = 0; shift = 0; fi_en = 0; fi_kind = FI_FLIP; fi_mask = 0;
    a_in = 0; b_in = 0; ps_in = 0; bias_in = 0; w_in = 0; mode = DF_WS;
    repeat (2) @(negedge clk);
    rst_n = 1;
    acc = 0; w = 0;
    for (int t = 0; t < 800; t++) begin
      mode = dataflow_e'(t / 200 % 2);
      a_in = A_W'($urandom); b_in = mant_t'($urandom); ps_in = acc_t'($urandom);
      w_in = mant_t'($urandom); bias_in = acc_t'($urandom);
      w_we = 1'($urandom_range(7) == 0);
      clr = 1'($urandom_range(15) == 0);
      bias_we = 1'($urandom_range(7) == 0);
      shift = 1'($urandom_range(7) == 0);
      pa = longint'(a_in); pb = longint'(b_in);
      @(posedge clk);
      if (mode == DF_WS) acc = longint'(ps_in) + pa * w;
      else if (clr) acc = 0;
      else if (bias_we) acc = acc + longint'(bias_in);
      else if (shift) acc = longint'(ps_in);
      else acc = acc + pa * pb;
      acc = longint'(acc_t'(acc));
      if (w_we) w = longint'(w_in);
      #1;
      check(longint'(ps_out) == acc, $sformatf("acc %0d exp %0d", ps_out, acc));
      check(longint'(a_out) == pa && longint'(b_out) == pb, "a/b pass");
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
