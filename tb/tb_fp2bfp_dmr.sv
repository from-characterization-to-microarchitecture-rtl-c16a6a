// tb_fp2bfp_dmr -- the DMR FP-to-BFP converter: correct outputs and no
// error when fault-free; err on every injected flip / stuck-at on a lane
// of copy 0 that changes the bit, and no err when a stuck-at matches the
// bit's value.
module tb_fp2bfp_dmr;
  import bfp_pkg::*;
  localparam int unsigned N = 8;
  logic clk = 0, rst_n = 0, in_valid, out_valid, err;
  bf16_t fp_in[N];
  fault_t fi;
  mant_t mant_out[N];
  exp_t e_sh_out;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  fp2bfp_dmr #(.N(N)) dut (.*);
  `include "bfp_ref.svh"
  task automatic check(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin
    bf16_t v[N];
    in_valid = 0; fi = '0;
    foreach (fp_in[i]) fp_in[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int e, lane, bitn;
      bit flips;
      foreach (v[i]) begin
        v[i].sign = 1'($urandom_range(1));
        v[i].exp  = 8'(120 + $urandom_range(6));
        v[i].frac = 7'($urandom);
      end
      lane = $urandom_range(N - 1); bitn = $urandom_range(MANT_W - 1);
      fi = '0;
      if (t % 2 == 1) begin
        fi.en = 1; fi.kind = fault_kind_e'($urandom_range(2));
        fi.col = 8'(lane); fi.mask = 32'(1 << bitn);
      end
      @(negedge clk); in_valid = 1; fp_in = v;
      @(negedge clk); in_valid = 0;
      e = ref_emax(v, N);
      if (!fi.en) begin
        check(!err, "false alarm");
        check(int'(e_sh_out) == e, "shared exponent");
        for (int i = 0; i < N; i++) check(int'(mant_out[i]) == ref_mant(v[i], e), "mantissa");
      end else begin
        logic [MANT_W-1:0] good;
        good = MANT_W'(ref_mant(v[lane], e));
        flips = (fi.kind == FI_FLIP) || (fi.kind == FI_SA0 && good[bitn]) ||
                (fi.kind == FI_SA1 && !good[bitn]);
        check(err == flips, $sformatf("err=%0d expected %0d", err, flips));
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
