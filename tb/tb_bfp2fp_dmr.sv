// tb_bfp2fp_dmr -- the DMR BFP-to-FP converter: correct outputs and no
// error when fault-free, err whenever an injected fault changes a bit of
// copy 0's output.
module tb_bfp2fp_dmr;
  import bfp_pkg::*;
  localparam int unsigned N = 8;
  logic clk = 0, rst_n = 0, in_valid, out_valid, err;
  acc_t acc_in[N];
  esum_t esum_in[N];
  fault_t fi;
  fp32_t fp_out[N];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  bfp2fp_dmr #(.N(N)) dut (.*);
  `include "bfp_ref.svh"
  task automatic check(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin
    longint av[N];
    int ev[N];
    in_valid = 0; fi = '0;
    foreach (acc_in[i]) begin acc_in[i] = '0; esum_in[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int lane, bitn;
      for (int i = 0; i < N; i++) begin
        av[i] = longint'($urandom_range(2000000)) - 1000000;
        ev[i] = 240 + $urandom_range(30);
        acc_in[i] = acc_t'(av[i]); esum_in[i] = esum_t'(ev[i]);
      end
      lane = $urandom_range(N - 1); bitn = $urandom_range(31);
      fi = '0;
      if (t % 2 == 1) begin
        fi.en = 1; fi.kind = fault_kind_e'($urandom_range(2));
        fi.col = 8'(lane); fi.mask = 32'(1) << bitn;
      end
      in_valid = 1;
      @(negedge clk); in_valid = 0;
      if (!fi.en) begin
        check(!err, "false alarm");
        for (int i = 0; i < N; i++) check(fp_out[i] == ref_fp32(av[i], ev[i]), "value");
      end else begin
        logic [31:0] good;
        bit flips;
        good = ref_fp32(av[lane], ev[lane]);
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
