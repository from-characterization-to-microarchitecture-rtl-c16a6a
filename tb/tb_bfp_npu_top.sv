// tb_bfp_npu_top -- end-to-end test of the BFP NPU core at DIM = 8.
//
// Random BF16 tiles in both dataflows, checked bit-exactly against an
// independent model, plus fault-injection tiles that must trip each of
// the four detectors (converter DMR, mantissa ABFT, exponent
// recompute-and-compare with a stuck-at fault, output converter DMR).
// Checks the tile latency (4*DIM+5 cycles from start to done) and counts
// every mechanism, failing if one never happened.
module tb_bfp_npu_top;
  import bfp_pkg::*;
  localparam int unsigned DIM = 8;
  localparam int N_CLEAN = 4;
  localparam bit DO_FAULTS = 1'b1;
  localparam int WATCHDOG = 40000;
  `include "npu_tb_body.svh"
  bfp_npu_top #(.DIM(DIM)) dut (.*);
  // watchdog
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
