// tb_bfp_npu_mid -- the BFP NPU core end to end at a mid-sized array
// (DIM = 32), between the small DIM = 8 test and the default 128.
//
// Same test body as tb_bfp_npu_top: random WS and OS tiles checked
// bit-exactly against an independent reference model, the tile latency
// (4*DIM+5 cycles), an all-zero row block, and one injected fault in each
// protected part, each of which must raise its own error flag.  The size
// exercises longer skew chains, a 13-bit checksum path and a 32-entry
// exponent ring.  The default 128 x 128 core is too large to compile and
// run in simulation in reasonable time; it only changes DIM.
module tb_bfp_npu_mid;
  import bfp_pkg::*;
  localparam int unsigned DIM = 32;
  localparam int N_CLEAN = 1;
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
