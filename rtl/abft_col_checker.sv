// abft_col_checker -- result accumulator and comparator of one array column.
//
// Sums the computed results of its column (data_valid, one per cycle) and
// latches the resultant checksum produced by the array (chk_valid; before
// the data in OS mode, after it in WS mode).  On cmp it compares the two
// modulo 2^ACC_W, registers err (high for one cycle on a mismatch) and
// cmp_done, and clears itself for the next tile.  clr also clears it.
// Checking takes one extra cycle after the last value, as in the paper.
module abft_col_checker
  import bfp_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  input  logic data_valid,
  input  acc_t data,
  input  logic chk_valid,
  input  acc_t chk,
  input  logic cmp,
  output logic err,
  output logic cmp_done
);
  acc_t sum, chk_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum      <= '0;
      chk_r    <= '0;
      err      <= 1'b0;
      cmp_done <= 1'b0;
    end else begin
      err      <= 1'b0;
      cmp_done <= 1'b0;
      if (clr) begin
        sum   <= '0;
        chk_r <= '0;
      end else if (cmp) begin
        err      <= (sum != chk_r);
        cmp_done <= 1'b1;
        sum      <= '0;
        chk_r    <= '0;
      end else begin
        if (data_valid) sum   <= sum + data;
        if (chk_valid)  chk_r <= chk;
      end
    end
  end
endmodule
