// abft_ingress -- adder-register unit at the ingress of one array row (WS).
//
// In weight-stationary mode the rows of A stream into the array, element
// k of each row entering array row k.  This unit sits in front of array
// row k: while in_valid is high it forwards a_in and adds it to its
// running sum; when in_chk is high (the cycle after the last row) it
// sends the sum instead, which is element k of the check vector
// (the column sums of A) appended to the tail of A, and clears the sum.
// Otherwise it sends 0.  Output is registered (one cycle), A_W bits wide
// so the sum cannot overflow for up to 2^(A_W-MANT_W) rows.
module abft_ingress
  import bfp_pkg::*;
#(
  parameter int unsigned A_W = MANT_W + 7
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic                  in_chk,
  input  mant_t                 a_in,
  output logic signed [A_W-1:0] a_out
);
  logic signed [A_W-1:0] sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum   <= '0;
      a_out <= '0;
    end else if (in_chk) begin
      a_out <= sum;
      sum   <= '0;
    end else if (in_valid) begin
      a_out <= A_W'(a_in);
      sum   <= sum + A_W'(a_in);
    end else begin
      a_out <= '0;
    end
  end
endmodule
