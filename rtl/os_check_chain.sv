// os_check_chain -- one stage of the left-edge accumulation chain (OS).
//
// In output-stationary mode element k of A row i enters array row i at
// cycle k + i.  Stage i adds the value entering its row (a_in) to the sum
// handed down by stage i-1 one cycle earlier and registers the result, so
// the chain's last stage delivers sum_i A(i, k) -- the check vector -- to
// the check-PE row exactly in step with the skewed stream ("phase-aligned
// with the array latency").  clr zeroes the stage.  One register stage.
module os_check_chain
  import bfp_pkg::*;
#(
  parameter int unsigned A_W = MANT_W + 7
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clr,
  input  logic signed [A_W-1:0] sum_in,
  input  mant_t                 a_in,
  output logic signed [A_W-1:0] sum_out
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   sum_out <= '0;
    else if (clr) sum_out <= '0;
    else          sum_out <= sum_in + A_W'(a_in);
  end
endmodule
