// sa_pe -- processing element of the mantissa systolic array.
//
// One fixed-point multiply-accumulate cell that supports both dataflows:
//  * WS (weight stationary): w holds one mantissa of B, written by w_we.
//    Each cycle acc <= ps_in + a_in * w, i.e. the partial sum from the PE
//    above plus this PE's product; ps_out = acc goes to the PE below.
//  * OS (output stationary): acc accumulates a_in * b_in every cycle.
//    clr zeroes acc, bias_we adds bias_in (used once after clr to preload
//    the bias matrix C; the check-PE row uses the add to sum a column of
//    C), shift replaces acc by ps_in so results move down and out.
// a_in moves right and b_in moves down, one register each.  The same cell
// serves as an ABFT check-PE in the extra bottom row; its a input then
// carries a checksum, which is why a_in is A_W = MANT_W + log2(DIM) bits.
// Accumulation wraps modulo 2^ACC_W; ordinary results never reach the
// wrap (see bfp_pkg), checksums may, and the checkers compare modulo
// 2^ACC_W, which keeps the check exact.  The paper gives the PE's role;
// its port list and the shared WS/OS cell are this design's choices.
// A saboteur on ps_out allows fault injection into the accumulator.
module sa_pe
  import bfp_pkg::*;
#(
  parameter int unsigned A_W = MANT_W + 7
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  dataflow_e             mode,
  input  logic signed [A_W-1:0] a_in,
  input  mant_t                 b_in,
  input  acc_t                  ps_in,
  input  logic                  w_we,
  input  mant_t                 w_in,
  input  logic                  clr,
  input  logic                  bias_we,
  input  acc_t                  bias_in,
  input  logic                  shift,
  input  logic                  fi_en,
  input  fault_kind_e           fi_kind,
  input  acc_t                  fi_mask,
  output logic signed [A_W-1:0] a_out,
  output mant_t                 b_out,
  output acc_t                  ps_out
);
  mant_t w;
  acc_t  acc;
  mant_t opb;
  logic signed [A_W+MANT_W-1:0] prod;
  acc_t  prod_x;

  // Multiplier operand: the stationary weight (WS) or the moving B (OS).
  // The product is reduced modulo 2^ACC_W (upper bits intentionally unused).
  assign opb    = (mode == DF_WS) ? w : b_in;
  assign prod   = a_in * opb;
  assign prod_x = ACC_W'(prod);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w     <= '0;
      acc   <= '0;
      a_out <= '0;
      b_out <= '0;
    end else begin
      a_out <= a_in;
      b_out <= b_in;
      if (w_we) w <= w_in;
      if (mode == DF_WS)   acc <= ps_in + prod_x;
      else if (clr)        acc <= '0;
      else if (bias_we)    acc <= ps_out + bias_in;
      else if (shift)      acc <= ps_in;
      else                 acc <= ps_out + prod_x;
    end
  end

  saboteur #(.W(ACC_W)) u_sab (
    .d(acc), .en(fi_en), .kind(fi_kind), .mask(fi_mask), .q(ps_out));
endmodule
