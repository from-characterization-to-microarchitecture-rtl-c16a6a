// exp_unit -- Exponent Unit (EU) of the exponent compute module.
//
// Contents, as in the paper's EU figure: an Exp_A register, an Exp_B
// register, two multiplexers and one adder.
//  * Exp_B register: loaded from the preload bus (preload_we) or, when
//    rotate is high, from the Exp_B register of the unit above; the units'
//    Exp_B registers form a ring for the second computation.
//  * Exp_A register: one stage of the serial A chain; when a_shift is high
//    it latches the Exp_A value of the unit above (the first unit gets the
//    streamed exponent itself).
//  * Adder operand multiplexer: sel_second = 0 selects the broadcast
//    exponent a_bcast (first computation), 1 selects the unit's own Exp_A
//    register (second computation).
//  * sum = operand + Exp_B, ESUM_W bits, combinational ("Exp Sum").
// A saboteur on the sum (fi_en/fi_kind/fi_mask) allows fault injection.
// Register enables and the preload bus are this design's choice; the
// figure gives the multiplexers but not their control.
module exp_unit
  import bfp_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        preload_we,
  input  exp_t        preload_b,
  input  logic        rotate,
  input  exp_t        b_from_above,
  input  logic        a_shift,
  input  exp_t        a_from_above,
  input  exp_t        a_bcast,
  input  logic        sel_second,
  input  logic        fi_en,
  input  fault_kind_e fi_kind,
  input  esum_t       fi_mask,
  output exp_t        exp_a,
  output exp_t        exp_b,
  output esum_t       sum
);
  exp_t  opa;
  esum_t raw;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      exp_a <= '0;
      exp_b <= '0;
    end else begin
      if (preload_we)  exp_b <= preload_b;
      else if (rotate) exp_b <= b_from_above;
      if (a_shift)     exp_a <= a_from_above;
    end
  end

  assign opa = sel_second ? exp_a : a_bcast;
  assign raw = esum_t'(opa) + esum_t'(exp_b);

  saboteur #(.W(ESUM_W)) u_sab (
    .d(raw), .en(fi_en), .kind(fi_kind), .mask(fi_mask), .q(sum));
endmodule
