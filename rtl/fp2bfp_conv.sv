// fp2bfp_conv -- FP-to-BFP converter for one block of N BF16 values.
//
// Structure (as drawn in the paper's converter figure): a magnitude
// comparator finds the block's maximum exponent, which becomes the shared
// exponent; one subtractor per element forms the shift distance
// e_sh - e_i; one shifter per element right-shifts the significand 1.f by
// that distance (+1, see bfp_pkg) to give the aligned mantissa, which is
// then made two's complement with the element's sign.  Zero and subnormal
// inputs (exponent field 0) give mantissa 0; Inf/NaN are not treated
// specially (not covered by the paper; this design's choice).
//
// Timing: one register stage; out_valid follows in_valid by one cycle.
module fp2bfp_conv
  import bfp_pkg::*;
#(
  parameter int unsigned N = 128
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  bf16_t  fp_in   [N],
  output logic   out_valid,
  output mant_t  mant_out[N],
  output exp_t   e_sh_out
);
  exp_t  e_max;
  mant_t mant_c[N];

  // Magnitude comparator: block maximum exponent.
  always_comb begin
    e_max = '0;
    for (int i = 0; i < N; i++)
      if (fp_in[i].exp > e_max) e_max = fp_in[i].exp;
  end

  // Subtractor + shifter per element.
  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic [EXP_W:0]    shamt;
      logic [FRAC_W:0]   sig;
      logic [FRAC_W:0]   mag;
      sig  = (fp_in[i].exp == '0) ? '0 : {1'b1, fp_in[i].frac};
      shamt = {1'b0, e_max - fp_in[i].exp} + 1'b1;
      mag  = (shamt > (EXP_W+1)'(FRAC_W)) ? '0 : (sig >> shamt);
      mant_c[i] = fp_in[i].sign ? -mant_t'(mag) : mant_t'(mag);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      e_sh_out  <= '0;
      for (int i = 0; i < N; i++) mant_out[i] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        e_sh_out <= e_max;
        for (int i = 0; i < N; i++) mant_out[i] <= mant_c[i];
      end
    end
  end
endmodule
