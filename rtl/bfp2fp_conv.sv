// bfp2fp_conv -- BFP-to-FP converter for a vector of N results.
//
// Each lane takes a 22-bit two's-complement accumulator value acc and the
// 9-bit exponent sum esum = eA + eB of its row and column blocks; its value
// is acc * 2^(esum - 266) (see bfp_pkg).  As in the paper's converter
// figure, a leading-zero counter (LZC) gives the normalisation distance, a
// shifter moves the leading one to the top, and an exponent update unit
// adds the displacement: FP32 exponent = esum + (21 - lzc) - 139.  The
// 22-bit magnitude fits the FP32 significand, so no rounding is needed.
// Zero gives +0; a result exponent <= 0 flushes to signed zero and >= 255
// saturates to signed infinity (this design's choice; the paper is silent).
//
// Timing: one register stage; out_valid follows in_valid by one cycle.
module bfp2fp_conv
  import bfp_pkg::*;
#(
  parameter int unsigned N = 128
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  acc_t  acc_in [N],
  input  esum_t esum_in[N],
  output logic  out_valid,
  output fp32_t fp_out [N]
);
  localparam int unsigned LZC_W = $clog2(ACC_W + 1);

  fp32_t fp_c[N];

  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic [ACC_W-1:0] mag;
      logic [ACC_W-1:0] norm;
      logic [LZC_W-1:0] lzc;
      logic             found;
      logic signed [11:0] e_new;
      mag = acc_in[i][ACC_W-1] ? (~acc_in[i] + 1'b1) : acc_in[i];
      // LZC
      lzc   = LZC_W'(ACC_W);
      found = 1'b0;
      for (int b = ACC_W - 1; b >= 0; b--) begin
        if (!found && mag[b]) begin
          lzc   = LZC_W'(ACC_W - 1 - b);
          found = 1'b1;
        end
      end
      // normalising shifter
      norm  = mag << lzc;
      // exponent update
      e_new = 12'(signed'({3'b000, esum_in[i]})) + 12'(ACC_W - 1) - 12'(lzc)
              - 12'(OUT_EXP_OFF);
      fp_c[i].sign = acc_in[i][ACC_W-1];
      if (!found) begin
        fp_c[i] = '0;
      end else if (e_new <= 0) begin
        fp_c[i].exp  = '0;
        fp_c[i].frac = '0;
      end else if (e_new >= 255) begin
        fp_c[i].exp  = 8'hFF;
        fp_c[i].frac = '0;
      end else begin
        fp_c[i].exp  = e_new[7:0];
        fp_c[i].frac = {norm[ACC_W-2:0], {(23 - (ACC_W - 1)){1'b0}}};
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < N; i++) fp_out[i] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int i = 0; i < N; i++) fp_out[i] <= fp_c[i];
    end
  end
endmodule
