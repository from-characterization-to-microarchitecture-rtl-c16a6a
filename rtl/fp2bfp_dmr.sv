// fp2bfp_dmr -- dual-modular-redundant FP-to-BFP converter.
//
// Two identical fp2bfp_conv copies convert the same block in lockstep; a
// bitwise comparator checks every output bit (all mantissas and the shared
// exponent) whenever the copies' outputs are valid and raises err for that
// cycle.  The paper chooses DMR with a bitwise consistency check for the
// format converters because they are a tiny share of the area.  Copy 0
// drives the outputs.  A saboteur on copy 0's output of lane fi.col
// (mask applied to that lane's mantissa) lets tests inject a fault.
//
// Timing: outputs and err one cycle after in_valid (same as fp2bfp_conv).
module fp2bfp_dmr
  import bfp_pkg::*;
#(
  parameter int unsigned N = 128
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  bf16_t  fp_in   [N],
  input  fault_t fi,
  output logic   out_valid,
  output mant_t  mant_out[N],
  output exp_t   e_sh_out,
  output logic   err
);
  logic  v0, v1;
  mant_t m0[N], m1[N];
  exp_t  e0, e1;

  fp2bfp_conv #(.N(N)) u_copy0 (
    .clk, .rst_n, .in_valid, .fp_in,
    .out_valid(v0), .mant_out(m0), .e_sh_out(e0));
  fp2bfp_conv #(.N(N)) u_copy1 (
    .clk, .rst_n, .in_valid, .fp_in,
    .out_valid(v1), .mant_out(m1), .e_sh_out(e1));

  for (genvar i = 0; i < N; i++) begin : g_lane
    saboteur #(.W(MANT_W)) u_sab (
      .d(m0[i]), .en(fi.en && (32'(fi.col) == i)), .kind(fi.kind),
      .mask(fi.mask[MANT_W-1:0]), .q(mant_out[i]));
  end

  assign out_valid = v0;
  assign e_sh_out  = e0;

  // Bitwise consistency check.
  always_comb begin
    logic diff;
    diff = (v0 != v1) || (e0 != e1);
    for (int i = 0; i < N; i++)
      if (mant_out[i] != m1[i]) diff = 1'b1;
    err = (v0 || v1) && diff;
  end
endmodule
