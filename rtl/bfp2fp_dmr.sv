// bfp2fp_dmr -- dual-modular-redundant BFP-to-FP converter.
//
// Two identical bfp2fp_conv copies normalise the same result vector in
// lockstep and a bitwise comparator checks all FP32 output bits while the
// outputs are valid, raising err for that cycle (DMR with bitwise
// consistency check, as the paper chooses for the converters).  Copy 0
// drives the outputs; a saboteur on copy 0's lane fi.col (mask on the FP32
// word) allows fault injection.
//
// Timing: outputs and err one cycle after in_valid.
module bfp2fp_dmr
  import bfp_pkg::*;
#(
  parameter int unsigned N = 128
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  acc_t   acc_in [N],
  input  esum_t  esum_in[N],
  input  fault_t fi,
  output logic   out_valid,
  output fp32_t  fp_out [N],
  output logic   err
);
  logic  v0, v1;
  fp32_t f0[N], f1[N];

  bfp2fp_conv #(.N(N)) u_copy0 (
    .clk, .rst_n, .in_valid, .acc_in, .esum_in,
    .out_valid(v0), .fp_out(f0));
  bfp2fp_conv #(.N(N)) u_copy1 (
    .clk, .rst_n, .in_valid, .acc_in, .esum_in,
    .out_valid(v1), .fp_out(f1));

  for (genvar i = 0; i < N; i++) begin : g_lane
    saboteur #(.W(32)) u_sab (
      .d(f0[i]), .en(fi.en && (32'(fi.col) == i)), .kind(fi.kind),
      .mask(fi.mask), .q(fp_out[i]));
  end

  assign out_valid = v0;

  always_comb begin
    logic diff;
    diff = (v0 != v1);
    for (int i = 0; i < N; i++)
      if (fp_out[i] != f1[i]) diff = 1'b1;
    err = (v0 || v1) && diff;
  end
endmodule
