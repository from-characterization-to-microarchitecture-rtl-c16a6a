// saboteur -- fault-injection multiplexer on a W-bit register output.
//
// Normally forwards d.  When en is high it outputs d XOR mask (bit flip; a
// transient fault when en is held for one cycle), d with the masked bits
// forced to 0 (stuck-at-0) or forced to 1 (stuck-at-1).  This is the 2:1
// multiplexer saboteur used for RTL fault injection; the flip / stuck-at
// modes follow the paper, the mask-based encoding of the forced bits is
// this design's choice.  Purely combinational.
module saboteur
  import bfp_pkg::*;
#(
  parameter int unsigned W = 8
) (
  input  logic [W-1:0] d,
  input  logic         en,
  input  fault_kind_e  kind,
  input  logic [W-1:0] mask,
  output logic [W-1:0] q
);
  always_comb begin
    q = d;
    if (en) begin
      unique case (kind)
        FI_FLIP: q = d ^ mask;
        FI_SA0:  q = d & ~mask;
        FI_SA1:  q = d | mask;
        default: q = d;
      endcase
    end
  end
endmodule
