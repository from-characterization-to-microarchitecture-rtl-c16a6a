// tb_saboteur -- exhaustive-ish random test of the fault-injection mux.
module tb_saboteur;
  import bfp_pkg::*;
  localparam int unsigned W = 12;
  logic [W-1:0] d, mask, q, e;
  logic en;
  fault_kind_e kind;
  int checks = 0, failures = 0;
  saboteur #(.W(W)) dut (.*);
  initial begin
    for (int t = 0; t < 400; t++) begin
      d = W'($urandom); mask = W'(1 << $urandom_range(W - 1));
      en = 1'($urandom_range(1));
      kind = fault_kind_e'($urandom_range(2));
      #1;
      if (!en) e = d;
      else if (kind == FI_FLIP) e = d ^ mask;
      else if (kind == FI_SA0) e = d & ~mask;
      else e = d | mask;
      checks++;
      if (q !== e) begin failures++; $display("FAIL d=%h m=%h k=%0d q=%h", d, mask, kind, q); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
