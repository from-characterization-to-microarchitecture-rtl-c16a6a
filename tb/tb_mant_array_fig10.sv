// tb_mant_array_fig10 -- the 2 x 2 worked example of the ABFT scheme.
//
// A = [1 2; 3 4], B = [5 6; 7 8], bias C = [0 1; 1 0].  The check row of
// A is its column sum [4 6]; the check row of C is [1 1].  Then
// A x B = [19 22; 43 50] with check row [62 72] (WS), and
// A x B + C = [19 23; 44 50] with check row [63 73] (OS).  The test runs
// the array at DIM = 2 in both dataflows, checks the results, that no
// error is flagged, and reads the checksums the check logic produced.
module tb_mant_array_fig10;
  import bfp_pkg::*;
  localparam int unsigned DIM = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  dataflow_e mode;
  logic w_we, clr, bias_we, start, out_valid, busy, done, err;
  logic [0:0] w_col, bias_row, out_row;
  mant_t w_vec[DIM], a_vec[DIM], b_vec[DIM];
  acc_t bias_vec[DIM], out_vec[DIM];
  fault_t fi;
  int checks = 0, failures = 0, n_err = 0;
  mant_array #(.DIM(DIM)) dut (.*);

  int A[2][2] = '{'{1, 2}, '{3, 4}};
  int B[2][2] = '{'{5, 6}, '{7, 8}};
  int C[2][2] = '{'{0, 1}, '{1, 0}};
  int WS_R[2][2] = '{'{19, 22}, '{43, 50}};
  int OS_R[2][2] = '{'{19, 23}, '{44, 50}};
  int WS_CHK[2] = '{62, 72};
  int OS_CHK[2] = '{63, 73};
  acc_t chk_seen[2];

  always @(posedge clk) if (err) n_err++;

  task automatic check(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  task automatic idle();
    w_we = 0; clr = 0; bias_we = 0; start = 0; w_col = 0; bias_row = 0;
    foreach (w_vec[k]) begin w_vec[k] = 0; a_vec[k] = 0; b_vec[k] = 0; bias_vec[k] = 0; end
  endtask

  task automatic run(input dataflow_e m);
    int rows;
    mode = m; rows = 0; n_err = 0;
    if (m == DF_WS) begin
      for (int j = 0; j < 2; j++) begin
        @(negedge clk); w_we = 1; w_col = 1'(j);
        for (int k = 0; k < 2; k++) w_vec[k] = mant_t'(B[k][j]);
      end
    end else begin
      @(negedge clk); clr = 1;
      for (int i = 0; i < 2; i++) begin
        @(negedge clk); clr = 0; bias_we = 1; bias_row = 1'(i);
        for (int j = 0; j < 2; j++) bias_vec[j] = acc_t'(C[i][j]);
      end
    end
    @(negedge clk); idle(); start = 1;
    @(negedge clk); start = 0;
    for (int i = 0; i < 2; i++) begin
      for (int k = 0; k < 2; k++) begin a_vec[k] = mant_t'(A[i][k]); b_vec[k] = mant_t'(B[k][i]); end
      @(negedge clk);
    end
    idle();
    while (!done) begin
      @(posedge clk); #1;
      // the checksum each column checker latched from the array
      if (dut.g_bot[0].u_chk.chk_r != 0) chk_seen[0] = dut.g_bot[0].u_chk.chk_r;
      if (dut.g_bot[1].u_chk.chk_r != 0) chk_seen[1] = dut.g_bot[1].u_chk.chk_r;
      if (out_valid) begin
        for (int j = 0; j < 2; j++)
          check(int'(out_vec[j]) == ((m == DF_WS) ? WS_R[out_row][j] : OS_R[out_row][j]),
                $sformatf("result [%0d][%0d] = %0d", out_row, j, out_vec[j]));
        rows++;
      end
    end
    check(rows == 2, "two rows");
    check(n_err == 0, "no error flagged");
    for (int j = 0; j < 2; j++)
      check(int'(chk_seen[j]) == ((m == DF_WS) ? WS_CHK[j] : OS_CHK[j]),
            $sformatf("checksum %0d = %0d", j, chk_seen[j]));
  endtask

  initial begin
    fi = '0; idle(); mode = DF_WS;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(DF_WS);
    run(DF_OS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
