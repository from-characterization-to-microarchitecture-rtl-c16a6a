// tb_mant_array -- self-checking test of the ABFT-protected mantissa array.
//
// For a reduced DIM it runs, in both dataflows, random tiles whose
// products are computed here with plain integer arithmetic, and checks
// every output row, the row order, the cycle at which results appear and
// at which done pulses, and that err stays low.  It then injects a
// one-cycle bit flip into a PE accumulator (and, in OS mode, into a
// check-PE) and checks that err fires.
module tb_mant_array;
  import bfp_pkg::*;
  localparam int unsigned DIM = 6;
  localparam int unsigned IW  = $clog2(DIM);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  dataflow_e mode;
  logic w_we, clr, bias_we, start;
  logic [IW-1:0] w_col, bias_row;
  mant_t w_vec[DIM], a_vec[DIM], b_vec[DIM];
  acc_t  bias_vec[DIM];
  fault_t fi;
  logic out_valid, busy, done, err;
  logic [IW-1:0] out_row;
  acc_t out_vec[DIM];

  int checks = 0, failures = 0;

  mant_array #(.DIM(DIM)) dut (.*);

  int A[DIM][DIM], B[DIM][DIM], Cb[DIM][DIM];
  int errs_seen, rows_seen, t_first, t_done, cyc;

  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  task automatic rand_mats(input bit use_bias);
    for (int i = 0; i < DIM; i++)
      for (int j = 0; j < DIM; j++) begin
        A[i][j]  = int'($urandom_range(254)) - 127;
        B[i][j]  = int'($urandom_range(254)) - 127;
        Cb[i][j] = use_bias ? int'($urandom_range(2000)) - 1000 : 0;
      end
  endtask

  task automatic idle_inputs();
    w_we = 0; clr = 0; bias_we = 0; start = 0; w_col = '0; bias_row = '0;
    for (int k = 0; k < DIM; k++) begin
      w_vec[k] = '0; a_vec[k] = '0; b_vec[k] = '0; bias_vec[k] = '0;
    end
  endtask

  // Collect outputs of one tile; fault injected at cycle fcyc (-1: none).
  task automatic run_tile(input dataflow_e m, input int frow, input int fcol,
                          input int fcyc, input bit expect_err);
    int c0, exp_first, exp_done;
    mode = m;
    if (m == DF_WS) begin
      for (int j = 0; j < DIM; j++) begin
        @(negedge clk);
        w_we = 1; w_col = IW'(j);
        for (int k = 0; k < DIM; k++) w_vec[k] = mant_t'(B[k][j]);
      end
      @(negedge clk); idle_inputs();
    end else begin
      @(negedge clk); clr = 1;
      @(negedge clk); clr = 0;
      for (int i = 0; i < DIM; i++) begin
        @(negedge clk);
        bias_we = 1; bias_row = IW'(i);
        for (int j = 0; j < DIM; j++) bias_vec[j] = acc_t'(Cb[i][j]);
      end
      @(negedge clk); idle_inputs();
    end
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    c0 = cyc;  // cycle index 0 of the tile
    errs_seen = 0; rows_seen = 0; t_first = -1; t_done = -1;
    for (int i = 0; i < DIM; i++) begin
      for (int k = 0; k < DIM; k++) begin
        a_vec[k] = mant_t'(A[i][k]);
        b_vec[k] = mant_t'(B[k][i]);
      end
      @(negedge clk);
    end
    idle_inputs();
    while (t_done < 0 && cyc < c0 + 5 * DIM + 10) begin
      if (fcyc >= 0 && cyc == c0 + fcyc) begin
        fi.en = 1; fi.kind = FI_FLIP; fi.row = 8'(frow); fi.col = 8'(fcol);
        fi.mask = 32'h0010_0000;
      end else fi.en = 0;
      @(posedge clk);
      #1;
      if (err) errs_seen++;
      if (out_valid) begin
        int r;
        r = int'(out_row);
        if (t_first < 0) t_first = cyc - c0;
        if (!expect_err) begin
          check(r == ((m == DF_WS) ? rows_seen : DIM - 1 - rows_seen), "row order");
          for (int j = 0; j < DIM; j++) begin
            int e;
            e = Cb[r][j];
            for (int k = 0; k < DIM; k++) e += A[r][k] * B[k][j];
            check(out_vec[j] == acc_t'(e), $sformatf("C[%0d][%0d]=%0d exp %0d", r, j,
                  out_vec[j], e));
          end
        end
        rows_seen++;
      end
      if (done) t_done = cyc - c0;
      @(negedge clk);
    end
    fi.en = 0;
    check(rows_seen == DIM, "all rows out");
    exp_first = (m == DF_WS) ? 2 * DIM : 3 * DIM + 1;
    exp_done  = (m == DF_WS) ? 3 * DIM + 2 : 4 * DIM + 2;
    check(t_first == exp_first, $sformatf("first row at %0d exp %0d", t_first, exp_first));
    check(t_done == exp_done, $sformatf("done at %0d exp %0d", t_done, exp_done));
    if (expect_err) check(errs_seen > 0, "fault detected");
    else            check(errs_seen == 0, "no false alarm");
  endtask

  initial begin
    cyc = 0;
    fi = '0;
    idle_inputs();
    mode = DF_WS;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      rand_mats(0); run_tile(DF_WS, 0, 0, -1, 0);
      rand_mats(1); run_tile(DF_OS, 0, 0, -1, 0);
    end
    // all-extreme operands
    for (int i = 0; i < DIM; i++) for (int j = 0; j < DIM; j++) begin
      A[i][j] = -127; B[i][j] = 127; Cb[i][j] = 0;
    end
    run_tile(DF_WS, 0, 0, -1, 0);
    run_tile(DF_OS, 0, 0, -1, 0);
    // fault in PE (2,3) accumulator mid-tile
    rand_mats(0); run_tile(DF_WS, 2, 3, DIM + 4, 1);
    rand_mats(1); run_tile(DF_OS, 2, 3, 2 * DIM, 1);
    // fault in a check-PE (OS)
    rand_mats(1); run_tile(DF_OS, DIM, 1, 2 * DIM + 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
