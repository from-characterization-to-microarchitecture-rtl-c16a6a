// tb_exp_unit_array -- the time-redundant EU array at N = 8.
// Checks the exponent matrix (row and transposed reads), that both
// computations finish 2N cycles after the first streamed exponent, no
// false alarm, and detection of (a) a permanent stuck-at in one EU's adder,
// which only the rotated second-run pairing can expose, and (b) a
// one-cycle flip during the first run.
module tb_exp_unit_array;
  import bfp_pkg::*;
  localparam int unsigned N = 8;
  localparam int unsigned IW = $clog2(N);
  logic clk = 0, rst_n = 0;
  logic preload_we, stream_valid, rd_transpose, busy, done, err;
  logic [IW-1:0] preload_idx, rd_idx;
  exp_t preload_val, stream_val;
  esum_t rd_vec[N];
  fault_t fi;
  int checks = 0, failures = 0, cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  exp_unit_array #(.N(N)) dut (.*);
  task automatic check(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  int P[N], S[N];

  // kind: 0 clean, 1 stuck-at-1 bit 0 on EU 3, 2 flip during first run
  task automatic run(input int kind);
    int t0, t_done, n_err;
    for (int j = 0; j < N; j++) begin
      @(negedge clk);
      preload_we = 1; preload_idx = IW'(j); preload_val = exp_t'(P[j]);
    end
    @(negedge clk); preload_we = 0;
    fi = '0;
    if (kind == 1) begin fi.en = 1; fi.kind = FI_SA1; fi.col = 3; fi.mask = 1; end
    t0 = cyc;
    n_err = 0; t_done = -1;
    for (int i = 0; i < N; i++) begin
      stream_valid = 1; stream_val = exp_t'(S[i]);
      if (kind == 2) begin fi.en = (i == 2); fi.kind = FI_FLIP; fi.col = 5; fi.mask = 32'h10; end
      @(negedge clk);
    end
    stream_valid = 0;
    if (kind == 2) fi = '0;
    while (t_done < 0 && cyc < t0 + 4 * N) begin
      @(posedge clk); #1;
      if (err) n_err++;
      if (done) t_done = cyc - t0;
      @(negedge clk);
    end
    fi = '0;
    check(t_done == 2 * N, $sformatf("done after %0d cycles, expected %0d", t_done, 2 * N));
    check(!busy, "idle after done");
    if (kind == 0) begin
      check(n_err == 0, "no false alarm");
      for (int r = 0; r < N; r++) begin
        rd_idx = IW'(r); rd_transpose = 0; #1;
        for (int j = 0; j < N; j++) check(int'(rd_vec[j]) == S[r] + P[j], "row read");
        rd_transpose = 1; #1;
        for (int j = 0; j < N; j++) check(int'(rd_vec[j]) == S[j] + P[r], "column read");
      end
    end else begin
      check(n_err > 0, $sformatf("fault kind %0d detected", kind));
    end
  endtask

  initial begin
    preload_we = 0; stream_valid = 0; rd_transpose = 0; rd_idx = 0;
    preload_idx = 0; preload_val = 0; stream_val = 0; fi = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 5; t++) begin
      foreach (P[j]) P[j] = $urandom_range(255);
      foreach (S[j]) S[j] = $urandom_range(255);
      run(0);
    end
    // even operands: every sum is even, so a stuck-at-1 on bit 0 corrupts
    // every result of EU 3 in both runs -- only the different pairing finds it
    foreach (P[j]) P[j] = 2 * $urandom_range(127);
    foreach (S[j]) S[j] = 2 * $urandom_range(127);
    run(1);
    foreach (P[j]) P[j] = $urandom_range(255);
    foreach (S[j]) S[j] = $urandom_range(255);
    run(2);
    run(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
