// npu_tb_body.svh -- shared body of the end-to-end testbenches of
// bfp_npu_top.  The including module defines DIM (the core's size),
// N_CLEAN (fault-free tiles per dataflow) and DO_FAULTS (run the
// fault-injection tiles), and has its own watchdog.  Expected results
// come from an independent model written here: BF16 -> BFP conversion,
// integer dot products and FP32 packing, bit-exact.

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  dataflow_e mode;
  logic start, in_valid;
  bf16_t a_fp[DIM], b_fp[DIM];
  fault_t fi_f2b_a, fi_f2b_b, fi_mant, fi_exp, fi_b2f;
  logic out_valid, busy, done;
  logic [$clog2(DIM)-1:0] out_row;
  fp32_t out_fp[DIM];
  err_flags_t err;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // mechanism counters
  int n_ws = 0, n_os = 0, n_det_mant = 0, n_det_exp = 0, n_det_f2b = 0,
      n_det_b2f = 0, n_align_shift = 0, n_zero_block = 0;

  bf16_t A[DIM][DIM], B[DIM][DIM];
  fp32_t got[DIM][DIM];
  int    rows_got;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  function automatic bf16_t rand_bf16();
    bf16_t v;
    v.sign = 1'($urandom_range(1));
    v.exp  = 8'(120 + $urandom_range(15));
    v.frac = 7'($urandom_range(127));
    if ($urandom_range(15) == 0) v = '0;
    return v;
  endfunction

  // Independent BFP model of one block.
  task automatic ref_block(input bf16_t v[DIM], output int m[DIM], output int e);
    e = 0;
    foreach (v[i]) if (int'(v[i].exp) > e) e = int'(v[i].exp);
    foreach (v[i]) begin
      int sig, sh, mag;
      sig = (v[i].exp == 0) ? 0 : 128 + int'(v[i].frac);
      sh  = e - int'(v[i].exp) + 1;
      mag = (sh > 7) ? 0 : (sig >> sh);
      if (sh > 1 && sig != 0) n_align_shift++;
      m[i] = v[i].sign ? -mag : mag;
    end
  endtask

  function automatic fp32_t ref_fp32(input longint acc, input int esum);
    fp32_t r;
    longint mag;
    int p, ex;
    r = '0;
    if (acc == 0) return r;
    r.sign = (acc < 0);
    mag = (acc < 0) ? -acc : acc;
    p = 0;
    while ((mag >> (p + 1)) != 0) p++;
    ex = esum + p - 139;
    if (ex <= 0) begin r.exp = 0; r.frac = 0; end
    else if (ex >= 255) begin r.exp = 8'hFF; r.frac = 0; end
    else begin
      r.exp  = 8'(ex);
      r.frac = 23'((mag << (23 - p)) & 64'h7F_FFFF);
    end
    return r;
  endfunction


  always @(posedge clk) if (out_valid) begin
    for (int j = 0; j < DIM; j++) got[out_row][j] <= out_fp[j];
    rows_got <= rows_got + 1;
  end

  task automatic clear_faults();
    fi_f2b_a = '0; fi_f2b_b = '0; fi_mant = '0; fi_exp = '0; fi_b2f = '0;
  endtask

  // fault_site: 0 none, 1 f2b, 2 mant, 3 exp (stuck-at), 4 b2f
  task automatic run_tile(input dataflow_e m, input int fault_site);
    int t0, t_done, rA[DIM][DIM], rB[DIM][DIM], eA[DIM], eB[DIM];
    bf16_t vec[DIM];
    mode = m;
    rows_got = 0;
    @(negedge clk); start = 1;
    t0 = cyc;
    if (fault_site == 3) begin
      fi_exp.en = 1; fi_exp.kind = FI_SA1; fi_exp.col = 8'(1 % DIM);
      fi_exp.mask = 32'h1;
    end
    if (fault_site == 1) begin
      fi_f2b_a.en = 1; fi_f2b_a.kind = FI_FLIP; fi_f2b_a.col = 8'(2 % DIM);
      fi_f2b_a.mask = 32'h40;
    end
    if (fault_site == 4) begin
      fi_b2f.en = 1; fi_b2f.kind = FI_FLIP; fi_b2f.col = 8'(3 % DIM);
      fi_b2f.mask = 32'h8000_0000;
    end
    @(negedge clk); start = 0;
    if (m == DF_WS) begin
      for (int j = 0; j < DIM; j++) begin
        in_valid = 1;
        for (int k = 0; k < DIM; k++) b_fp[k] = B[k][j];
        @(negedge clk);
      end
      for (int i = 0; i < DIM; i++) begin
        in_valid = 1;
        for (int k = 0; k < DIM; k++) a_fp[k] = A[i][k];
        @(negedge clk);
      end
    end else begin
      for (int i = 0; i < DIM; i++) begin
        in_valid = 1;
        for (int k = 0; k < DIM; k++) begin
          a_fp[k] = A[i][k];
          b_fp[k] = B[k][i];
        end
        @(negedge clk);
      end
    end
    in_valid = 0;
    t_done = -1;
    while (t_done < 0 && cyc < t0 + 6 * DIM + 20) begin
      if (fault_site == 2) begin
        // one-cycle flip of a high accumulator bit in PE (1,2), just after
        // the inputs: in WS one of the last rows of A is passing it, in OS
        // the flipped value stays in the accumulator until it is shifted
        // out (see the mant_array schedule)
        int fc;
        fc = t0 + 2 * DIM + 2;
        fi_mant.en = (cyc == fc); fi_mant.kind = FI_FLIP;
        fi_mant.row = 8'(1); fi_mant.col = 8'(2 % DIM); fi_mant.mask = 32'h10_0000;
      end
      @(posedge clk); #1;
      if (done) t_done = cyc - t0;
      @(negedge clk);
    end
    clear_faults();
    check(t_done == 4 * DIM + 5, $sformatf("tile latency %0d exp %0d", t_done, 4 * DIM + 5));
    check(rows_got == DIM, $sformatf("rows out %0d", rows_got));
    if (m == DF_WS) n_ws++; else n_os++;
    case (fault_site)
      0: check(err == '0, $sformatf("no false alarm, err=%b", err));
      1: begin check(err.f2b, "f2b fault detected"); if (err.f2b) n_det_f2b++; end
      2: begin check(err.mant, "mantissa fault detected"); if (err.mant) n_det_mant++; end
      3: begin check(err.expo, "exponent fault detected"); if (err.expo) n_det_exp++; end
      4: begin check(err.b2f, "b2f fault detected"); if (err.b2f) n_det_b2f++; end
      default: ;
    endcase
    if (fault_site == 0) begin
      for (int i = 0; i < DIM; i++) begin
        for (int k = 0; k < DIM; k++) vec[k] = A[i][k];
        ref_block(vec, rA[i], eA[i]);
      end
      for (int j = 0; j < DIM; j++) begin
        for (int k = 0; k < DIM; k++) vec[k] = B[k][j];
        ref_block(vec, rB[j], eB[j]);
      end
      for (int i = 0; i < DIM; i++)
        for (int j = 0; j < DIM; j++) begin
          longint acc;
          fp32_t e;
          acc = 0;
          for (int k = 0; k < DIM; k++) acc += longint'(rA[i][k]) * longint'(rB[j][k]);
          e = ref_fp32(acc, eA[i] + eB[j]);
          check(got[i][j] == e, $sformatf("C[%0d][%0d]=%h exp %h", i, j, got[i][j], e));
        end
    end
  endtask

  task automatic rand_mats();
    for (int i = 0; i < DIM; i++)
      for (int j = 0; j < DIM; j++) begin
        A[i][j] = rand_bf16();
        B[i][j] = rand_bf16();
      end
  endtask

  initial begin
    clear_faults();
    start = 0; in_valid = 0; mode = DF_WS;
    for (int k = 0; k < DIM; k++) begin a_fp[k] = '0; b_fp[k] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < N_CLEAN; t++) begin
      rand_mats(); run_tile(DF_WS, 0);
      rand_mats(); run_tile(DF_OS, 0);
    end
    // a tile with an all-zero row block of A
    rand_mats();
    for (int k = 0; k < DIM; k++) A[0][k] = '0;
    run_tile(DF_WS, 0);
    n_zero_block++;
    if (DO_FAULTS) begin
      for (int s = 1; s <= 4; s++) begin
        rand_mats(); run_tile(DF_WS, s);
        rand_mats(); run_tile(DF_OS, s);
      end
      check(n_det_f2b > 0 && n_det_mant > 0 && n_det_exp > 0 && n_det_b2f > 0,
            "every detector fired");
    end
    check(n_ws > 0 && n_os > 0 && n_align_shift > 0 && n_zero_block > 0,
          "both dataflows, alignment shifts and a zero block exercised");
    $display("mechanisms: ws=%0d os=%0d align_shifts=%0d zero_blocks=%0d det_f2b=%0d det_mant=%0d det_exp=%0d det_b2f=%0d",
             n_ws, n_os, n_align_shift, n_zero_block, n_det_f2b, n_det_mant, n_det_exp, n_det_b2f);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

