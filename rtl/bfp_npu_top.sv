// bfp_npu_top -- reliable BFP matrix-multiply core (one DIM x DIM tile).
//
// Computes C = A x B for DIM x DIM BF16 matrices using row/column-wise
// block floating point: every row of A and every column of B is one BFP
// block with its own shared exponent, so each result element is the
// fixed-point dot product of two mantissa vectors scaled by 2^(eA_i+eB_j).
// The mantissa and exponent paths are separate and each has its own
// protection:
//   FP-to-BFP (fp2bfp_dmr, two: A rows, B columns) -- DMR, bitwise compare
//   mantissa array (mant_array)                    -- in-flight ABFT
//   exponent array (exp_unit_array)                -- compute twice, compare
//   BFP-to-FP (bfp2fp_dmr)                         -- DMR, bitwise compare
// The result rows leave as FP32 vectors.
//
// Operation (mode sampled at start; start only while !busy):
//  WS: after start, DIM cycles with in_valid carrying column j of B on b_fp
//      (any spacing), then DIM consecutive cycles carrying row i of A on
//      a_fp.  B mantissas are preloaded into the PE columns and B exponents
//      into the EUs; A exponents stream into the EU array as the A rows
//      enter the mantissa array.
//  OS: after start, DIM consecutive cycles carrying row i of A on a_fp and
//      column i of B on b_fp.  A exponents are preloaded into the EUs, B
//      exponents are held and then streamed; the exponent buffer is read
//      transposed.  The accumulators start from zero (no bias).
//  Results: out_valid with out_row and out_fp (row out_row of C), rows
//  0..DIM-1 in WS, DIM-1..0 in OS; done pulses after the last row.
//  err holds the four detectors' flags, sticky until the next start.
// fi_* inject faults into one site of each protected part (tests only;
// tie to '0 in use).  The cycle schedule, the input protocol and the
// absence of a bias path at this level are this design's choices; the
// paper embeds the core in the Gemmini NPU, whose scratchpad, DMA and host
// interface are not part of this RTL and would drive these ports.
module bfp_npu_top
  import bfp_pkg::*;
#(
  parameter int unsigned DIM = 128
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  dataflow_e              mode,
  input  logic                   start,
  input  logic                   in_valid,
  input  bf16_t                  a_fp    [DIM],
  input  bf16_t                  b_fp    [DIM],
  input  fault_t                 fi_f2b_a,
  input  fault_t                 fi_f2b_b,
  input  fault_t                 fi_mant,
  input  fault_t                 fi_exp,
  input  fault_t                 fi_b2f,
  output logic                   out_valid,
  output logic [$clog2(DIM)-1:0] out_row,
  output fp32_t                  out_fp  [DIM],
  output logic                   busy,
  output logic                   done,
  output err_flags_t             err
);
  localparam int unsigned N  = DIM;
  localparam int unsigned IW = $clog2(DIM);

  typedef enum logic [2:0] {
    T_IDLE, T_LOADB, T_STREAM, T_EXPSTREAM, T_DRAIN
  } tstate_e;

  tstate_e       state;
  dataflow_e     mode_r;
  logic [IW:0]   cnt;        // accepted input vectors in this phase
  logic [IW:0]   a_out_cnt;  // converted A rows
  logic [IW:0]   b_out_cnt;  // converted B columns
  logic [IW:0]   x_cnt;      // streamed B exponents (OS)
  exp_t          eb_hold[N];
  logic          mant_done_seen;

  // ------------------------------------------------------------- converters
  logic  conv_a_in, conv_b_in;
  logic  a_cv, b_cv, a_err, b_err;
  mant_t a_mant[N], b_mant[N];
  exp_t  a_esh, b_esh;

  assign conv_a_in = in_valid && (state == T_STREAM);
  assign conv_b_in = in_valid && ((state == T_LOADB) ||
                                  (state == T_STREAM && mode_r == DF_OS));

  fp2bfp_dmr #(.N(N)) u_f2b_a (
    .clk, .rst_n, .in_valid(conv_a_in), .fp_in(a_fp), .fi(fi_f2b_a),
    .out_valid(a_cv), .mant_out(a_mant), .e_sh_out(a_esh), .err(a_err));
  fp2bfp_dmr #(.N(N)) u_f2b_b (
    .clk, .rst_n, .in_valid(conv_b_in), .fp_in(b_fp), .fi(fi_f2b_b),
    .out_valid(b_cv), .mant_out(b_mant), .e_sh_out(b_esh), .err(b_err));

  // ---------------------------------------------------------- mantissa path
  logic  m_start, m_out_valid, m_busy, m_done, m_err;
  logic [IW-1:0] m_out_row;
  acc_t  m_out[N];
  acc_t  zero_bias[N];

  for (genvar j = 0; j < N; j++) begin : g_zb
    assign zero_bias[j] = '0;
  end

  // The array's tile starts the cycle before the first converted A row.
  assign m_start = conv_a_in && (cnt == '0);

  mant_array #(.DIM(N)) u_mant (
    .clk, .rst_n, .mode(mode_r),
    .w_we   (b_cv && (mode_r == DF_WS)),
    .w_col  (b_out_cnt[IW-1:0]),
    .w_vec  (b_mant),
    .clr    (start && !busy),
    .bias_we(1'b0),
    .bias_row('0),
    .bias_vec(zero_bias),
    .start  (m_start),
    .a_vec  (a_mant),
    .b_vec  (b_mant),
    .fi     (fi_mant),
    .out_valid(m_out_valid),
    .out_row(m_out_row),
    .out_vec(m_out),
    .busy   (m_busy),
    .done   (m_done),
    .err    (m_err));

  // ---------------------------------------------------------- exponent path
  logic   e_pre_we, e_str_valid, e_busy, e_done, e_err;
  logic [IW-1:0] e_pre_idx;
  exp_t   e_pre_val, e_str_val;
  esum_t  e_rd[N];

  always_comb begin
    if (mode_r == DF_WS) begin
      e_pre_we    = b_cv;
      e_pre_idx   = b_out_cnt[IW-1:0];
      e_pre_val   = b_esh;
      e_str_valid = a_cv;
      e_str_val   = a_esh;
    end else begin
      e_pre_we    = a_cv;
      e_pre_idx   = a_out_cnt[IW-1:0];
      e_pre_val   = a_esh;
      e_str_valid = (state == T_EXPSTREAM) && !a_cv;
      e_str_val   = eb_hold[x_cnt[IW-1:0]];
    end
  end

  exp_unit_array #(.N(N)) u_exp (
    .clk, .rst_n,
    .preload_we(e_pre_we), .preload_idx(e_pre_idx), .preload_val(e_pre_val),
    .stream_valid(e_str_valid), .stream_val(e_str_val),
    .rd_idx(m_out_row), .rd_transpose(mode_r == DF_OS), .rd_vec(e_rd),
    .fi(fi_exp), .busy(e_busy), .done(e_done), .err(e_err));

  // ------------------------------------------------------------ BFP-to-FP
  logic b2f_err, b2f_valid;

  bfp2fp_dmr #(.N(N)) u_b2f (
    .clk, .rst_n, .in_valid(m_out_valid), .acc_in(m_out), .esum_in(e_rd),
    .fi(fi_b2f), .out_valid(b2f_valid), .fp_out(out_fp), .err(b2f_err));

  assign out_valid = b2f_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_row <= '0;
    else if (m_out_valid) out_row <= m_out_row;
  end

  // ------------------------------------------------------------- sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= T_IDLE;
      mode_r         <= DF_WS;
      cnt            <= '0;
      a_out_cnt      <= '0;
      b_out_cnt      <= '0;
      x_cnt          <= '0;
      mant_done_seen <= 1'b0;
      done           <= 1'b0;
      err            <= '0;
      for (int j = 0; j < N; j++) eb_hold[j] <= '0;
    end else begin
      done <= 1'b0;
      if (a_cv) a_out_cnt <= a_out_cnt + 1'b1;
      if (b_cv) begin
        b_out_cnt <= b_out_cnt + 1'b1;
        eb_hold[b_out_cnt[IW-1:0]] <= b_esh;
      end
      if (m_done) mant_done_seen <= 1'b1;
      err.mant <= err.mant | m_err;
      err.expo <= err.expo | e_err;
      err.f2b  <= err.f2b  | a_err | b_err;
      err.b2f  <= err.b2f  | b2f_err;

      unique case (state)
        T_IDLE: if (start) begin
          mode_r         <= mode;
          state          <= (mode == DF_WS) ? T_LOADB : T_STREAM;
          cnt            <= '0;
          a_out_cnt      <= '0;
          b_out_cnt      <= '0;
          x_cnt          <= '0;
          mant_done_seen <= 1'b0;
          err            <= '0;
        end
        T_LOADB: if (in_valid) begin
          if (cnt == (IW+1)'(N - 1)) begin
            cnt   <= '0;
            state <= T_STREAM;
          end else cnt <= cnt + 1'b1;
        end
        T_STREAM: if (in_valid) begin
          if (cnt == (IW+1)'(N - 1)) begin
            cnt   <= '0;
            state <= (mode_r == DF_OS) ? T_EXPSTREAM : T_DRAIN;
          end else cnt <= cnt + 1'b1;
        end
        T_EXPSTREAM: begin
          // held B exponents are streamed once all A exponents are preloaded
          if (!a_cv) begin
            x_cnt <= x_cnt + 1'b1;
            if (x_cnt == (IW+1)'(N - 1)) state <= T_DRAIN;
          end
        end
        T_DRAIN: if ((mant_done_seen || m_done) && !e_busy && !b2f_valid) begin
          state <= T_IDLE;
          done  <= 1'b1;
        end
        default: state <= T_IDLE;
      endcase
    end
  end

  assign busy = (state != T_IDLE);

  // The A rows of a tile must arrive in consecutive cycles.
  a_rows_back_to_back: assert property (@(posedge clk) disable iff (!rst_n)
    (state == T_STREAM && cnt != '0) |-> in_valid);
  // Exponents are complete before results are converted (OS), and the
  // exponent array always finishes before the mantissa array.
  a_exp_ready: assert property (@(posedge clk) disable iff (!rst_n)
    m_out_valid |-> (!e_busy || mode_r == DF_WS));
  a_exp_first: assert property (@(posedge clk) disable iff (!rst_n)
    m_done |-> (!e_busy && !e_done));
  a_mant_idle: assert property (@(posedge clk) disable iff (!rst_n)
    (state == T_IDLE) |-> !m_busy);
endmodule
