// mant_array -- ABFT-protected fixed-point mantissa systolic array.
//
// Multiplies two DIM x DIM blocks of BFP mantissas (A: rows are blocks,
// B: columns are blocks) on a DIM x DIM grid of sa_pe cells and checks the
// result in flight with algorithm-based fault tolerance (ABFT): the column
// sums of A form a check vector whose product with B must equal the column
// sums of the result (plus the column sums of the bias in OS mode).  All
// arithmetic is integer, so the check is exact (taken modulo 2^ACC_W).
//
// Weight-stationary (mode = DF_WS)
//  * Preload: w_we writes column w_col of B (w_vec[k] = B(k, w_col)) into
//    PE column w_col, one column per cycle.
//  * start (one cycle before the first row), then rows i = 0..DIM-1 of A on
//    a_vec in consecutive cycles.  Element k is delayed k cycles (skew) and
//    passes an abft_ingress unit, which adds it to its row's checksum and,
//    one cycle after the last row, inserts the checksum: the check vector
//    is appended to the tail of A in the same stream.
//  * Partial sums flow down; result C(i, j) leaves the bottom of column j
//    and is de-skewed; the result rows appear on out_vec in order,
//    out_valid from cycle 2*DIM after start+1.  The check row follows the
//    data into abft_col_checker j, which compares it with the sum of the
//    column's results one cycle later.
// Output-stationary (mode = DF_OS)
//  * clr zeroes the accumulators; optional bias rows (bias_we, bias_row,
//    bias_vec) are then added into PE row bias_row, and into the check-PE
//    row, which thereby holds the column sums of the bias.
//  * start, then in DIM consecutive cycles row i of A on a_vec and column i
//    of B on b_vec.  Row/column feeders (parallel-load shift registers)
//    skew them into the array: A(i, k) and B(k, j) meet in PE (i, j) at
//    cycle k + i + j + 1.  A left-edge os_check_chain sums the A values
//    entering each row, so the extra bottom row of check-PEs receives
//    sum_i A(i, k) together with B(k, j) and accumulates the checksums.
//  * From cycle 3*DIM the accumulators shift down one row per cycle: first
//    the check-PE row (latched by the checkers), then rows DIM-1..0 on
//    out_vec (out_row gives the row), then the comparison.
// err pulses for a cycle when any column's check fails; done pulses at the
// end of the tile (cycle 3*DIM+2 in WS, 4*DIM+2 in OS, counted from the
// cycle after start).  Only the check vector insertion and the comparison
// add cycles, as in the paper.  The checksum of DIM rows needs
// log2(DIM) more bits, so the A path of the array is A_W bits wide.
// fi injects a fault into the accumulator of PE (fi.row, fi.col); row DIM
// is the check-PE row.
// Paper: WS/OS schemes, ingress adder-register column, bottom accumulator
// and comparator, left-edge chain, check-PE row, check vector at the tail of
// A.  This design's choices: exact cycle schedule, feeders and de-skew
// registers, column-wise weight preload, modulo-2^ACC_W comparison.
module mant_array
  import bfp_pkg::*;
#(
  parameter int unsigned DIM = 128
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  dataflow_e              mode,
  input  logic                   w_we,
  input  logic [$clog2(DIM)-1:0] w_col,
  input  mant_t                  w_vec   [DIM],
  input  logic                   clr,
  input  logic                   bias_we,
  input  logic [$clog2(DIM)-1:0] bias_row,
  input  acc_t                   bias_vec[DIM],
  input  logic                   start,
  input  mant_t                  a_vec   [DIM],
  input  mant_t                  b_vec   [DIM],
  input  fault_t                 fi,
  output logic                   out_valid,
  output logic [$clog2(DIM)-1:0] out_row,
  output acc_t                   out_vec [DIM],
  output logic                   busy,
  output logic                   done,
  output logic                   err
);
  localparam int unsigned IW  = $clog2(DIM);
  localparam int unsigned A_W = MANT_W + $clog2(DIM);
  localparam int unsigned N   = DIM;
  typedef logic signed [A_W-1:0] aw_t;

  // ---------------------------------------------------------------- sequencer
  logic [31:0] c;            // cycle of the tile, 0 = first row
  logic        ws, os;
  assign ws = busy && (mode == DF_WS);
  assign os = busy && (mode == DF_OS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      c    <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        c    <= '0;
      end else if (busy) begin
        c <= c + 1;
        if (c == ((mode == DF_WS) ? 3 * N + 1 : 4 * N + 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  function automatic logic win(input logic [31:0] cc, input int unsigned lo,
                               input int unsigned len);
    return (cc >= lo) && (cc < lo + len);
  endfunction

  // ------------------------------------------------------------- array wires
  aw_t   a_h [N+1][N+1];   // a_h[r][j]: a input of PE (r, j)
  mant_t b_v [N+2][N];     // b_v[r][j]: b input of PE (r, j)
  acc_t  ps_v[N+2][N];     // ps_v[r][j]: ps input of PE (r, j)
  mant_t feed_a[N];
  mant_t feed_b[N];
  aw_t   ing_out[N];
  aw_t   chain[N];

  // --------------------------------------------- WS: skew + ABFT ingress
  for (genvar k = 0; k < N; k++) begin : g_row_in
    mant_t ing_in;
    if (k == 0) begin : g_nodl
      assign ing_in = a_vec[0];
    end else begin : g_dl
      mant_t d[k];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) for (int m = 0; m < k; m++) d[m] <= '0;
        else begin
          d[0] <= a_vec[k];
          for (int m = 1; m < k; m++) d[m] <= d[m-1];
        end
      end
      assign ing_in = d[k-1];
    end
    abft_ingress #(.A_W(A_W)) u_ing (
      .clk, .rst_n,
      .in_valid(ws && win(c, k, N)),
      .in_chk  (ws && (c == 32'(N + k))),
      .a_in    (ing_in),
      .a_out   (ing_out[k]));
  end

  // --------------------------------------------- OS: feeders + check chain
  for (genvar i = 0; i < N; i++) begin : g_feed
    mant_t sra[N], srb[N];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int k = 0; k < N; k++) begin
          sra[k] <= '0;
          srb[k] <= '0;
        end
      end else if (start) begin
        for (int k = 0; k < N; k++) begin
          sra[k] <= '0;
          srb[k] <= '0;
        end
      end else if (os && (c == 32'(i))) begin
        for (int k = 0; k < N; k++) begin
          sra[k] <= a_vec[k];
          srb[k] <= b_vec[k];
        end
      end else begin
        for (int k = 0; k < N - 1; k++) begin
          sra[k] <= sra[k+1];
          srb[k] <= srb[k+1];
        end
        sra[N-1] <= '0;
        srb[N-1] <= '0;
      end
    end
    assign feed_a[i] = sra[0];
    assign feed_b[i] = srb[0];

    os_check_chain #(.A_W(A_W)) u_chain (
      .clk, .rst_n, .clr(start),
      .sum_in ((i == 0) ? aw_t'(0) : chain[(i == 0) ? 0 : i - 1]),
      .a_in   (feed_a[i]),
      .sum_out(chain[i]));
  end

  // ------------------------------------------------------------ PE grid
  for (genvar j = 0; j < N; j++) begin : g_top
    assign b_v[0][j]  = (mode == DF_OS) ? feed_b[j] : '0;
    assign ps_v[0][j] = '0;
  end

  for (genvar r = 0; r <= N; r++) begin : g_r
    if (r < N) begin : g_left
      assign a_h[r][0] = (mode == DF_WS) ? ing_out[r] : aw_t'(feed_a[r]);
    end else begin : g_left_chk
      assign a_h[r][0] = (mode == DF_OS) ? chain[N-1] : '0;
    end
    for (genvar j = 0; j < N; j++) begin : g_c
      sa_pe #(.A_W(A_W)) u_pe (
        .clk, .rst_n, .mode,
        .a_in   (a_h[r][j]),
        .b_in   (b_v[r][j]),
        .ps_in  (ps_v[r][j]),
        .w_we   ((r < N) && w_we && (w_col == IW'(j))),
        .w_in   ((r < N) ? w_vec[(r < N) ? r : 0] : '0),
        .clr    (clr),
        .bias_we(bias_we && ((r == N) || (bias_row == IW'(r)))),
        .bias_in(bias_vec[j]),
        .shift  (os && win(c, 3 * N, N)),
        .fi_en  (fi.en && (32'(fi.row) == r) && (32'(fi.col) == j)),
        .fi_kind(fi.kind),
        .fi_mask(fi.mask[ACC_W-1:0]),
        .a_out  (a_h[r][j+1]),
        .b_out  (b_v[r+1][j]),
        .ps_out (ps_v[r+1][j]));
    end
  end

  // -------------------------------------------- bottom: checkers + outputs
  logic [N-1:0] col_err;
  logic [N-1:0] cmp_done_unused;  // per-column done strobes, not needed here
  acc_t         ws_out[N];

  for (genvar j = 0; j < N; j++) begin : g_bot
    acc_t ws_bot;
    assign ws_bot = ps_v[N][j];     // output of PE (DIM-1, j)

    abft_col_checker u_chk (
      .clk, .rst_n,
      .clr       (clr || start),
      .data_valid(ws ? win(c, N + j + 1, N) : (os && win(c, 3 * N + 1, N))),
      .data      (ws ? ws_bot : ps_v[N+1][j]),
      .chk_valid (ws ? (c == 32'(2 * N + j + 1)) : (os && (c == 32'(3 * N)))),
      .chk       (ws ? ws_bot : ps_v[N+1][j]),
      .cmp       (ws ? (c == 32'(2 * N + j + 2)) : (os && (c == 32'(4 * N + 1)))),
      .err       (col_err[j]),
      .cmp_done  (cmp_done_unused[j]));

    // WS de-skew: column j is late by j cycles; delay it by N-1-j more.
    if (j == N - 1) begin : g_nodsk
      assign ws_out[j] = ws_bot;
    end else begin : g_dsk
      acc_t d[N-1-j];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) for (int m = 0; m < N - 1 - j; m++) d[m] <= '0;
        else begin
          d[0] <= ws_bot;
          for (int m = 1; m < N - 1 - j; m++) d[m] <= d[m-1];
        end
      end
      assign ws_out[j] = d[N-2-j];
    end

    assign out_vec[j] = (mode == DF_WS) ? ws_out[j] : ps_v[N+1][j];
  end

  assign err = |col_err;

  always_comb begin
    if (mode == DF_WS) begin
      out_valid = ws && win(c, 2 * N, N);
      out_row   = IW'(c - 32'(2 * N));
    end else begin
      out_valid = os && win(c, 3 * N + 1, N);
      out_row   = IW'(32'(4 * N) - c);
    end
  end

  // A second start while a tile is in flight is a protocol error.
  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n)
                                 start |-> !busy);
endmodule
