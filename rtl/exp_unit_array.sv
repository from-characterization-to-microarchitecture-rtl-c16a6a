// exp_unit_array -- time-redundant exponent compute module (EU array).
//
// Computes the exponent matrix of an N x N BFP matrix product,
// E(r, c) = s_r + p_c, where p is the "stationary" exponent vector held in
// the EUs' Exp_B registers and s the "streamed" vector (in WS mode p = the
// column exponents of B and s = the row exponents of A; in OS mode the
// roles are swapped and the result is read back transposed).  It does so
// twice, using the slack the short exponent path has against the mantissa
// array, and compares the two results.
//
//  * Preload: preload_we writes p_c into EU c (one element per cycle).
//  * First computation: s_r arrives one per cycle on stream_val
//    (stream_valid, N consecutive cycles).  It is broadcast to all EU
//    adders, so row r of E is produced in one cycle and written into the
//    N x N result buffer; at the same time s_r is shifted into the serial
//    Exp_A chain.  After N cycles EU j holds s_(N-1-j).
//  * Second computation (N cycles, starts right after the first): every EU
//    adds its own Exp_A register to its Exp_B register, and the Exp_B
//    registers rotate as a ring (EU j takes from EU j-1, EU 0 from EU N-1)
//    after every step.  At step k EU j therefore computes
//    E(N-1-j, (j-k) mod N), a different operand pairing from the first run
//    on the same adder for all but one step, and the error detector
//    compares it with that element of the buffer.  After N steps the ring
//    is back in its preload order.
//  * err pulses (registered) on any mismatch; done pulses when the second
//    computation has ended.  The buffer is readable at any time through
//    rd_idx: rd_transpose = 0 returns buffer row rd_idx, 1 returns column
//    rd_idx.
// The paper gives the EU contents, the broadcast, the A chain and the B
// ring; the buffer organisation, the element-wise comparison indexing and
// the control are this design's choices.  Fault injection: fi.col selects
// an EU whose adder output passes through a saboteur.
module exp_unit_array
  import bfp_pkg::*;
#(
  parameter int unsigned N = 128
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 preload_we,
  input  logic [$clog2(N)-1:0] preload_idx,
  input  exp_t                 preload_val,
  input  logic                 stream_valid,
  input  exp_t                 stream_val,
  input  logic [$clog2(N)-1:0] rd_idx,
  input  logic                 rd_transpose,
  output esum_t                rd_vec[N],
  input  fault_t               fi,
  output logic                 busy,
  output logic                 done,
  output logic                 err
);
  localparam int unsigned IW = $clog2(N);

  typedef enum logic [1:0] {S_IDLE, S_FIRST, S_SECOND} state_e;
  state_e         state;
  logic [IW-1:0]  cnt;

  exp_t  ea[N], eb[N];
  esum_t sum[N];
  esum_t buffer[N][N];
  logic  second;

  assign second = (state == S_SECOND);

  for (genvar j = 0; j < N; j++) begin : g_eu
    exp_unit u_eu (
      .clk, .rst_n,
      .preload_we  (preload_we && (preload_idx == IW'(j))),
      .preload_b   (preload_val),
      .rotate      (second),
      .b_from_above(eb[(j + N - 1) % N]),
      .a_shift     (stream_valid && !second),
      .a_from_above((j == 0) ? stream_val : ea[(j + N - 1) % N]),
      .a_bcast     (stream_val),
      .sel_second  (second),
      .fi_en       (fi.en && (32'(fi.col) == j)),
      .fi_kind     (fi.kind),
      .fi_mask     (fi.mask[ESUM_W-1:0]),
      .exp_a       (ea[j]),
      .exp_b       (eb[j]),
      .sum         (sum[j]));
  end

  // Sequencer.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cnt   <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE, S_FIRST: if (stream_valid) begin
          if (cnt == IW'(N - 1)) begin
            state <= S_SECOND;
            cnt   <= '0;
          end else begin
            state <= S_FIRST;
            cnt   <= cnt + 1'b1;
          end
        end
        S_SECOND: begin
          if (cnt == IW'(N - 1)) begin
            state <= S_IDLE;
            cnt   <= '0;
            done  <= 1'b1;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // Result buffer: written row by row during the first computation.
  always_ff @(posedge clk) begin
    if (stream_valid && !second)
      for (int j = 0; j < N; j++) buffer[cnt][j] <= sum[j];
  end

  // Error detection: second result against the buffered first result.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      err <= 1'b0;
    end else begin
      logic mism;
      mism = 1'b0;
      if (second) begin
        for (int j = 0; j < N; j++) begin
          logic [IW-1:0] col;
          col = (IW'(j) >= cnt) ? IW'(j) - cnt : IW'(j + N) - cnt;
          if (sum[j] != buffer[N - 1 - j][col]) mism = 1'b1;
        end
      end
      err <= mism;
    end
  end

  // Read port.
  always_comb begin
    for (int j = 0; j < N; j++)
      rd_vec[j] = rd_transpose ? buffer[j][rd_idx] : buffer[rd_idx][j];
  end
endmodule
