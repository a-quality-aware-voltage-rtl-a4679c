// xtpu_mxu: the N x N weight-stationary systolic matrix unit of the X-TPU.
//
// Activations enter at the left edge and move one PE to the right per clock;
// partial sums start at zero at the top edge and move one PE down per clock,
// so column c delivers  O_c = sum_i W[i][c] * A[i]  at its bottom edge.  Each
// column is one neuron; its multipliers share one supply, chosen by the
// column's voltage switch box outside this module.
//
// Weights are prefetched by shifting: with w_shift high for N cycles, the
// word presented on w_in[c] in the first of them ends in the bottom row, the
// last in row 0.  A one-cycle w_commit then copies every prefetch register
// into its stationary register, all at once, so the unit must hold no valid
// activation while w_commit is high (asserted below).
//
// The input vector act_in (one element per row) is taken whole in one cycle
// with act_valid; a triangular bank of registers delays row i by i cycles
// (systolic skew, this design's placement).  Timing: a vector sampled at
// clock edge t yields column c's result on psum_out[c], with psum_valid[c],
// after edge t + N + c.  The first result is thus ready N cycles after the
// vector enters and the last 2N-1 cycles after, plus N cycles of weight
// prefetch when a new tile is loaded.  A new vector may enter every cycle.
module xtpu_mxu
  import xtpu_pkg::*;
#(
  parameter int unsigned N = ARRAY_N
)(
  input  logic  clk,
  input  logic  rst_n,
  input  act_t  act_in   [N],
  input  logic  act_valid,
  input  wgt_t  w_in     [N],
  input  logic  w_shift,
  input  logic  w_commit,
  output psum_t psum_out [N],
  output logic  psum_valid [N]
);
  // skewed activations at the left edge
  act_t act_sk   [N];
  logic valid_sk [N];
  logic skew_busy [N];   // a valid element waits in row i's skew registers

  // inter-PE nets: act[i][c] enters PE(i,c); act[i][N] is the right edge
  act_t  act_h   [N][N+1];
  logic  vld_h   [N][N+1];
  wgt_t  w_v     [N+1][N];
  psum_t psum_v  [N+1][N];

  for (genvar i = 0; i < N; i++) begin : g_skew
    if (i == 0) begin : g_nodelay
      assign act_sk[i]    = act_in[i];
      assign valid_sk[i]  = act_valid;
      assign skew_busy[i] = 1'b0;
    end else begin : g_delay
      act_t dly_a [i];
      logic dly_v [i];
      always_ff @(posedge clk) begin
        if (!rst_n) begin
          for (int k = 0; k < i; k++) begin
            dly_a[k] <= '0;
            dly_v[k] <= 1'b0;
          end
        end else begin
          dly_a[0] <= act_in[i];
          dly_v[0] <= act_valid;
          for (int k = 1; k < i; k++) begin
            dly_a[k] <= dly_a[k-1];
            dly_v[k] <= dly_v[k-1];
          end
        end
      end
      assign act_sk[i]   = dly_a[i-1];
      assign valid_sk[i] = dly_v[i-1];
      always_comb begin
        skew_busy[i] = 1'b0;
        for (int k = 0; k < i; k++) skew_busy[i] |= dly_v[k];
      end
    end
  end

  for (genvar i = 0; i < N; i++) begin : g_left
    assign act_h[i][0] = act_sk[i];
    assign vld_h[i][0] = valid_sk[i];
  end
  for (genvar c = 0; c < N; c++) begin : g_top
    assign w_v[0][c]    = w_in[c];
    assign psum_v[0][c] = '0;
  end

  for (genvar i = 0; i < N; i++) begin : g_row
    for (genvar c = 0; c < N; c++) begin : g_col
      xtpu_pe u_pe (
        .clk          (clk),
        .rst_n        (rst_n),
        .act_in       (act_h[i][c]),
        .act_valid_in (vld_h[i][c]),
        .act_out      (act_h[i][c+1]),
        .act_valid_out(vld_h[i][c+1]),
        .w_in         (w_v[i][c]),
        .w_shift      (w_shift),
        .w_commit     (w_commit),
        .w_out        (w_v[i+1][c]),
        .psum_in      (psum_v[i][c]),
        .psum_out     (psum_v[i+1][c])
      );
    end
  end

  // the bottom PE's partial sum is registered one cycle after its
  // activation register, so the column result is valid one cycle later
  for (genvar c = 0; c < N; c++) begin : g_out
    logic v_q;
    always_ff @(posedge clk) begin
      if (!rst_n) v_q <= 1'b0;
      else        v_q <= vld_h[N-1][c+1];
    end
    assign psum_out[c]   = psum_v[N][c];
    assign psum_valid[c] = v_q;
  end

  // any valid activation still inside the unit
  logic busy;
  always_comb begin
    busy = act_valid;
    for (int i = 0; i < N; i++) begin
      busy |= skew_busy[i];
      for (int c = 0; c <= N; c++)
        busy |= vld_h[i][c];
    end
  end

  a_commit_idle: assert property (@(posedge clk) disable iff (!rst_n)
    w_commit |-> !busy)
    else $error("xtpu_mxu: weight commit while activations are in flight");

endmodule
