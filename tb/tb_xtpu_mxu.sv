// tb_xtpu_mxu: matrix products through the 16 x 16 systolic array.
//
// Two weight tiles are used in turn.  For each: the 16 rows are shifted in
// (the word shifted first ends in the bottom row), committed, and 24 random
// vectors are streamed back to back.  Every column result is compared with
// sum_i W[i][c] * A[i] computed in the testbench, and its arrival cycle with
// the documented latency: a vector sampled at clock edge t gives column c
// after edge t + N + c, so the first column after N cycles, the last after 2N-1.
// The second tile is prefetched while the array is idle and must replace
// the first only at the commit: a vector streamed before that commit is
// checked against the first tile.
module tb_xtpu_mxu;
  import xtpu_pkg::*;

  localparam int N = ARRAY_N;
  localparam int M = 24;

  logic  clk = 1'b0, rst_n = 1'b0;
  act_t  act_in [N];
  logic  act_valid;
  wgt_t  w_in [N];
  logic  w_shift, w_commit;
  psum_t psum_out [N];
  logic  psum_valid [N];
  int    checks = 0, failures = 0;
  int    cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  xtpu_mxu #(.N(N)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int W     [N][N];      // W[row][col] of the committed tile
  int A     [M][N];
  int t_in  [M];
  int exp_q [N][$];      // expected value per column, in order
  int expt_q[N][$];      // expected arrival cycle per column

  // collect results
  always @(posedge clk) begin
    #1;
    for (int c = 0; c < N; c++) begin
      if (psum_valid[c]) begin
        checks += 2;
        if (exp_q[c].size() == 0) begin
          failures += 2;
          $display("FAIL unexpected result on column %0d", c);
        end else begin
          int e, et;
          e  = exp_q[c].pop_front();
          et = expt_q[c].pop_front();
          if (int'(psum_out[c]) != e) begin
            failures++;
            if (failures < 10) $display("FAIL col %0d value %0d expected %0d", c, psum_out[c], e);
          end
          if (cycle != et) begin
            failures++;
            if (failures < 10) $display("FAIL col %0d arrived at %0d expected %0d", c, cycle, et);
          end
        end
      end
    end
  end

  task automatic load_tile(input int Wn[N][N]);
    // shift rows N-1 .. 0 so that row 0 is shifted last
    for (int k = 0; k < N; k++) begin
      @(negedge clk);
      w_shift = 1'b1;
      for (int c = 0; c < N; c++) w_in[c] = wgt_t'(Wn[N-1-k][c]);
    end
    @(negedge clk);
    w_shift = 1'b0;
  endtask

  task automatic stream(input int nvec, input int Wc[N][N]);
    for (int v = 0; v < nvec; v++) begin
      @(negedge clk);
      act_valid = 1'b1;
      for (int i = 0; i < N; i++) begin
        A[v][i] = int'(act_t'($urandom));
        act_in[i] = act_t'(A[v][i]);
      end
      t_in[v] = cycle + 1;    // sampled at the coming edge
      for (int c = 0; c < N; c++) begin
        int s = 0;
        for (int i = 0; i < N; i++) s += Wc[i][c] * A[v][i];
        exp_q[c].push_back(s);
        expt_q[c].push_back(t_in[v] + N + c);
      end
    end
    @(negedge clk);
    act_valid = 1'b0;
    for (int i = 0; i < N; i++) act_in[i] = act_t'($urandom);  // ignored data
  endtask

  initial begin
    int W1[N][N], W2[N][N];
    act_valid = 0; w_shift = 0; w_commit = 0;
    for (int i = 0; i < N; i++) begin act_in[i] = '0; w_in[i] = '0; end
    for (int i = 0; i < N; i++)
      for (int c = 0; c < N; c++) begin
        W1[i][c] = int'(wgt_t'($urandom));
        W2[i][c] = (i == c) ? -128 : int'(wgt_t'($urandom));
      end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    load_tile(W1);
    @(negedge clk); w_commit = 1'b1;
    @(negedge clk); w_commit = 1'b0;
    stream(M, W1);
    // prefetch the second tile while idle; results still from tile 1
    repeat (2 * N + 4) @(posedge clk);
    load_tile(W2);
    stream(1, W1);
    repeat (2 * N + 4) @(posedge clk);
    @(negedge clk); w_commit = 1'b1;
    @(negedge clk); w_commit = 1'b0;
    stream(M, W2);
    repeat (2 * N + 6) @(posedge clk);

    for (int c = 0; c < N; c++) begin
      checks++;
      if (exp_q[c].size() != 0) begin
        failures++;
        $display("FAIL column %0d missing %0d results", c, exp_q[c].size());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
