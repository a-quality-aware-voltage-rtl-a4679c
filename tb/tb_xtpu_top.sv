// tb_xtpu_top: end-to-end run of the X-TPU at its default size (16 x 16
// array, 8192-row weight memory, 1024-vector unified buffer, 256-entry
// accumulator).
//
// A 32-input, 16-neuron fully connected layer is computed for M = 20 input
// vectors.  The weight memory holds three 16-row tiles:
//   rows  0..15  inputs  0..15 of the layer, column c at level c mod 4
//   rows 16..31  inputs 16..31 of the layer, same levels
//   rows 32..47  the weights of rows 0..15 again, every column exact
// Four commands are run:
//   1. load rows 0..15, stream inputs 0..15, overwrite accumulator 0..19
//   2. load rows 16..31, stream inputs 16..31, add into accumulator 0..19
//   3. load rows 32..47, stream inputs 0..15, overwrite accumulator 64..83
//   4. keep the weights of command 3, stream inputs 16..31, overwrite
//      accumulator 128..147 (products of weights 0..15 with inputs 16..31)
// Every accumulator entry read back is compared with the layer output
// computed in the testbench.  After each load the per-column selection codes
// and one-hot switch enables are compared with the tile's selection bits;
// command 3 changes the supply of every non-exact column while producing the
// same products (the supply level changes energy, not the logical result).
// Cycle counts are checked: start-to-done 3N + 4 + M with a weight load and
// 2N + 3 + M without (the array's own N / 2N-1 latencies are checked in
// tb_xtpu_mxu).  Each mechanism (weight prefetch, commit, weight reuse,
// overwrite, accumulate, supply switch, each of the four levels) is counted
// and must occur.
module tb_xtpu_top;
  import xtpu_pkg::*;

  localparam int N = ARRAY_N;
  localparam int M = 20;
  localparam int K = 2 * N;
  localparam int WM_DEPTH = 8192, UB_DEPTH = 1024, ACC_DEPTH = 256;

  logic clk = 1'b0, rst_n = 1'b0;
  logic wm_we, ub_we, start, load_w, accumulate, busy, done, acc_re;
  logic [$clog2(WM_DEPTH)-1:0]  wm_waddr, wm_base;
  logic [$clog2(UB_DEPTH)-1:0]  ub_waddr, ub_base;
  logic [$clog2(UB_DEPTH):0]    num_vec;
  logic [$clog2(ACC_DEPTH)-1:0] acc_base, acc_raddr;
  wword_t wm_wdata [N];
  act_t   ub_wdata [N];
  acc_t   acc_rdata [N];
  vsel_t  col_vsel [N];
  logic [NUM_VLEVELS-1:0] col_sw_en [N];

  int checks = 0, failures = 0, cycle = 0;
  int W [K][N];        // W[input][neuron]
  int X [M][K];        // X[vector][input]
  int lvl [N];
  // mechanism counters
  int n_prefetch = 0, n_commit = 0, n_reuse = 0, n_overwrite = 0, n_accum = 0, n_vswitch = 0;
  int n_level [NUM_VLEVELS];

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  xtpu_top dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 12) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // count supply changes on the column outputs
  vsel_t prev_vsel [N];
  always @(posedge clk) begin
    if (rst_n)
      for (int c = 0; c < N; c++) begin
        if (col_vsel[c] != prev_vsel[c]) n_vswitch++;
        prev_vsel[c] <= col_vsel[c];
      end
  end

  task automatic write_tile(int row0, int in0, bit exact);
    for (int r = 0; r < N; r++) begin
      @(negedge clk);
      wm_we = 1; wm_waddr = 13'(row0 + r);
      for (int c = 0; c < N; c++) begin
        wm_wdata[c].w    = wgt_t'(W[in0 + r][c]);
        wm_wdata[c].vsel = exact ? vsel_t'(0) : vsel_t'(lvl[c]);
      end
    end
    @(negedge clk); wm_we = 0;
  endtask

  task automatic run(bit lw, int wb, int ub, int ab, bit acc, bit exact);
    int t0, t_done;
    @(negedge clk);
    start = 1; load_w = lw; wm_base = 13'(wb); ub_base = 10'(ub);
    num_vec = 11'(M); acc_base = 8'(ab); accumulate = acc;
    @(posedge clk); #1;
    t0 = cycle;
    start = 0;
    while (!done) begin @(posedge clk); #1; end
    t_done = cycle;
    check("start-to-done cycles", t_done - t0, lw ? 3 * N + 4 + M : 2 * N + 3 + M);
    if (lw) begin n_prefetch++; n_commit++; end else n_reuse++;
    if (acc) n_accum++; else n_overwrite++;
    @(posedge clk); #1;
    check("idle after done", int'(busy), 0);
    for (int c = 0; c < N; c++) begin
      int e = exact ? 0 : lvl[c];
      check("column selection", int'(col_vsel[c]), e);
      check("switch enables", int'(col_sw_en[c]), 1 << e);
      n_level[col_vsel[c]]++;
    end
  endtask

  // expected entry: sum over i < nin of W[w0 + i][c] * X[v][x0 + i]
  task automatic read_check(int ab, int w0, int x0, int nin);
    for (int v = 0; v < M; v++) begin
      @(negedge clk); acc_re = 1; acc_raddr = 8'(ab + v);
      @(negedge clk); acc_re = 0;
      for (int c = 0; c < N; c++) begin
        longint s = 0;
        for (int i = 0; i < nin; i++) s += longint'(W[w0 + i][c]) * X[v][x0 + i];
        check("layer output", longint'(acc_rdata[c]), s);
      end
    end
  endtask

  initial begin
    wm_we = 0; ub_we = 0; start = 0; load_w = 0; accumulate = 0; acc_re = 0;
    wm_waddr = '0; wm_base = '0; ub_waddr = '0; ub_base = '0; num_vec = '0;
    acc_base = '0; acc_raddr = '0;
    for (int c = 0; c < N; c++) begin wm_wdata[c] = '0; ub_wdata[c] = '0; prev_vsel[c] = '0; end
    foreach (n_level[k]) n_level[k] = 0;
    for (int i = 0; i < K; i++)
      for (int c = 0; c < N; c++) W[i][c] = int'(wgt_t'($urandom));
    for (int v = 0; v < M; v++)
      for (int i = 0; i < K; i++) X[v][i] = int'(act_t'($urandom));
    for (int c = 0; c < N; c++) lvl[c] = c % NUM_VLEVELS;
    repeat (3) @(posedge clk);
    rst_n = 1;

    write_tile(0, 0, 0);
    write_tile(16, 16, 0);
    write_tile(32, 0, 1);
    // inputs 0..15 of vector v at UB row v, inputs 16..31 at row M + v
    for (int h = 0; h < 2; h++)
      for (int v = 0; v < M; v++) begin
        @(negedge clk);
        ub_we = 1; ub_waddr = 10'(h * M + v);
        for (int i = 0; i < N; i++) ub_wdata[i] = act_t'(X[v][h * N + i]);
      end
    @(negedge clk); ub_we = 0;

    run(1, 0, 0, 0, 0, 0);
    run(1, 16, M, 0, 1, 0);
    read_check(0, 0, 0, K);
    run(1, 32, 0, 64, 0, 1);
    read_check(64, 0, 0, N);
    run(0, 0, M, 128, 0, 1);
    read_check(128, 0, 16, N);

    $display("mechanisms: prefetch=%0d commit=%0d reuse=%0d overwrite=%0d accumulate=%0d supply_switches=%0d",
             n_prefetch, n_commit, n_reuse, n_overwrite, n_accum, n_vswitch);
    checks += 6;
    if (n_prefetch == 0) begin failures++; $display("FAIL no weight prefetch"); end
    if (n_commit == 0)   begin failures++; $display("FAIL no commit"); end
    if (n_reuse == 0)    begin failures++; $display("FAIL no weight reuse"); end
    if (n_overwrite == 0) begin failures++; $display("FAIL no overwrite"); end
    if (n_accum == 0)    begin failures++; $display("FAIL no accumulation"); end
    if (n_vswitch == 0)  begin failures++; $display("FAIL no supply switch"); end
    foreach (n_level[k]) begin
      checks++;
      $display("level %0d (%0d mV) active on %0d column-commands", k, vlevel_mv(vsel_t'(k)), n_level[k]);
      if (n_level[k] == 0) begin failures++; $display("FAIL level %0d never used", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
