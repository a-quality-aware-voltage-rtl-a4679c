// tb_xtpu_control: sequence and cycle-count check of the control unit.
//
// The control unit runs alone.  The array's result latency is stood in for
// by a chain of L = 2N registers from act_valid to last_col_valid (what
// the 16 x 16 array gives its last column).  Three commands are issued:
// with a weight load (M = 5), without one (M = 3), and with a weight load
// and no vectors (M = 0).  Checked: the weight-memory read addresses
// (wm_base+N-1 down to wm_base), w_shift and vsel_load one cycle after each
// read, exactly one w_commit per loading command and none otherwise, the
// unified-buffer addresses ub_base .. ub_base+M-1 followed one cycle later by
// act_valid, acc_start with the command's base and mode, a single done pulse,
// and the start-to-done time: N + 4 + M + L cycles with a weight load and
// 3 + M + L without (N + 2 for a load with no vectors).
module tb_xtpu_control;
  import xtpu_pkg::*;

  localparam int N = ARRAY_N;
  localparam int WM_DEPTH = 8192, UB_DEPTH = 1024, ACC_DEPTH = 256;
  localparam int L = 2 * N;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start, load_w, accumulate, busy, done;
  logic [$clog2(WM_DEPTH)-1:0]  wm_base, wm_raddr;
  logic [$clog2(UB_DEPTH)-1:0]  ub_base, ub_raddr;
  logic [$clog2(UB_DEPTH):0]    num_vec;
  logic [$clog2(ACC_DEPTH)-1:0] acc_base, acc_base_o;
  logic wm_re, w_shift, vsel_load, w_commit, ub_re, act_valid, acc_start, acc_accum_o;
  logic last_col_valid;
  logic [L-1:0] lat;
  int   checks = 0, failures = 0, cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycle <= cycle + 1;
    lat   <= rst_n ? {lat[L-2:0], act_valid} : '0;
  end
  assign last_col_valid = lat[L-1];

  xtpu_control #(.N(N), .WM_DEPTH(WM_DEPTH), .UB_DEPTH(UB_DEPTH), .ACC_DEPTH(ACC_DEPTH)) dut (.*);

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 12) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic run(bit lw, int wb, int ub, int m, int ab, bit acc);
    int t0, n_wm = 0, n_shift = 0, n_commit = 0, n_ub = 0, n_act = 0, n_done = 0, n_accs = 0;
    bit prev_wm = 0, prev_ub = 0;
    @(negedge clk);
    start = 1; load_w = lw; wm_base = 13'(wb); ub_base = 10'(ub);
    num_vec = 11'(m); acc_base = 8'(ab); accumulate = acc;
    @(posedge clk); #1;
    t0 = cycle;
    start = 0; load_w = 0; wm_base = '0; ub_base = '0; acc_base = '0;
    while (1) begin
      if (!busy) break;
      if (w_shift) begin check("w_shift after read", int'(prev_wm), 1); n_shift++; end
      check("vsel_load with w_shift", int'(vsel_load), int'(w_shift));
      if (act_valid) begin check("act_valid after read", int'(prev_ub), 1); n_act++; end
      if (wm_re) begin check("wm_raddr", int'(wm_raddr), wb + N - 1 - n_wm); n_wm++; end
      if (ub_re) begin check("ub_raddr", int'(ub_raddr), ub + n_ub); n_ub++; end
      if (w_commit) begin check("commit after all shifts", n_shift, N); n_commit++; end
      if (acc_start) begin
        n_accs++;
        check("acc base", int'(acc_base_o), ab);
        check("acc mode", int'(acc_accum_o), int'(acc));
      end
      if (done) begin n_done++; check("done time", cycle - t0, (m == 0) ? (lw ? N + 2 : 1) : (lw ? N + 4 + m + L : 3 + m + L)); end
      prev_wm = wm_re; prev_ub = ub_re;
      @(posedge clk); #1;
    end
    check("weight reads", n_wm, lw ? N : 0);
    check("commits", n_commit, lw ? 1 : 0);
    check("vectors", n_act, m);
    check("acc starts", n_accs, 1);
    check("done pulses", n_done, 1);
  endtask

  initial begin
    start = 0; load_w = 0; accumulate = 0; wm_base = '0; ub_base = '0; num_vec = '0; acc_base = '0;
    lat = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1, 32, 7, 5, 9, 0);
    repeat (L + 2) @(posedge clk);
    run(0, 0, 100, 3, 40, 1);
    repeat (L + 2) @(posedge clk);
    run(1, 4000, 0, 0, 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
