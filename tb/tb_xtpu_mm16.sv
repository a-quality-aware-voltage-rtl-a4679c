// tb_xtpu_mm16: the 16 x 16 matrix-multiplication benchmark on the X-TPU.
//
// C = A x W for a 16 x 16 activation matrix A (16 vectors) and a 16 x 16
// weight matrix W whose columns carry pseudo-random voltage levels, the way
// an offline assignment would label them.  The same product is run three
// times with the same data: all columns exact, with the assigned levels, and
// with every column at the lowest supply, reusing the weight memory rows
// 0..15 with different selection bits in rows 16..31 and 32..47.  In every
// run the full 16 x 16 result must match the product computed here (in
// the logic the supply choice changes energy, not the result), the column
// selection codes must match the stored bits, and the run must take
// 3N + 4 + 16 = 68 cycles from start to done.
module tb_xtpu_mm16;
  import xtpu_pkg::*;

  localparam int N = ARRAY_N;

  logic clk = 1'b0, rst_n = 1'b0;
  logic wm_we, ub_we, start, load_w, accumulate, busy, done, acc_re;
  logic [12:0] wm_waddr, wm_base;
  logic [9:0]  ub_waddr, ub_base;
  logic [10:0] num_vec;
  logic [7:0]  acc_base, acc_raddr;
  wword_t wm_wdata [N];
  act_t   ub_wdata [N];
  acc_t   acc_rdata [N];
  vsel_t  col_vsel [N];
  logic [NUM_VLEVELS-1:0] col_sw_en [N];

  int checks = 0, failures = 0, cycle = 0;
  int A [N][N], W [N][N], lvl [3][N];

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  xtpu_top dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
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

  initial begin
    wm_we = 0; ub_we = 0; start = 0; load_w = 0; accumulate = 0; acc_re = 0;
    wm_waddr = '0; wm_base = '0; ub_waddr = '0; ub_base = '0; num_vec = '0;
    acc_base = '0; acc_raddr = '0;
    for (int c = 0; c < N; c++) begin wm_wdata[c] = '0; ub_wdata[c] = '0; end
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        A[r][c] = int'(act_t'($urandom));
        W[r][c] = int'(wgt_t'($urandom));
      end
    for (int c = 0; c < N; c++) begin
      lvl[0][c] = 0;
      lvl[1][c] = int'($urandom % NUM_VLEVELS);
      lvl[2][c] = NUM_VLEVELS - 1;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 3; k++)
      for (int r = 0; r < N; r++) begin
        @(negedge clk);
        wm_we = 1; wm_waddr = 13'(k * N + r);
        for (int c = 0; c < N; c++) begin
          wm_wdata[c].w = wgt_t'(W[r][c]);
          wm_wdata[c].vsel = vsel_t'(lvl[k][c]);
        end
      end
    @(negedge clk); wm_we = 0;
    for (int r = 0; r < N; r++) begin
      @(negedge clk);
      ub_we = 1; ub_waddr = 10'(r);
      for (int i = 0; i < N; i++) ub_wdata[i] = act_t'(A[r][i]);
    end
    @(negedge clk); ub_we = 0;

    for (int k = 0; k < 3; k++) begin
      automatic int t0;
      @(negedge clk);
      start = 1; load_w = 1; wm_base = 13'(k * N); ub_base = '0;
      num_vec = 11'(N); acc_base = 8'(k * 32); accumulate = 0;
      @(posedge clk); #1; t0 = cycle;
      start = 0;
      while (!done) begin @(posedge clk); #1; end
      check("cycles", cycle - t0, 3 * N + 4 + N);
      for (int c = 0; c < N; c++) begin
        check("column level", int'(col_vsel[c]), lvl[k][c]);
        check("switch enables", int'(col_sw_en[c]), 1 << lvl[k][c]);
      end
      for (int r = 0; r < N; r++) begin
        @(negedge clk); acc_re = 1; acc_raddr = 8'(k * 32 + r);
        @(negedge clk); acc_re = 0;
        for (int c = 0; c < N; c++) begin
          automatic longint s = 0;
          for (int i = 0; i < N; i++) s += longint'(A[r][i]) * W[i][c];
          check("C entry", longint'(acc_rdata[c]), s);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
