// tb_xtpu_accumulator: overwrite and accumulate check of the partial-sum
// storage.
//
// Column results are fed the way the array delivers them: column c one
// cycle after column c-1, one result per column per cycle.  Three passes
// are made: (1) 10 results per column written at base 20 with accumulate=0,
// (2) 10 more added to the same entries with accumulate=1, (3) 10 results
// written at base 100 with accumulate=0.  A reference copy of every entry is
// kept in the testbench and the whole touched range of every column is read
// back (one-cycle read latency) and compared.
module tb_xtpu_accumulator;
  import xtpu_pkg::*;

  localparam int N = ARRAY_N;
  localparam int DEPTH = 256;
  localparam int AW = $clog2(DEPTH);
  localparam int M = 10;

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          start, accumulate, re;
  logic [AW-1:0] base, raddr;
  psum_t         psum [N];
  logic          psum_valid [N];
  acc_t          rdata [N];
  int            checks = 0, failures = 0;
  longint        model [N][DEPTH];

  always #5 clk = ~clk;

  xtpu_accumulator #(.N(N), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pass(int b, bit acc);
    int vals [N][M];
    @(negedge clk);
    start = 1; base = AW'(b); accumulate = acc;
    @(negedge clk);
    start = 0;
    for (int c = 0; c < N; c++)
      for (int k = 0; k < M; k++) begin
        vals[c][k] = $signed($urandom % 16000000) - 8000000;
        if (acc) model[c][b+k] = longint'(acc_t'(model[c][b+k] + vals[c][k]));
        else     model[c][b+k] = vals[c][k];
      end
    // column c emits result k in cycle k + c
    for (int t = 0; t < M + N - 1; t++) begin
      for (int c = 0; c < N; c++) begin
        int k = t - c;
        psum_valid[c] = (k >= 0 && k < M);
        psum[c] = (k >= 0 && k < M) ? psum_t'(vals[c][k]) : psum_t'($urandom);
      end
      @(negedge clk);
    end
    for (int c = 0; c < N; c++) psum_valid[c] = 0;
  endtask

  task automatic readback(int b);
    for (int a = b; a < b + M; a++) begin
      @(negedge clk); re = 1; raddr = AW'(a);
      @(negedge clk); re = 0;
      for (int c = 0; c < N; c++) begin
        checks++;
        if (longint'(rdata[c]) != model[c][a]) begin
          failures++;
          if (failures < 10) $display("FAIL col %0d entry %0d got %0d expected %0d", c, a, rdata[c], model[c][a]);
        end
      end
    end
  endtask

  initial begin
    start = 0; accumulate = 0; re = 0; base = '0; raddr = '0;
    for (int c = 0; c < N; c++) begin psum[c] = '0; psum_valid[c] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    pass(20, 0);
    readback(20);
    pass(20, 1);
    pass(100, 0);
    readback(20);
    readback(100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
