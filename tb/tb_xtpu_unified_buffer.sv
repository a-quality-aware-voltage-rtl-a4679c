// tb_xtpu_unified_buffer: write / read check of the activation buffer.
//
// A reduced depth (128 vectors) keeps the run short.  Random vectors are
// written to every address and then read back in random order, one read
// every cycle (back-to-back, as while streaming), and compared element by
// element with a copy kept in the testbench, one cycle after each read.
module tb_xtpu_unified_buffer;
  import xtpu_pkg::*;

  localparam int N = ARRAY_N;
  localparam int DEPTH = 128;
  localparam int AW = $clog2(DEPTH);

  logic          clk = 1'b0;
  logic          we, re;
  logic [AW-1:0] waddr, raddr;
  act_t          wdata [N], rdata [N];
  int            checks = 0, failures = 0;
  int            model [DEPTH][N];

  always #5 clk = ~clk;

  xtpu_unified_buffer #(.N(N), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int prev = -1;
    we = 0; re = 0; waddr = '0; raddr = '0;
    for (int c = 0; c < N; c++) wdata[c] = '0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a);
      for (int c = 0; c < N; c++) begin
        model[a][c] = int'(act_t'($urandom));
        wdata[c] = act_t'(model[a][c]);
      end
    end
    @(negedge clk); we = 0;
    for (int k = 0; k <= 4 * DEPTH; k++) begin
      @(negedge clk);
      if (prev >= 0)
        for (int c = 0; c < N; c++) begin
          checks++;
          if (int'(rdata[c]) != model[prev][c]) begin
            failures++;
            if (failures < 10) $display("FAIL row %0d elem %0d got %0d expected %0d", prev, c, rdata[c], model[prev][c]);
          end
        end
      if (k < 4 * DEPTH) begin
        prev = int'($urandom % DEPTH);
        re = 1; raddr = AW'(prev);
      end else re = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
