// tb_xtpu_weight_mem: write / read check of the modified weight memory.
//
// A reduced depth (256 rows) keeps the run short; the logic does not depend
// on the depth.  Random rows of N words (2 selection bits above an 8-bit
// weight) are written to every address, then read back in random order and
// compared field by field with a copy kept in the testbench, checking the
// one-cycle read latency.  A final read of a row that is rewritten in the
// same cycle must return the old contents.
module tb_xtpu_weight_mem;
  import xtpu_pkg::*;

  localparam int N = ARRAY_N;
  localparam int DEPTH = 256;
  localparam int AW = $clog2(DEPTH);

  logic          clk = 1'b0;
  logic          we, re;
  logic [AW-1:0] waddr, raddr;
  wword_t        wdata [N], rdata [N];
  int            checks = 0, failures = 0;
  int            model_w [DEPTH][N];
  int            model_v [DEPTH][N];

  always #5 clk = ~clk;

  xtpu_weight_mem #(.N(N), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare_row(int a);
    for (int c = 0; c < N; c++) begin
      checks += 2;
      if (int'(rdata[c].w) != model_w[a][c]) begin
        failures++;
        if (failures < 10) $display("FAIL row %0d col %0d weight %0d expected %0d", a, c, rdata[c].w, model_w[a][c]);
      end
      if (int'(rdata[c].vsel) != model_v[a][c]) begin
        failures++;
        if (failures < 10) $display("FAIL row %0d col %0d vsel %0d expected %0d", a, c, rdata[c].vsel, model_v[a][c]);
      end
    end
  endtask

  initial begin
    we = 0; re = 0; waddr = '0; raddr = '0;
    for (int c = 0; c < N; c++) wdata[c] = '0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a);
      for (int c = 0; c < N; c++) begin
        model_w[a][c] = int'(wgt_t'($urandom));
        model_v[a][c] = int'(vsel_t'($urandom));
        wdata[c].w    = wgt_t'(model_w[a][c]);
        wdata[c].vsel = vsel_t'(model_v[a][c]);
      end
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 2 * DEPTH; k++) begin
      automatic int a = int'($urandom % DEPTH);
      @(negedge clk); re = 1; raddr = AW'(a);
      @(negedge clk); re = 0;
      compare_row(a);
    end
    // read-during-write of the same row returns the old data
    @(negedge clk);
    re = 1; raddr = AW'(5); we = 1; waddr = AW'(5);
    for (int c = 0; c < N; c++) wdata[c] = ~wword_t'({vsel_t'(model_v[5][c]), wgt_t'(model_w[5][c])});
    @(negedge clk); re = 0; we = 0;
    compare_row(5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
