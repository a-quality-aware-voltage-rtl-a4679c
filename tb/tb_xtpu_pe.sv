// tb_xtpu_pe: cycle-by-cycle check of one processing element.
//
// Random activations, weights, partial sums and random w_shift / w_commit
// pulses are applied for 4000 cycles.  A reference model kept in plain
// integers tracks the prefetch weight, the stationary weight, the
// activation register and the partial sum, and every output of the PE is
// compared with it after each clock edge: w_out (prefetch chain), act_out
// and act_valid_out (one-cycle pass-through), and
// psum_out = previous psum_in + previous activation * stationary weight.
module tb_xtpu_pe;
  import xtpu_pkg::*;

  logic  clk = 1'b0, rst_n = 1'b0;
  act_t  act_in, act_out;
  logic  act_valid_in, act_valid_out;
  wgt_t  w_in, w_out;
  logic  w_shift, w_commit;
  psum_t psum_in, psum_out;
  int    checks = 0, failures = 0;

  always #5 clk = ~clk;

  xtpu_pe dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  initial begin
    int m_pre = 0, m_stat = 0, m_act = 0, m_vld = 0, m_psum = 0;
    int n_commit = 0;
    act_in = '0; act_valid_in = 0; w_in = '0; w_shift = 0; w_commit = 0; psum_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      act_in       = act_t'($urandom);
      act_valid_in = 1'($urandom);
      w_in         = wgt_t'($urandom);
      w_shift      = ($urandom % 3) == 0;
      w_commit     = ($urandom % 7) == 0;
      psum_in      = psum_t'($signed($urandom % 8000000) - 4000000);
      @(posedge clk);
      // reference update with the values present at this edge
      m_psum = int'(psum_t'(int'(psum_in) + m_act * m_stat));
      if (w_commit) begin m_stat = m_pre; n_commit++; end
      if (w_shift) m_pre = int'(w_in);
      m_act = int'(act_in);
      m_vld = int'(act_valid_in);
      #1;
      check("w_out", int'(w_out), m_pre);
      check("act_out", int'(act_out), m_act);
      check("act_valid_out", int'(act_valid_out), m_vld);
      check("psum_out", int'(psum_out), m_psum);
    end
    if (n_commit == 0) begin failures++; $display("no commit happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
