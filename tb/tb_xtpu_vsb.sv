// tb_xtpu_vsb: check of one column voltage switch box.
//
// After reset the box must select the exact supply (code 0, enable bit 0).
// Then 2000 cycles of random selection codes with random load and commit
// pulses are applied.  A reference model of the shadow and active
// selection is kept in the testbench; after every edge the active code and
// the switch enables are compared with it: the enables must be one-hot, with
// the bit of the active code set, and the code may change only on a commit.
// Every one of the four levels must become active at least once.
module tb_xtpu_vsb;
  import xtpu_pkg::*;

  logic        clk = 1'b0, rst_n = 1'b0;
  vsel_t       vsel_in, vsel;
  logic        vsel_load, vsel_commit;
  logic [NUM_VLEVELS-1:0] sw_en;
  int          checks = 0, failures = 0;
  int          seen [NUM_VLEVELS];

  always #5 clk = ~clk;

  xtpu_vsb dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
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
    int m_shadow = 0, m_active = 0;
    vsel_in = '0; vsel_load = 0; vsel_commit = 0;
    foreach (seen[k]) seen[k] = 0;
    repeat (2) @(posedge clk);
    #1;
    check("reset code", int'(vsel), 0);
    check("reset enables", int'(sw_en), 1);
    rst_n = 1'b1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      vsel_in     = vsel_t'($urandom);
      vsel_load   = ($urandom % 2) == 0;
      vsel_commit = ($urandom % 5) == 0;
      @(posedge clk);
      if (vsel_commit) m_active = m_shadow;
      if (vsel_load)   m_shadow = int'(vsel_in);
      #1;
      check("active code", int'(vsel), m_active);
      check("enables", int'(sw_en), 1 << m_active);
      seen[m_active]++;
    end
    foreach (seen[k]) begin
      checks++;
      if (seen[k] == 0) begin failures++; $display("FAIL level %0d never selected", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
