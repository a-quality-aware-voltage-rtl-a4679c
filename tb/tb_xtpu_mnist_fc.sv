// tb_xtpu_mnist_fc: a 784-128-10 fully connected network (the size used for
// MNIST digits: 28 x 28 = 784 inputs, 128 hidden neurons, 10 outputs) run on
// the X-TPU at its default size, for B = 2 input images.
//
// The trained weights are not available, so weights (-128..127) and pixel
// values (0..127) are pseudo-random.  Each neuron gets a voltage level, as
// the offline assignment would give it: hidden neuron n runs at level n mod 4
// (all four supplies in use), the ten output neurons run exact.  The levels
// are stored as the selection bits of every weight word of that neuron.
//
// Mapping (done by the host, i.e. this testbench):
//   layer 1: 49 row tiles (16 inputs each) x 8 column tiles (16 neurons);
//            tile (kt, ct) at weight rows (ct*49 + kt)*16; image b's inputs
//            kt*16.. at unified-buffer row kt*B + b.  For each ct the 49 row
//            tiles are run in turn, the first overwriting and the others
//            adding into accumulator entries ct*B + b.
//   between layers: linear activation; the host reads the 32-bit hidden
//            values, requantises them to 8 bits (arithmetic shift right by 12,
//            saturate to -128..127) and writes them back as layer-2 vectors.
//   layer 2: 8 row tiles x 1 column tile (columns 10..15 hold zero weights).
//   Layer 2 is run twice: after a linear activation (above), and after a
//   sigmoid activation, the two activation functions of the paper's MNIST
//   experiments: hidden value h becomes round-down(127 / (1 + exp(-h / 2^16))).
//   The sigmoid is also computed by the host; the array is the same.
// The 10 outputs of each image are compared with a reference computed here
// with the same requantisation, and after every weight load the column
// selection codes are compared with the assigned levels.
module tb_xtpu_mnist_fc;
  import xtpu_pkg::*;

  localparam int N = ARRAY_N;
  localparam int B = 2;
  localparam int NIN = 784, NHID = 128, NOUT = 10;
  localparam int KT1 = (NIN + N - 1) / N;     // 49
  localparam int CT1 = NHID / N;              // 8
  localparam int KT2 = NHID / N;              // 8
  localparam int L2_WROW = CT1 * KT1 * N;     // 6272
  localparam int L2_UROW = KT1 * B;           // 98
  localparam int SHIFT = 12;
  localparam real SIG_SCALE = 65536.0;

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

  int checks = 0, failures = 0;
  int W1 [NIN][NHID];
  int W2 [NHID][NOUT];
  int X  [B][NIN];
  int H8 [B][NHID];
  int HS [B][NHID];       // sigmoid activations
  int lvl1 [NHID];
  int n_cmd = 0, n_level [NUM_VLEVELS];

  always #5 clk = ~clk;

  xtpu_top dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
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

  function automatic int requant(longint v);
    longint s = v >>> SHIFT;
    if (s > 127) return 127;
    if (s < -128) return -128;
    return int'(s);
  endfunction

  task automatic run(bit lw, int wb, int ub, int ab, bit acc, int exp_lvl [N]);
    @(negedge clk);
    start = 1; load_w = lw; wm_base = 13'(wb); ub_base = 10'(ub);
    num_vec = 11'(B); acc_base = 8'(ab); accumulate = acc;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    n_cmd++;
    for (int c = 0; c < N; c++) begin
      check("column level", longint'(col_vsel[c]), longint'(exp_lvl[c]));
      n_level[col_vsel[c]]++;
    end
  endtask

  function automatic int sig8(longint v);
    return $rtoi(127.0 / (1.0 + $exp(-real'(v) / SIG_SCALE)));
  endfunction

  task automatic read_acc(int ab, output longint v [N]);
    @(negedge clk); acc_re = 1; acc_raddr = 8'(ab);
    @(negedge clk); acc_re = 0;
    for (int c = 0; c < N; c++) v[c] = longint'(acc_rdata[c]);
  endtask

  initial begin
    int lv [N];
    longint v [N];
    wm_we = 0; ub_we = 0; start = 0; load_w = 0; accumulate = 0; acc_re = 0;
    wm_waddr = '0; wm_base = '0; ub_waddr = '0; ub_base = '0; num_vec = '0;
    acc_base = '0; acc_raddr = '0;
    for (int c = 0; c < N; c++) begin wm_wdata[c] = '0; ub_wdata[c] = '0; end
    foreach (n_level[k]) n_level[k] = 0;
    for (int i = 0; i < NIN; i++) for (int n = 0; n < NHID; n++) W1[i][n] = int'(wgt_t'($urandom));
    for (int i = 0; i < NHID; i++) for (int n = 0; n < NOUT; n++) W2[i][n] = int'(wgt_t'($urandom));
    for (int b = 0; b < B; b++) for (int i = 0; i < NIN; i++) X[b][i] = int'($urandom % 128);
    for (int n = 0; n < NHID; n++) lvl1[n] = n % NUM_VLEVELS;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // weight memory: layer 1 tiles, then layer 2 tiles
    for (int ct = 0; ct < CT1; ct++)
      for (int kt = 0; kt < KT1; kt++)
        for (int r = 0; r < N; r++) begin
          automatic int i = kt * N + r;
          @(negedge clk);
          wm_we = 1; wm_waddr = 13'((ct * KT1 + kt) * N + r);
          for (int c = 0; c < N; c++) begin
            wm_wdata[c].w    = (i < NIN) ? wgt_t'(W1[i][ct * N + c]) : wgt_t'(0);
            wm_wdata[c].vsel = vsel_t'(lvl1[ct * N + c]);
          end
        end
    for (int kt = 0; kt < KT2; kt++)
      for (int r = 0; r < N; r++) begin
        @(negedge clk);
        wm_we = 1; wm_waddr = 13'(L2_WROW + kt * N + r);
        for (int c = 0; c < N; c++) begin
          wm_wdata[c].w    = (c < NOUT) ? wgt_t'(W2[kt * N + r][c]) : wgt_t'(0);
          wm_wdata[c].vsel = vsel_t'(0);
        end
      end
    @(negedge clk); wm_we = 0;

    // unified buffer: layer 1 input vectors
    for (int kt = 0; kt < KT1; kt++)
      for (int b = 0; b < B; b++) begin
        @(negedge clk);
        ub_we = 1; ub_waddr = 10'(kt * B + b);
        for (int r = 0; r < N; r++) ub_wdata[r] = act_t'(X[b][kt * N + r]);
      end
    @(negedge clk); ub_we = 0;

    // layer 1
    for (int ct = 0; ct < CT1; ct++) begin
      for (int c = 0; c < N; c++) lv[c] = lvl1[ct * N + c];
      for (int kt = 0; kt < KT1; kt++)
        run(1, (ct * KT1 + kt) * N, kt * B, ct * B, kt != 0, lv);
    end
    // hidden values: check, requantise, write layer-2 vectors
    for (int ct = 0; ct < CT1; ct++)
      for (int b = 0; b < B; b++) begin
        read_acc(ct * B + b, v);
        for (int c = 0; c < N; c++) begin
          automatic longint s = 0;
          automatic int n = ct * N + c;
          for (int i = 0; i < NIN; i++) s += longint'(W1[i][n]) * X[b][i];
          check("hidden value", v[c], s);
          H8[b][n] = requant(v[c]);
          HS[b][n] = sig8(v[c]);
        end
      end
    for (int kt = 0; kt < KT2; kt++)
      for (int b = 0; b < B; b++) begin
        @(negedge clk);
        ub_we = 1; ub_waddr = 10'(L2_UROW + kt * B + b);
        for (int r = 0; r < N; r++) ub_wdata[r] = act_t'(H8[b][kt * N + r]);
      end
    @(negedge clk); ub_we = 0;

    // layer 2
    for (int c = 0; c < N; c++) lv[c] = 0;
    for (int kt = 0; kt < KT2; kt++)
      run(1, L2_WROW + kt * N, L2_UROW + kt * B, 200, kt != 0, lv);
    for (int b = 0; b < B; b++) begin
      @(negedge clk); acc_re = 1; acc_raddr = 8'(200 + b);
      @(negedge clk); acc_re = 0;
      for (int o = 0; o < N; o++) begin
        automatic longint s = 0;
        if (o < NOUT)
          for (int n = 0; n < NHID; n++) begin
            automatic longint h = 0;
            for (int i = 0; i < NIN; i++) h += longint'(W1[i][n]) * X[b][i];
            s += longint'(W2[n][o]) * requant(h);
          end
        check("network output", longint'(acc_rdata[o]), s);
      end
    end

    // layer 2 again with sigmoid activations, into accumulator 210..
    for (int kt = 0; kt < KT2; kt++)
      for (int b = 0; b < B; b++) begin
        @(negedge clk);
        ub_we = 1; ub_waddr = 10'(L2_UROW + kt * B + b);
        for (int r = 0; r < N; r++) ub_wdata[r] = act_t'(HS[b][kt * N + r]);
      end
    @(negedge clk); ub_we = 0;
    for (int kt = 0; kt < KT2; kt++)
      run(1, L2_WROW + kt * N, L2_UROW + kt * B, 210, kt != 0, lv);
    for (int b = 0; b < B; b++) begin
      @(negedge clk); acc_re = 1; acc_raddr = 8'(210 + b);
      @(negedge clk); acc_re = 0;
      for (int o = 0; o < NOUT; o++) begin
        automatic longint s = 0;
        for (int n = 0; n < NHID; n++) s += longint'(W2[n][o]) * HS[b][n];
        check("network output (sigmoid)", longint'(acc_rdata[o]), s);
      end
    end
    // the sigmoid must not be stuck at one end for every neuron
    checks++;
    begin
      automatic int n_mid = 0;
      for (int b = 0; b < B; b++) for (int n = 0; n < NHID; n++) if (HS[b][n] > 0 && HS[b][n] < 127) n_mid++;
      $display("sigmoid activations strictly between 0 and 127: %0d of %0d", n_mid, B * NHID);
      if (n_mid == 0) begin failures++; $display("FAIL sigmoid saturated everywhere"); end
    end

    $display("commands=%0d", n_cmd);
    foreach (n_level[k]) begin
      checks++;
      $display("level %0d (%0d mV) on %0d column-commands", k, vlevel_mv(vsel_t'(k)), n_level[k]);
      if (n_level[k] == 0) begin failures++; $display("FAIL level %0d never used", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
