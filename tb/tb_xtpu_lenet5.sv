// tb_xtpu_lenet5: one LeNet-5 inference (one 28 x 28 image) run layer by
// layer on the X-TPU at its default size.
//
// Layers (the usual LeNet-5 sizes for MNIST):
//   conv1 5x5, 1 -> 6 channels, input zero-padded to 32 x 32 -> 28x28x6
//   2x2 max pool                                             -> 14x14x6
//   conv2 5x5, 6 -> 16 channels, no padding                  -> 10x10x16
//   2x2 max pool                                             -> 5x5x16 = 400
//   FC 400 -> 120, FC 120 -> 84, FC 84 -> 10
// Trained weights are not available: weights (-128..127) and pixels
// (0..127) are pseudo-random.  Neuron / output channel n of every layer but
// the last runs at voltage level n mod 4; the last layer runs exact.
//
// Every layer is a matrix product Y[p][n] = sum_i A[p][i] * W[i][n].  For a
// convolution, row p of A is the 5x5xCin input patch of output pixel p, with
// element index i = (ky * 5 + kx) * Cin + ci; the host (this testbench)
// unrolls the patches.  The host also applies ReLU, requantisation to 8 bits
// (arithmetic shift right by 10, saturate to 127) and max pooling, for which
// the paper describes no hardware.
//
// A layer with K inputs and NO outputs is cut into ceil(K/16) row tiles and
// ceil(NO/16) column tiles; tile (ct, kt) sits at weight rows
// (ct * KT + kt) * 16.  The patches are processed in chunks of PC vectors
// that fit the unified buffer (KT * PC vectors) and the accumulator
// (CT * PC entries); per chunk and column tile the row tiles run in turn,
// the first overwriting and the others adding.  Every accumulator result is
// compared with the matrix product computed here, and after every weight load
// the column selection codes with the assigned levels.
module tb_xtpu_lenet5;
  import xtpu_pkg::*;

  localparam int N = ARRAY_N;
  localparam int SHIFT = 10;
  localparam int UB_DEPTH = 1024, ACC_DEPTH = 256;

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
  int n_cmd = 0, n_level [NUM_VLEVELS];

  // operands of the layer being run: W[i * NO + n], A[p * K + i], Y[p * NO + n]
  int  Wg [];
  int  Ag [];
  longint Yg [];
  int  Lg [];            // voltage level per output neuron / channel

  always #5 clk = ~clk;

  xtpu_top dut (.*);

  initial begin
    repeat (1000000) @(posedge clk);
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

  // ReLU, then requantise to 0..127
  function automatic int act8(longint v);
    longint s = v >>> SHIFT;
    if (s < 0) return 0;
    if (s > 127) return 127;
    return int'(s);
  endfunction

  task automatic run(int wb, int ub, int ab, int nv, bit acc, int ct);
    @(negedge clk);
    start = 1; load_w = 1; wm_base = 13'(wb); ub_base = 10'(ub);
    num_vec = 11'(nv); acc_base = 8'(ab); accumulate = acc;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    n_cmd++;
    for (int c = 0; c < N; c++) begin
      int n = ct * N + c;
      if (n < Lg.size()) begin
        check("column level", longint'(col_vsel[c]), longint'(Lg[n]));
        n_level[col_vsel[c]]++;
      end
    end
  endtask

  // Y = A x W on the array, P patches of K inputs, NO outputs
  task automatic layer(string name, int K, int NO, int P);
    int KT = (K + N - 1) / N;
    int CT = (NO + N - 1) / N;
    int PC = UB_DEPTH / KT;
    int cmd0 = n_cmd;
    if (ACC_DEPTH / CT < PC) PC = ACC_DEPTH / CT;
    if (P < PC) PC = P;
    Yg = new[P * NO];
    // weight tiles
    for (int ct = 0; ct < CT; ct++)
      for (int kt = 0; kt < KT; kt++)
        for (int r = 0; r < N; r++) begin
          int i = kt * N + r;
          @(negedge clk);
          wm_we = 1; wm_waddr = 13'((ct * KT + kt) * N + r);
          for (int c = 0; c < N; c++) begin
            int n = ct * N + c;
            wm_wdata[c].w    = (i < K && n < NO) ? wgt_t'(Wg[i * NO + n]) : wgt_t'(0);
            wm_wdata[c].vsel = (n < NO) ? vsel_t'(Lg[n]) : vsel_t'(0);
          end
        end
    @(negedge clk); wm_we = 0;
    // patches in chunks
    for (int p0 = 0; p0 < P; p0 += PC) begin
      int pc = (P - p0 < PC) ? P - p0 : PC;
      for (int kt = 0; kt < KT; kt++)
        for (int p = 0; p < pc; p++) begin
          @(negedge clk);
          ub_we = 1; ub_waddr = 10'(kt * PC + p);
          for (int r = 0; r < N; r++) begin
            int i = kt * N + r;
            ub_wdata[r] = (i < K) ? act_t'(Ag[(p0 + p) * K + i]) : act_t'(0);
          end
        end
      @(negedge clk); ub_we = 0;
      for (int ct = 0; ct < CT; ct++)
        for (int kt = 0; kt < KT; kt++)
          run((ct * KT + kt) * N, kt * PC, ct * PC, pc, kt != 0, ct);
      for (int ct = 0; ct < CT; ct++)
        for (int p = 0; p < pc; p++) begin
          @(negedge clk); acc_re = 1; acc_raddr = 8'(ct * PC + p);
          @(negedge clk); acc_re = 0;
          for (int c = 0; c < N; c++) begin
            int n = ct * N + c;
            if (n < NO) begin
              longint s = 0;
              for (int i = 0; i < K; i++) s += longint'(Wg[i * NO + n]) * Ag[(p0 + p) * K + i];
              check({name, " output"}, longint'(acc_rdata[c]), s);
              Yg[(p0 + p) * NO + n] = longint'(acc_rdata[c]);
            end
          end
        end
    end
    $display("%s: %0d x %0d weights, %0d vectors, %0d row x %0d column tiles, %0d commands",
             name, K, NO, P, KT, CT, n_cmd - cmd0);
  endtask

  task automatic rand_layer(int K, int NO, bit exact);
    Wg = new[K * NO];
    Lg = new[NO];
    foreach (Wg[k]) Wg[k] = int'(wgt_t'($urandom));
    foreach (Lg[n]) Lg[n] = exact ? 0 : n % NUM_VLEVELS;
  endtask

  // unroll 5x5 patches of a HxWxC map (index (y * W + x) * C + ch) into Ag
  task automatic unroll(const ref int fm [], input int H, int Wd, int C);
    int OH = H - 4, OW = Wd - 4, K = 25 * C;
    Ag = new[OH * OW * K];
    for (int y = 0; y < OH; y++)
      for (int x = 0; x < OW; x++)
        for (int ky = 0; ky < 5; ky++)
          for (int kx = 0; kx < 5; kx++)
            for (int ch = 0; ch < C; ch++)
              Ag[(y * OW + x) * K + (ky * 5 + kx) * C + ch] = fm[((y + ky) * Wd + x + kx) * C + ch];
  endtask

  // ReLU + requantise Yg (H x W x C) and 2x2 max pool into fm
  task automatic pool(ref int fm [], input int H, int Wd, int C);
    fm = new[(H / 2) * (Wd / 2) * C];
    for (int y = 0; y < H / 2; y++)
      for (int x = 0; x < Wd / 2; x++)
        for (int ch = 0; ch < C; ch++) begin
          int m = 0;
          for (int dy = 0; dy < 2; dy++)
            for (int dx = 0; dx < 2; dx++) begin
              int a = act8(Yg[((2 * y + dy) * Wd + 2 * x + dx) * C + ch]);
              if (a > m) m = a;
            end
          fm[(y * (Wd / 2) + x) * C + ch] = m;
        end
  endtask

  initial begin
    int fm [];
    int nz;
    wm_we = 0; ub_we = 0; start = 0; load_w = 0; accumulate = 0; acc_re = 0;
    wm_waddr = '0; wm_base = '0; ub_waddr = '0; ub_base = '0; num_vec = '0;
    acc_base = '0; acc_raddr = '0;
    for (int c = 0; c < N; c++) begin wm_wdata[c] = '0; ub_wdata[c] = '0; end
    foreach (n_level[k]) n_level[k] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // input image, zero-padded to 32 x 32, one channel
    fm = new[32 * 32];
    foreach (fm[k]) fm[k] = 0;
    for (int y = 0; y < 28; y++)
      for (int x = 0; x < 28; x++) fm[(y + 2) * 32 + x + 2] = int'($urandom % 128);

    rand_layer(25, 6, 0);
    unroll(fm, 32, 32, 1);
    layer("conv1", 25, 6, 28 * 28);
    pool(fm, 28, 28, 6);

    rand_layer(150, 16, 0);
    unroll(fm, 14, 14, 6);
    layer("conv2", 150, 16, 10 * 10);
    pool(fm, 10, 10, 16);

    rand_layer(400, 120, 0);
    Ag = new[400];
    foreach (Ag[k]) Ag[k] = fm[k];
    layer("fc1", 400, 120, 1);

    rand_layer(120, 84, 0);
    Ag = new[120];
    foreach (Ag[k]) Ag[k] = act8(Yg[k]);
    layer("fc2", 120, 84, 1);

    rand_layer(84, 10, 1);
    Ag = new[84];
    nz = 0;
    foreach (Ag[k]) begin Ag[k] = act8(Yg[k]); if (Ag[k] != 0) nz++; end
    layer("fc3", 84, 10, 1);

    // the data must not have died out on the way (all-zero inputs would
    // make the last layer's check trivial)
    checks++;
    if (nz == 0) begin failures++; $display("FAIL fc3 inputs are all zero"); end
    for (int n = 0; n < 10; n++) $display("output %0d = %0d", n, Yg[n]);
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
