// tb_xtpu_resnet_block: the first bottleneck block of ResNet-50 (stage 2, on
// a 32 x 32 x 64 CIFAR-10 feature map) run layer by layer on the X-TPU at
// its default size.  The whole network (about 23.5 million weights) does not
// fit the weight memory; this block is the part that is simulated, with the
// weight memory refilled for every layer as the whole network would need.
//
// Layers (standard ResNet-50 bottleneck with projection shortcut):
//   a: 1x1 conv 64 -> 64,            ReLU
//   b: 3x3 conv 64 -> 64, padding 1, ReLU
//   c: 1x1 conv 64 -> 256
//   s: 1x1 conv 64 -> 256 on the block input (shortcut)
//   output = ReLU(c + s)
// Batch normalisation is taken as folded into the weights.  Trained weights
// are not available: weights (-128..127) and input activations (0..127) are
// pseudo-random.  Output channel n of every layer runs at voltage level n mod 4.
//
// Every layer is a matrix product Y[p][n] = sum_i A[p][i] * W[i][n], where
// row p of A is the k x k x Cin input patch of output pixel p, element index
// i = (ky * k + kx) * Cin + ci (zero outside the map).  The host (this
// testbench) unrolls the patches, applies ReLU and requantisation to 8 bits
// (arithmetic shift right by 10, saturate to 127) and adds the shortcut; the
// paper describes no hardware for these.
//
// A layer with K inputs and NO outputs is cut into ceil(K/16) row tiles and
// ceil(NO/16) column tiles; tile (ct, kt) sits at weight rows
// (ct * KT + kt) * 16.  The patches are processed in chunks of PC vectors
// that fit the unified buffer (KT * PC vectors) and the accumulator
// (CT * PC entries); per chunk and column tile the row tiles run in turn,
// the first overwriting and the others adding.  Every accumulator result is
// compared with the matrix product computed here, and after every weight load
// the column selection codes with the assigned levels.
module tb_xtpu_resnet_block;
  import xtpu_pkg::*;

  localparam int N = ARRAY_N;
  localparam int SHIFT = 10;
  localparam int HW = 32;          // feature map height and width
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
    repeat (3000000) @(posedge clk);
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

  // unroll k x k patches (padding pad, stride 1) of a HxWxC map, index
  // (y * W + x) * C + ch, into Ag
  task automatic unroll(const ref int fm [], input int H, int Wd, int C, int k, int pad);
    int OH = H + 2 * pad - k + 1, OW = Wd + 2 * pad - k + 1, K = k * k * C;
    Ag = new[OH * OW * K];
    for (int y = 0; y < OH; y++)
      for (int x = 0; x < OW; x++)
        for (int ky = 0; ky < k; ky++)
          for (int kx = 0; kx < k; kx++)
            for (int ch = 0; ch < C; ch++) begin
              int iy = y + ky - pad, ix = x + kx - pad;
              Ag[(y * OW + x) * K + (ky * k + kx) * C + ch] =
                (iy < 0 || iy >= H || ix < 0 || ix >= Wd) ? 0 : fm[(iy * Wd + ix) * C + ch];
            end
  endtask

  initial begin
    int fm [], fa [], fb [];
    longint yc [];
    int nz;
    wm_we = 0; ub_we = 0; start = 0; load_w = 0; accumulate = 0; acc_re = 0;
    wm_waddr = '0; wm_base = '0; ub_waddr = '0; ub_base = '0; num_vec = '0;
    acc_base = '0; acc_raddr = '0;
    for (int c = 0; c < N; c++) begin wm_wdata[c] = '0; ub_wdata[c] = '0; end
    foreach (n_level[k]) n_level[k] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // block input: 32 x 32 x 64 activations
    fm = new[HW * HW * 64];
    foreach (fm[k]) fm[k] = int'($urandom % 128);

    rand_layer(64, 64, 0);
    unroll(fm, HW, HW, 64, 1, 0);
    layer("a 1x1", 64, 64, HW * HW);
    fa = new[HW * HW * 64];
    foreach (fa[k]) fa[k] = act8(Yg[k]);

    rand_layer(576, 64, 0);
    unroll(fa, HW, HW, 64, 3, 1);
    layer("b 3x3", 576, 64, HW * HW);
    fb = new[HW * HW * 64];
    foreach (fb[k]) fb[k] = act8(Yg[k]);

    rand_layer(64, 256, 0);
    unroll(fb, HW, HW, 64, 1, 0);
    layer("c 1x1", 64, 256, HW * HW);
    yc = Yg;

    rand_layer(64, 256, 0);
    unroll(fm, HW, HW, 64, 1, 0);
    layer("shortcut", 64, 256, HW * HW);

    nz = 0;
    foreach (yc[k]) if (act8(yc[k] + Yg[k]) != 0) nz++;
    $display("block output: %0d of %0d activations non-zero", nz, yc.size());

    // the data must not have died out on the way
    checks++;
    if (nz == 0) begin failures++; $display("FAIL block output is all zero"); end
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
