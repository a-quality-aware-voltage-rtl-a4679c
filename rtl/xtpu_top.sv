// xtpu_top: the X-TPU, a systolic matrix unit whose columns can run their
// multipliers at a nominal or an overscaled supply, chosen per neuron.
//
// Blocks and connections, following the architecture drawing:
//   weight memory  --w field-->  top edge of the N x N array (prefetch chain)
//                  --vsel field--> one voltage switch box per column
//   unified buffer --vector-->   left edge of the array
//   array bottom   --column results--> accumulator (per-column add + store)
//   control unit   sequences the memories, the array, the boxes and the
//                  accumulator (see xtpu_control for the command and timing)
// The supply rails, the power switches and the level shifters are circuits,
// not logic: the per-column switch enables (col_sw_en, one-hot, bit k =
// level code k) and the active selection codes (col_vsel) are brought out as
// ports to drive them.
//
// Host side: write ports for the weight memory (one row of N 10-bit words per
// cycle) and the unified buffer (one N-element vector per cycle), a command
// port (start/busy/done) and a read port on the accumulator with one cycle of
// latency.  A command that loads weights and streams M vectors takes
// 3N + 4 + M cycles from start to done (N prefetch, 2 to commit, M to
// stream, 2N through the array and into the accumulator, 2 of handshake);
// one that keeps the weights takes 2N + 3 + M.
module xtpu_top
  import xtpu_pkg::*;
#(
  parameter int unsigned N         = ARRAY_N,
  parameter int unsigned WM_DEPTH  = 8192,
  parameter int unsigned UB_DEPTH  = 1024,
  parameter int unsigned ACC_DEPTH = 256
)(
  input  logic                         clk,
  input  logic                         rst_n,
  // weight memory host write
  input  logic                         wm_we,
  input  logic [$clog2(WM_DEPTH)-1:0]  wm_waddr,
  input  wword_t                       wm_wdata [N],
  // unified buffer host write
  input  logic                         ub_we,
  input  logic [$clog2(UB_DEPTH)-1:0]  ub_waddr,
  input  act_t                         ub_wdata [N],
  // command
  input  logic                         start,
  input  logic                         load_w,
  input  logic [$clog2(WM_DEPTH)-1:0]  wm_base,
  input  logic [$clog2(UB_DEPTH)-1:0]  ub_base,
  input  logic [$clog2(UB_DEPTH):0]    num_vec,
  input  logic [$clog2(ACC_DEPTH)-1:0] acc_base,
  input  logic                         accumulate,
  output logic                         busy,
  output logic                         done,
  // accumulator host read
  input  logic                         acc_re,
  input  logic [$clog2(ACC_DEPTH)-1:0] acc_raddr,
  output acc_t                         acc_rdata [N],
  // to the per-column power switches (analog, outside the logic)
  output vsel_t                        col_vsel  [N],
  output logic [NUM_VLEVELS-1:0]       col_sw_en [N]
);
  // control
  logic                         wm_re, w_shift, vsel_load, w_commit;
  logic [$clog2(WM_DEPTH)-1:0]  wm_raddr;
  logic                         ub_re, act_valid;
  logic [$clog2(UB_DEPTH)-1:0]  ub_raddr;
  logic                         acc_start, acc_accum;
  logic [$clog2(ACC_DEPTH)-1:0] acc_base_c;

  // datapath
  wword_t wm_rdata  [N];
  wgt_t   w_top     [N];
  act_t   ub_rdata  [N];
  psum_t  psum      [N];
  logic   psum_vld  [N];

  xtpu_control #(.N(N), .WM_DEPTH(WM_DEPTH), .UB_DEPTH(UB_DEPTH), .ACC_DEPTH(ACC_DEPTH)) u_ctrl (
    .clk, .rst_n,
    .start, .load_w, .wm_base, .ub_base, .num_vec, .acc_base, .accumulate,
    .busy, .done,
    .wm_re, .wm_raddr, .w_shift, .vsel_load, .w_commit,
    .ub_re, .ub_raddr, .act_valid,
    .acc_start, .acc_base_o(acc_base_c), .acc_accum_o(acc_accum),
    .last_col_valid(psum_vld[N-1])
  );

  xtpu_weight_mem #(.N(N), .DEPTH(WM_DEPTH)) u_wmem (
    .clk, .we(wm_we), .waddr(wm_waddr), .wdata(wm_wdata),
    .re(wm_re), .raddr(wm_raddr), .rdata(wm_rdata)
  );

  xtpu_unified_buffer #(.N(N), .DEPTH(UB_DEPTH)) u_ub (
    .clk, .we(ub_we), .waddr(ub_waddr), .wdata(ub_wdata),
    .re(ub_re), .raddr(ub_raddr), .rdata(ub_rdata)
  );

  for (genvar c = 0; c < N; c++) begin : g_col
    assign w_top[c] = wm_rdata[c].w;
    xtpu_vsb #(.NUM_V(NUM_VLEVELS)) u_vsb (
      .clk, .rst_n,
      .vsel_in    (wm_rdata[c].vsel),
      .vsel_load  (vsel_load),
      .vsel_commit(w_commit),
      .vsel       (col_vsel[c]),
      .sw_en      (col_sw_en[c])
    );
  end

  xtpu_mxu #(.N(N)) u_mxu (
    .clk, .rst_n,
    .act_in(ub_rdata), .act_valid,
    .w_in(w_top), .w_shift, .w_commit,
    .psum_out(psum), .psum_valid(psum_vld)
  );

  xtpu_accumulator #(.N(N), .DEPTH(ACC_DEPTH)) u_acc (
    .clk, .rst_n,
    .start(acc_start), .base(acc_base_c), .accumulate(acc_accum),
    .psum, .psum_valid(psum_vld),
    .re(acc_re), .raddr(acc_raddr), .rdata(acc_rdata)
  );

endmodule
