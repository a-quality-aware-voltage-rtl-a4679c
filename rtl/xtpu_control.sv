// xtpu_control: the control unit of the X-TPU.
//
// It runs one matrix operation per command: prefetch a weight tile (N rows
// of the weight memory, with the voltage selection bits of every column)
// into the array, make it stationary, stream M activation vectors from the
// unified buffer through the array and wait until the accumulator has taken
// all M results of the last column.
//
// Command (sampled when start is high in IDLE):
//   load_w      1: prefetch and commit the weight rows wm_base .. wm_base+N-1
//               (row wm_base ends in array row 0); 0: keep the current weights
//   ub_base,
//   num_vec     vectors ub_base .. ub_base+num_vec-1 are streamed
//   acc_base,
//   accumulate  passed to the accumulator (overwrite or add to entries)
//
// Sequence and cycle counts (1-cycle memory read latency):
//   LOAD   N cycles: read weight rows from the highest to the lowest; each
//          read word is shifted into the array one cycle later (w_shift) and
//          its selection bits into the switch boxes' shadow (vsel_load)
//   LWAIT  1 cycle for the last shift
//   SETUP  1 cycle: w_commit (weights and supplies switch together) when a
//          tile was loaded, and acc_start
//   STREAM num_vec cycles, one unified-buffer read per cycle; the vector
//          reaches the array one cycle later with act_valid
//   DRAIN  until num_vec results have left the last column
//   DONE   1 cycle, done high
// The control unit is only named in the design; this sequence, the command
// format and the non-overlapped weight loading are this design's choices.
module xtpu_control
  import xtpu_pkg::*;
#(
  parameter int unsigned N        = ARRAY_N,
  parameter int unsigned WM_DEPTH = 8192,
  parameter int unsigned UB_DEPTH = 1024,
  parameter int unsigned ACC_DEPTH = 256
)(
  input  logic                         clk,
  input  logic                         rst_n,
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
  // weight memory and prefetch
  output logic                         wm_re,
  output logic [$clog2(WM_DEPTH)-1:0]  wm_raddr,
  output logic                         w_shift,
  output logic                         vsel_load,
  output logic                         w_commit,
  // unified buffer and array input
  output logic                         ub_re,
  output logic [$clog2(UB_DEPTH)-1:0]  ub_raddr,
  output logic                         act_valid,
  // accumulator
  output logic                         acc_start,
  output logic [$clog2(ACC_DEPTH)-1:0] acc_base_o,
  output logic                         acc_accum_o,
  input  logic                         last_col_valid
);
  localparam int unsigned WAW = $clog2(WM_DEPTH);
  localparam int unsigned UAW = $clog2(UB_DEPTH);
  localparam int unsigned CW  = $clog2(N);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_LWAIT, S_SETUP, S_STREAM, S_DRAIN, S_DONE} state_e;

  state_e        state;
  logic          load_w_q;
  logic [WAW-1:0] wm_base_q;
  logic [UAW-1:0] ub_base_q;
  logic [UAW:0]   num_q;
  logic [CW-1:0]  wcnt;
  logic [UAW:0]   vcnt, ocnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      load_w_q    <= 1'b0;
      wm_base_q   <= '0;
      ub_base_q   <= '0;
      num_q       <= '0;
      acc_base_o  <= '0;
      acc_accum_o <= 1'b0;
      wcnt        <= '0;
      vcnt        <= '0;
      ocnt        <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          load_w_q    <= load_w;
          wm_base_q   <= wm_base;
          ub_base_q   <= ub_base;
          num_q       <= num_vec;
          acc_base_o  <= acc_base;
          acc_accum_o <= accumulate;
          wcnt        <= '0;
          vcnt        <= '0;
          ocnt        <= '0;
          state       <= load_w ? S_LOAD : S_SETUP;
        end
        S_LOAD: begin
          wcnt <= wcnt + 1'b1;
          if (wcnt == CW'(N-1)) state <= S_LWAIT;
        end
        S_LWAIT: state <= S_SETUP;
        S_SETUP: state <= (num_q == '0) ? S_DONE : S_STREAM;
        S_STREAM: begin
          vcnt <= vcnt + 1'b1;
          if (vcnt + 1'b1 == num_q) state <= S_DRAIN;
        end
        S_DRAIN: if (ocnt == num_q) state <= S_DONE;
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
      if (state != S_IDLE && last_col_valid) ocnt <= ocnt + 1'b1;
    end
  end

  // memory reads are issued combinationally from the state
  always_comb begin
    wm_re     = (state == S_LOAD);
    wm_raddr  = wm_base_q + WAW'(N - 1) - WAW'(wcnt);
    ub_re     = (state == S_STREAM);
    ub_raddr  = ub_base_q + UAW'(vcnt);
    w_commit  = (state == S_SETUP) && load_w_q;
    acc_start = (state == S_SETUP);
    busy      = (state != S_IDLE);
    done      = (state == S_DONE);
  end

  // read data arrive one cycle after the read
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      w_shift   <= 1'b0;
      act_valid <= 1'b0;
    end else begin
      w_shift   <= wm_re;
      act_valid <= ub_re;
    end
  end
  assign vsel_load = w_shift;

endmodule
