// xtpu_accumulator: per-column partial-sum storage below the array.
//
// When a matrix has more rows (inputs) than the array, it is processed as
// several row tiles and the column results of the tiles must be added.  Each
// column has its own adder and its own storage of DEPTH 32-bit entries.
//
// Operation: `start` loads every column's write pointer with `base` and
// latches `accumulate`.  Afterwards each cycle in which psum_valid[c] is high
// writes entry ptr[c] of column c and advances that pointer:
//   accumulate = 0 : entry <= psum              (first tile)
//   accumulate = 1 : entry <= entry + psum      (later tiles)
// The columns advance independently because the array delivers column c
// one cycle after column c-1.  `start` must not coincide with psum_valid.
// The read port returns all columns of one entry with one cycle of latency.
// The 32-bit width, the depth, the pointer scheme and the read port are
// this design's choices; the adder-plus-storage per column follows the
// architecture drawing.
module xtpu_accumulator
  import xtpu_pkg::*;
#(
  parameter int unsigned N     = ARRAY_N,
  parameter int unsigned DEPTH = 256
)(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [$clog2(DEPTH)-1:0] base,
  input  logic                     accumulate,
  input  psum_t                    psum       [N],
  input  logic                     psum_valid [N],
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output acc_t                     rdata      [N]
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic accum_q;

  always_ff @(posedge clk) begin
    if (!rst_n)     accum_q <= 1'b0;
    else if (start) accum_q <= accumulate;
  end

  for (genvar c = 0; c < N; c++) begin : g_col
    acc_t          mem [DEPTH];
    logic [AW-1:0] ptr;
    acc_t          sum;

    always_comb sum = (accum_q ? mem[ptr] : acc_t'(0)) + acc_t'(psum[c]);

    always_ff @(posedge clk) begin
      if (!rst_n)             ptr <= '0;
      else if (start)         ptr <= base;
      else if (psum_valid[c]) ptr <= ptr + 1'b1;
    end

    always_ff @(posedge clk) begin
      if (psum_valid[c] && !start) mem[ptr] <= sum;
      if (re) rdata[c] <= mem[raddr];
    end
  end

  a_no_start_on_valid: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> !psum_valid[N-1])
    else $error("xtpu_accumulator: start while results arrive");

endmodule
