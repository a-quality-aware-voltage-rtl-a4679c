// xtpu_weight_mem: the modified weight memory of the X-TPU.
//
// Each row holds one word per array column.  A word is WWORD_W = 10 bits:
// the two voltage selection bits in the MSBs followed by the 8-bit weight
// (xtpu_pkg::wword_t).  All words of one column carry the same selection
// bits, since a column is one neuron and runs at one supply; the memory
// itself stores whatever it is given.  A row read gives the array its
// weights (w field) and the column voltage switch boxes their selection
// (vsel field).
//
// Ports: a host write port that writes one whole row per cycle, and a read
// port with one cycle of latency (rdata is registered, as in a synchronous
// SRAM).  Writing and reading the same row in one cycle returns the old
// data.  The depth (8192 rows, enough for the 784-128-10 MNIST network at
// N = 16) and the single-row port widths are this design's choices.
module xtpu_weight_mem
  import xtpu_pkg::*;
#(
  parameter int unsigned N     = ARRAY_N,
  parameter int unsigned DEPTH = 8192
)(
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  wword_t                   wdata [N],
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output wword_t                   rdata [N]
);
  logic [N*WWORD_W-1:0] mem [DEPTH];
  logic [N*WWORD_W-1:0] wflat, rflat;

  for (genvar c = 0; c < N; c++) begin : g_pack
    assign wflat[c*WWORD_W +: WWORD_W] = wdata[c];
    assign rdata[c] = wword_t'(rflat[c*WWORD_W +: WWORD_W]);
  end

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wflat;
    if (re) rflat <= mem[raddr];
  end
endmodule
