// xtpu_unified_buffer: activation storage of the X-TPU.
//
// Each row is one input vector for the array: N signed 8-bit activations,
// element i for array row i.  The host writes whole vectors; the control
// unit reads one vector per cycle while streaming, and the read data go to
// the array's left edge.  Read latency is one cycle (registered output, as
// in a synchronous SRAM); a read and a write of the same row in one cycle
// return the old data.  The depth (1024 vectors) and the port arrangement
// are this design's choices: the buffer is only named in the design.
module xtpu_unified_buffer
  import xtpu_pkg::*;
#(
  parameter int unsigned N     = ARRAY_N,
  parameter int unsigned DEPTH = 1024
)(
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  act_t                     wdata [N],
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output act_t                     rdata [N]
);
  logic [N*ACT_W-1:0] mem [DEPTH];
  logic [N*ACT_W-1:0] wflat, rflat;

  for (genvar c = 0; c < N; c++) begin : g_pack
    assign wflat[c*ACT_W +: ACT_W] = wdata[c];
    assign rdata[c] = act_t'(rflat[c*ACT_W +: ACT_W]);
  end

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wflat;
    if (re) rflat <= mem[raddr];
  end
endmodule
