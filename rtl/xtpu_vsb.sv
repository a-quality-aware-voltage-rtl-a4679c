// xtpu_vsb: the voltage switch box of one array column (the control side).
//
// Every column of the X-TPU is one neuron and runs all its multipliers from
// one supply.  The box receives the log2(v) voltage selection bits that are
// stored above each weight of that column in the weight memory, and turns
// them into v power-switch enables, exactly one of them high, that connect
// either the exact rail (V_DD_ex) or one of the overscaled rails to the
// column's approximate region.  The switch transistors and rails are analog
// and are not modelled; sw_en is what would drive them.
//
// Timing: like the weights, the selection is double-buffered.  vsel_load
// captures vsel_in into a shadow register while a column's weights are
// being prefetched; vsel_commit (the same pulse that makes the prefetched
// weights stationary) moves it to the active register, so the supply of a
// column changes only between two weight sets.  sw_en and vsel are decoded
// from the active register.  After reset the column runs at the exact level.
// The double buffering, the reset level and the code-to-rail order
// (code 0 = exact) are this design's choices.
module xtpu_vsb
  import xtpu_pkg::*;
#(
  parameter int unsigned NUM_V = NUM_VLEVELS
)(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [$clog2(NUM_V)-1:0] vsel_in,
  input  logic                     vsel_load,
  input  logic                     vsel_commit,
  output logic [$clog2(NUM_V)-1:0] vsel,     // active selection code
  output logic [NUM_V-1:0]         sw_en     // one-hot power-switch enables
);
  localparam int unsigned SW = $clog2(NUM_V);

  logic [SW-1:0] shadow_q, active_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      shadow_q <= '0;
      active_q <= '0;
    end else begin
      if (vsel_load)   shadow_q <= vsel_in;
      if (vsel_commit) active_q <= shadow_q;
    end
  end

  always_comb begin
    sw_en = '0;
    for (int unsigned k = 0; k < NUM_V; k++)
      if (active_q == SW'(k)) sw_en[k] = 1'b1;
  end

  assign vsel = active_q;

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot(sw_en))
    else $error("xtpu_vsb: supply switches not one-hot");

endmodule
