// xtpu_pe: one weight-stationary processing element of the X-TPU array.
//
// Structure, as in the PE drawing: an 8-bit prefetch weight register that
// also forms a shift chain down the column, an 8-bit stationary weight
// register loaded from it, an 8-bit activation register, the multiplier
// (xtpu_mult, the overscaled region), a 24-bit adder and a 24-bit
// partial-sum register.  The level shifter between multiplier and adder is a
// circuit with no logic function and appears here only as the wire `prod`.
//
// Timing (one clock):
//   w_shift : w_pre <= w_in; w_out = w_pre feeds the PE below.
//   w_commit: w_stat <= w_pre (weights used by the multiplier).
//   every cycle: act_q <= act_in, act_out = act_q feeds the PE to the right;
//                psum_out <= psum_in + act_q * w_stat.
// A valid bit travels with the activation (act_valid_in -> act_valid_out)
// so the array can mark which partial sums are results; the valid bit and
// reset values (all registers cleared by the synchronous, active-low rst_n)
// are this design's choices.
module xtpu_pe
  import xtpu_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  // activations, left to right
  input  act_t  act_in,
  input  logic  act_valid_in,
  output act_t  act_out,
  output logic  act_valid_out,
  // weight prefetch chain, top to bottom
  input  wgt_t  w_in,
  input  logic  w_shift,
  input  logic  w_commit,
  output wgt_t  w_out,
  // partial sums, top to bottom
  input  psum_t psum_in,
  output psum_t psum_out
);
  wgt_t  w_pre, w_stat;
  act_t  act_q;
  logic  act_v_q;
  prod_t prod;
  psum_t psum_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      w_pre  <= '0;
      w_stat <= '0;
    end else begin
      if (w_shift)  w_pre  <= w_in;
      if (w_commit) w_stat <= w_pre;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      act_q   <= '0;
      act_v_q <= 1'b0;
    end else begin
      act_q   <= act_in;
      act_v_q <= act_valid_in;
    end
  end

  // approximate region: multiplier on the column's selectable supply
  xtpu_mult u_mult (.a(act_q), .b(w_stat), .p(prod));

  // exact region: sign-extend the level-shifted product and accumulate
  always_ff @(posedge clk) begin
    if (!rst_n) psum_q <= '0;
    else        psum_q <= psum_in + psum_t'(prod);
  end

  assign act_out       = act_q;
  assign act_valid_out = act_v_q;
  assign w_out         = w_pre;
  assign psum_out      = psum_q;
endmodule
