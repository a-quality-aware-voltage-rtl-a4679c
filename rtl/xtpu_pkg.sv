// xtpu_pkg: widths, types and constants shared by the X-TPU modules.
//
// The X-TPU is a weight-stationary systolic matrix unit in which the
// multiplier of every processing element (PE) sits in a separately supplied
// voltage region.  Each column (one neuron) can run its multipliers at the
// nominal supply or at one of several overscaled, lower supplies.  The choice
// is carried as voltage selection bits stored in the MSBs of every weight word.
//
// Widths follow the PE drawing of the design: 8-bit activations and weights,
// a 16-bit product and a 24-bit partial sum.  Four voltage levels (one exact,
// three overscaled: 0.8 V, 0.7 V, 0.6 V, 0.5 V) give two selection bits.
// The encoding of the selection bits (0 = exact, larger = lower supply) and
// the 32-bit accumulator width are this design's own choices.
package xtpu_pkg;

  // Datapath widths (PE drawing: 8-bit in, 16-bit product, 24-bit partial sum)
  localparam int unsigned ACT_W  = 8;
  localparam int unsigned WGT_W  = 8;
  localparam int unsigned PROD_W = 16;
  localparam int unsigned PSUM_W = 24;
  localparam int unsigned ACC_W  = 32;

  // Supported supply levels of the approximate (multiplier) region
  localparam int unsigned NUM_VLEVELS = 4;
  localparam int unsigned VSEL_W      = $clog2(NUM_VLEVELS);

  // Default array size: the 16x16 matrix-multiplication configuration
  localparam int unsigned ARRAY_N = 16;

  typedef logic signed [ACT_W-1:0]  act_t;
  typedef logic signed [WGT_W-1:0]  wgt_t;
  typedef logic signed [PROD_W-1:0] prod_t;
  typedef logic signed [PSUM_W-1:0] psum_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic [VSEL_W-1:0]        vsel_t;

  // Voltage selection code.  VDD_EX is the nominal (exact) supply.
  typedef enum logic [VSEL_W-1:0] {
    VDD_EX    = 2'd0,  // 0.8 V nominal, no timing errors
    VDD_APX_3 = 2'd1,  // 0.7 V
    VDD_APX_2 = 2'd2,  // 0.6 V
    VDD_APX_1 = 2'd3   // 0.5 V, lowest supply
  } vlevel_e;

  // Supply of each level in millivolts, indexed by the selection code
  function automatic int unsigned vlevel_mv(vsel_t code);
    case (code)
      2'd0:    return 800;
      2'd1:    return 700;
      2'd2:    return 600;
      default: return 500;
    endcase
  endfunction

  // One word of the modified weight memory: selection bits above the weight
  typedef struct packed {
    vsel_t vsel;
    wgt_t  w;
  } wword_t;

  localparam int unsigned WWORD_W = $bits(wword_t);

endpackage
