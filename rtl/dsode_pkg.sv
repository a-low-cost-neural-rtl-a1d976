// dsode_pkg: number formats and shared types of the dsODENet accelerator.
//
// Feature maps and batch-norm parameters are 24-bit signed fixed point,
// convolution weights 20-bit signed fixed point, as in the published FPGA
// implementation. The position of the binary point is not published; this
// design uses FRAC = 12 fractional bits for both formats, so a product of a
// feature value and a weight carries 24 fractional bits and is shifted right
// by FRAC (arithmetic, i.e. rounding toward minus infinity) before it is
// stored. Accumulators are 48 bits wide and results saturate to 24 bits.
//
// Every compute unit works on LANES = 8 channels at once (the published
// unrolling factor). Feature-map buffers are split into 8 banks by channel:
// channel c of pixel p lives in bank c % 8 at word (c / 8) * H * W + p.
package dsode_pkg;

  localparam int LANES = 8;          // unrolling factor (paper)
  localparam int FM_W  = 24;         // feature map / BN word (paper)
  localparam int WT_W  = 20;         // convolution weight word (paper)
  localparam int FRAC  = 12;         // fractional bits (own choice)
  localparam int ACC_W = 48;         // accumulator width (own choice)
  localparam int AXIS_W = 32;        // AXI4-Stream data width (paper)

  localparam int FA_W  = 16;         // feature-map buffer address width

  typedef logic [FA_W-1:0]         faddr_t;
  typedef logic signed [FM_W-1:0]  fm_t;
  typedef logic signed [WT_W-1:0]  wt_t;
  typedef logic signed [ACC_W-1:0] acc_t;
  typedef fm_t  [LANES-1:0]        fm_vec_t;   // one word from each bank
  typedef logic [LANES-1:0]        lane_en_t;

  // Operating modes selected through the control registers.
  typedef enum logic [1:0] {
    MODE_WEIGHT = 2'd0,   // weight transfer mode
    MODE_FMAP   = 2'd1    // feature map computation mode
  } mode_e;

  localparam fm_t FM_MAX = fm_t'({1'b0, {(FM_W-1){1'b1}}});
  localparam fm_t FM_MIN = fm_t'({1'b1, {(FM_W-1){1'b0}}});

  // Saturate a wide value to the 24-bit feature-map format.
  function automatic fm_t sat_fm(input acc_t v);
    if (v > acc_t'(FM_MAX))      return FM_MAX;
    else if (v < acc_t'(FM_MIN)) return FM_MIN;
    else                         return fm_t'(v);
  endfunction

  // Number of 8-channel groups needed for c channels.
  function automatic int ngroups(input int c);
    return (c + LANES - 1) / LANES;
  endfunction

  // ceil(log2(v)), at least 1, for address widths.
  function automatic int aw(input int v);
    return (v <= 2) ? 1 : $clog2(v);
  endfunction

endpackage
