// sqj_pkg -- shared types and constants of the SqueezeJet-style convolution
// accelerator.
//
// The numeric precisions are the ones the accelerator was built for: 8-bit
// signed weights and biases, 16-bit signed feature-map (fmap) values, 16
// multipliers per MAC-16 unit and 8 MAC-16 units. The accumulator width, the
// layer-configuration record and the requantisation function are this
// design's own choices.
package sqj_pkg;

  // Precisions (8-bit parameters, 16-bit fmaps) and parallelism (16 lanes,
  // 8 units) of the accelerator.
  localparam int unsigned W_W   = 8;   // weight width
  localparam int unsigned B_W   = 8;   // bias width
  localparam int unsigned F_W   = 16;  // fmap width
  localparam int unsigned LANES = 16;  // MACs per MAC-16 unit per clock
  localparam int unsigned N_MAC = 8;   // MAC-16 units

  // Accumulator: 16x8-bit products (24 bits) summed over a 3x3x64 window
  // (576 products) need 34 bits; 36 leaves headroom.
  localparam int unsigned ACC_W = 36;

  typedef logic signed [W_W-1:0] wgt_t;
  typedef logic signed [B_W-1:0] bias_t;
  typedef logic signed [F_W-1:0] fmap_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  typedef fmap_t [LANES-1:0] fmap_vec_t;  // one 16-channel group of a pixel
  typedef wgt_t  [LANES-1:0] wgt_vec_t;   // 16 weights for one group

  // Layer configuration ("input/output fmap parameters").
  typedef struct packed {
    logic [7:0] width;      // input (= output) fmap width, pixels
    logic [7:0] height;     // input (= output) fmap height, pixels
    logic [9:0] in_ch;      // input channels, a multiple of LANES
    logic [9:0] out_ch;     // output channels, a multiple of N_MAC
    logic       k3;         // 1: 3x3 kernel with zero padding 1; 0: 1x1 kernel
    logic [4:0] bias_shift; // left shift aligning the bias to the accumulator
    logic [4:0] out_shift;  // right shift from accumulator to output format
    logic       relu;       // apply ReLU to the output
  } layer_cfg_t;

  // Phases of the control logic (see sqj_ctrl).
  typedef enum logic [3:0] {
    S_IDLE, S_PRM_W, S_PRM_B, S_FETCH, S_WIN, S_WIN_LAST, S_COMP, S_DRAIN, S_OUT, S_DONE
  } ctrl_state_t;

  // Accumulator + aligned bias -> 16-bit output: arithmetic right shift
  // (truncation), saturation to the fmap range, optional ReLU.
  function automatic fmap_t requant(acc_t acc, bias_t bias, logic [4:0] bias_shift,
                                    logic [4:0] out_shift, logic relu);
    logic signed [ACC_W+1:0] s;
    logic signed [ACC_W+1:0] b;
    fmap_t r;
    b = (ACC_W+2)'(bias) <<< bias_shift;
    s = (ACC_W+2)'(acc) + b;
    s = s >>> out_shift;
    if (s > (ACC_W+2)'(32767))       r = 16'sh7fff;
    else if (s < -(ACC_W+2)'(32768)) r = 16'sh8000;
    else                             r = fmap_t'(s);
    if (relu && r < 0) r = '0;
    return r;
  endfunction

endpackage
