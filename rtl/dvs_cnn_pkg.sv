// dvs_cnn_pkg: types and constants shared by the shift-add CNN accelerator.
//
// Activations are signed fixed-point words (ACT_W bits, ACT_FRAC fractional
// bits) passed between layers one pixel at a time, all channels of the pixel
// side by side. A weight is stored the way the shift-parameter quantization
// leaves it: a sign and NSHIFT shift parameters of SHIFT_W bits each. A shift
// parameter is an offset-binary code c; with the layer's offset (bias of the
// encoding) b the weight is
//     w = (-1)^sign * sum_k valid_k * 2^(c_k - b).
// Three parameters of three bits follow the paper's chosen configuration.
// The per-parameter valid bit (an absent "None" entry of the quantizer, and
// zero weights) and the widths of activations, accumulators and the offset
// are this design's own choices.
package dvs_cnn_pkg;

  // Number of shift parameters per weight and bits per encoded parameter.
  localparam int unsigned NSHIFT  = 3;
  localparam int unsigned SHIFT_W = 3;
  // Width of the layer-wise encoding offset (the "Bias" of the encoder).
  localparam int unsigned OFF_W   = 4;

  // Activation word: signed, ACT_W bits, ACT_FRAC fractional bits.
  localparam int unsigned ACT_W    = 16;
  localparam int unsigned ACT_FRAC = 8;
  // Accumulator width: wide enough for 2048 terms of ACT_W + 7 bits each.
  localparam int unsigned ACC_W    = 40;

  typedef logic signed [ACT_W-1:0] act_t;
  typedef logic signed [ACC_W-1:0] acc_t;
  typedef logic [SHIFT_W-1:0]      shift_code_t;
  typedef logic [OFF_W-1:0]        offset_t;

  // One encoded weight: 1 + NSHIFT + NSHIFT*SHIFT_W = 13 bits.
  typedef struct packed {
    logic                             sign;   // 1: negative weight
    logic        [NSHIFT-1:0]         valid;  // shift parameter k present
    shift_code_t [NSHIFT-1:0]         code;   // biased shift codes
  } sweight_t;

  localparam int unsigned SWEIGHT_W = $bits(sweight_t);

  // What a parameter-load word writes.
  typedef enum logic [1:0] {
    CFG_WEIGHT = 2'd0,   // cfg_addr selects a weight, data[SWEIGHT_W-1:0]
    CFG_BIAS   = 2'd1,   // cfg_addr selects an output channel, data is act_t
    CFG_OFFSET = 2'd2    // data[OFF_W-1:0] is the layer's encoding offset
  } cfg_kind_e;

  localparam int unsigned CFG_ADDR_W = 16;

  // Saturate an accumulator value to the activation range.
  function automatic act_t sat_act(input acc_t v);
    acc_t hi, lo;
    hi = acc_t'(signed'({1'b0, {(ACT_W-1){1'b1}}}));
    lo = -hi - 1;
    if (v > hi)      return act_t'(hi);
    else if (v < lo) return act_t'(lo);
    else             return act_t'(v);
  endfunction

endpackage
