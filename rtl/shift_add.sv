// shift_add: one multiply-accumulate replaced by shifts and adds.
//
// The product of an activation I and a weight w = +-(2^s0 + 2^s1 + 2^s2) is
// formed as (I << s0) + (I << s1) + (I << s2), each term added into a running
// sum; the unit has a sum input and a sum output so that units can be chained
// like MAC units. No multiplier is used.
//
// The shifts are by the raw offset-binary codes c_k (0..2^SHIFT_W-1). The
// true exponent is c_k - b, where b is the layer-wise offset; since b is the
// same for every weight of a layer, the enclosing layer applies the common
// factor 2^-b once, to the finished sum (an arithmetic right shift). This
// keeps every term exact. A shift parameter whose valid bit is clear adds
// nothing; the sign bit negates the weight's contribution.
//
// Follows the paper: the chained shift/add structure and three shift
// parameters per weight. Own choice: deferring the offset to the end of the
// sum, the valid bits and the sign handling. Purely combinational.
module shift_add
  import dvs_cnn_pkg::*;
(
  input  act_t     act_i,    // activation I
  input  sweight_t w_i,      // encoded weight
  input  acc_t     sum_i,    // running sum in
  output acc_t     sum_o     // sum_i + I * w * 2^b
);

  acc_t act_ext;
  acc_t term [NSHIFT];
  acc_t mag;

  assign act_ext = acc_t'(act_i);

  always_comb begin
    mag = '0;
    for (int k = 0; k < NSHIFT; k++) begin
      term[k] = w_i.valid[k] ? (act_ext <<< w_i.code[k]) : '0;
      mag     = mag + term[k];
    end
  end

  assign sum_o = w_i.sign ? (sum_i - mag) : (sum_i + mag);

endmodule
