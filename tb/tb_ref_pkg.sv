// tb_ref_pkg: reference arithmetic for the testbenches.
//
// The reference never shifts: it turns an encoded weight into an ordinary
// integer (scaled by 2^offset) and multiplies, then applies the same
// rounding (floor of the offset division), bias, ReLU and saturation rules
// that the design documents. It also draws random encoded weights.
package tb_ref_pkg;
  import dvs_cnn_pkg::*;

  // weight * 2^offset as an integer: +-(sum of 2^code over valid codes)
  function automatic longint wval(input sweight_t w);
    longint v;
    v = 0;
    for (int k = 0; k < NSHIFT; k++)
      if (w.valid[k]) v += longint'(1) << w.code[k];
    return w.sign ? -v : v;
  endfunction

  function automatic longint floor_div_pow2(input longint a, input int sh);
    longint d;
    d = longint'(1) << sh;
    if (a >= 0) return a / d;
    return -((-a + d - 1) / d);
  endfunction

  function automatic longint sat16(input longint v);
    if (v > 32767)  return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  // result of a conv or FC output given the scaled dot product
  function automatic longint post(input longint acc, input int off,
                                  input longint bias, input bit relu);
    longint v;
    v = floor_div_pow2(acc, off) + bias;
    if (relu && v < 0) v = 0;
    return sat16(v);
  endfunction

  // random encoded weight; about one shift parameter in six is absent
  function automatic sweight_t rand_weight();
    sweight_t w;
    w.sign = 1'($urandom_range(0, 1));
    for (int k = 0; k < NSHIFT; k++) begin
      w.valid[k] = ($urandom_range(0, 5) != 0);
      w.code[k]  = shift_code_t'($urandom_range(0, (1 << SHIFT_W) - 1));
    end
    return w;
  endfunction

  function automatic act_t rand_act(input int mag);
    return act_t'($urandom_range(0, 2*mag) - mag);
  endfunction

endpackage
