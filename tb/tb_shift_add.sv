// tb_shift_add: checks the shift-add unit against integer multiplication.
// Random activations, encoded weights and incoming sums, including the
// extreme activation values and all-valid / none-valid weights; two units are
// also chained as in a MAC chain.
module tb_shift_add;
  import dvs_cnn_pkg::*;
  import tb_ref_pkg::*;

  act_t     a0, a1;
  sweight_t w0, w1;
  acc_t     s_in, s_mid, s_out;
  int       checks = 0, failures = 0;

  shift_add u0 (.act_i(a0), .w_i(w0), .sum_i(s_in),  .sum_o(s_mid));
  shift_add u1 (.act_i(a1), .w_i(w1), .sum_i(s_mid), .sum_o(s_out));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      longint e_mid, e_out;
      a0 = act_t'($urandom);
      a1 = act_t'($urandom);
      if (i % 50 == 0) a0 = act_t'(16'h8000);
      if (i % 50 == 1) a0 = act_t'(16'h7fff);
      w0 = rand_weight();
      w1 = rand_weight();
      if (i % 7 == 0) w0.valid = '1;
      if (i % 11 == 0) w1.valid = '0;
      s_in = acc_t'(longint'($urandom) - longint'(32'h8000_0000));
      #1;
      e_mid = longint'(s_in) + longint'(a0) * wval(w0);
      e_out = e_mid + longint'(a1) * wval(w1);
      checks += 2;
      if (longint'(s_mid) != e_mid) begin
        failures++;
        if (failures < 10) $display("mismatch unit0: a=%0d w=%h got %0d exp %0d", a0, w0, s_mid, e_mid);
      end
      if (longint'(s_out) != e_out) begin
        failures++;
        if (failures < 10) $display("mismatch chain: got %0d exp %0d", s_out, e_out);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
