// tb_fc_layer: loads random encoded weights into a small fully connected
// layer (6 pixels x 5 channels -> 3 classes), streams random samples with
// input gaps and output back-pressure, and checks the three saturated scores
// and the class index against a flatten-then-multiply reference. One sample
// is made large enough to saturate a score.
module tb_fc_layer;
  import dvs_cnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int NPIX = 6, N = 5, K = 3, F = N * NPIX, S = 12;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  cfg_kind_e cfg_kind = CFG_WEIGHT;
  logic [CFG_ADDR_W-1:0] cfg_addr = '0;
  logic [ACT_W-1:0] cfg_data = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  act_t in_data [N];
  act_t out_score [K];
  logic [$clog2(K)-1:0] out_class;

  fc_layer #(.NPIX(NPIX), .N(N), .K(K)) dut (.*);

  always #5 clk = ~clk;

  sweight_t wts [K*F];
  longint   bias [K];
  int       off;
  act_t     x [S][NPIX][N];
  longint   exps [S][K];
  int       expc [S];
  int       checks = 0, failures = 0, got = 0;
  logic     in_hs = 0;

  always @(posedge clk) in_hs <= in_valid && in_ready;

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready && got < S) begin
      for (int k = 0; k < K; k++) begin
        checks++;
        if (longint'(out_score[k]) != exps[got][k]) begin
          failures++;
          $display("sample %0d class %0d: got %0d exp %0d", got, k, out_score[k], exps[got][k]);
        end
      end
      checks++;
      if (int'(out_class) != expc[got]) begin
        failures++;
        $display("sample %0d: class %0d exp %0d", got, out_class, expc[got]);
      end
      got++;
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic cfg_write(input cfg_kind_e k, input int a, input logic [ACT_W-1:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_kind = k; cfg_addr = CFG_ADDR_W'(a); cfg_data = d;
  endtask

  initial begin
    for (int n = 0; n < N; n++) in_data[n] = '0;
    off = 5;
    for (int i = 0; i < K*F; i++) wts[i] = rand_weight();
    for (int k = 0; k < K; k++) bias[k] = $urandom_range(0, 400) - 200;
    for (int s = 0; s < S; s++)
      for (int p = 0; p < NPIX; p++)
        for (int n = 0; n < N; n++)
          x[s][p][n] = (s == 3) ? act_t'(16'sh7000) : rand_act(800);
    for (int s = 0; s < S; s++) begin
      expc[s] = 0;
      for (int k = 0; k < K; k++) begin
        longint acc;
        acc = 0;
        for (int n = 0; n < N; n++)
          for (int p = 0; p < NPIX; p++)
            acc += longint'(x[s][p][n]) * wval(wts[k*F + n*NPIX + p]);
        exps[s][k] = post(acc, off, bias[k], 1'b0);
        if (exps[s][k] > exps[s][expc[s]]) expc[s] = k;
      end
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < K*F; i++) cfg_write(CFG_WEIGHT, i, ACT_W'(wts[i]));
    for (int k = 0; k < K; k++) cfg_write(CFG_BIAS, k, ACT_W'(bias[k]));
    cfg_write(CFG_OFFSET, 0, ACT_W'(off));
    @(negedge clk);
    cfg_we = 0;
    fork
      forever begin
        @(negedge clk);
        out_ready = ($urandom_range(0, 3) == 0);
      end
    join_none
    for (int s = 0; s < S; s++)
      for (int p = 0; p < NPIX; p++) begin
        in_valid = 0;
        while ($urandom_range(0, 4) == 0) @(negedge clk);
        in_valid = 1;
        in_data  = x[s][p];
        do @(negedge clk); while (!in_hs);
      end
    in_valid = 0;
    wait (got == S);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
