// tb_dvs_cnn_top: end-to-end test of the full-size accelerator (all default
// parameters: 256 x 11 samples, 8/16/32/64 channels, 3 classes).
//
// It loads random encoded parameters for all five layers through the
// parameter port, streams three samples back to back (the second one with a
// saturated band of input rows), and checks
//   - every conv1 and conv4 output pixel (observed inside the design),
//   - the three scores and the class of every sample
// against a reference network evaluated with integer multiplications.
// It also checks that the first result arrives within the 25,112 clocks the
// reference FPGA implementation needed, and counts how often each mechanism
// of the design happened: input back-pressure, input/compute overlap
// (look-ahead reads), stalls between layers, output back-pressure, max and
// average pooling, ReLU clamping, saturation and absent shift parameters.
// A mechanism that never happened counts as a failure.
module tb_dvs_cnn_top;
  import dvs_cnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int H0 = 256, W0 = 11, NS = 3, NCLS = 3;
  localparam int CH [5] = '{1, 8, 16, 32, 64};
  localparam int PAPER_LATENCY = 25112;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [2:0] cfg_layer = '0;
  cfg_kind_e cfg_kind = CFG_WEIGHT;
  logic [CFG_ADDR_W-1:0] cfg_addr = '0;
  logic [ACT_W-1:0] cfg_data = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  act_t in_data = '0;
  act_t out_score [NCLS];
  logic [1:0] out_class;

  dvs_cnn_top dut (.*);

  always #5 clk = ~clk;

  // ------------------------------------------------------------ reference
  sweight_t wl [5][];
  longint   bl [5][];
  int       offl [5];
  longint   x0   [NS][];
  longint   y1   [NS][];   // conv1 output
  longint   y4   [NS][];   // conv4 output
  longint   sc   [NS][NCLS];
  int       cls  [NS];
  int       n_relu = 0, n_sat = 0, n_absent = 0;

  function automatic void conv_ref(input longint x[], input int H, input int W,
                                   input int N, input int M, input int l,
                                   output longint y[]);
    y = new[H*W*M];
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++)
        for (int m = 0; m < M; m++) begin
          longint acc, v;
          acc = 0;
          for (int n = 0; n < N; n++)
            for (int p = 0; p < 3; p++)
              for (int q = 0; q < 3; q++) begin
                int rr, cc;
                rr = r + p - 1; cc = c + q - 1;
                if (rr >= 0 && rr < H && cc >= 0 && cc < W)
                  acc += x[(rr*W + cc)*N + n] * wval(wl[l][m*N*9 + (n*3+p)*3 + q]);
              end
          v = floor_div_pow2(acc, offl[l]) + bl[l][m];
          if (v < 0) n_relu++;
          if (v > 32767) n_sat++;
          y[(r*W + c)*M + m] = post(acc, offl[l], bl[l][m], 1'b1);
        end
  endfunction

  function automatic void pool_ref(input longint x[], input int H, input int W,
                                   input int N, input bit avg, output longint y[]);
    int HO, WO;
    HO = H / 2; WO = W / 2;
    y = new[HO*WO*N];
    for (int r = 0; r < HO; r++)
      for (int c = 0; c < WO; c++)
        for (int n = 0; n < N; n++) begin
          longint v [4];
          longint mx, sm;
          v[0] = x[((2*r)*W + 2*c)*N + n];     v[1] = x[((2*r)*W + 2*c+1)*N + n];
          v[2] = x[((2*r+1)*W + 2*c)*N + n];   v[3] = x[((2*r+1)*W + 2*c+1)*N + n];
          mx = v[0]; sm = 0;
          for (int i = 0; i < 4; i++) begin
            if (v[i] > mx) mx = v[i];
            sm += v[i];
          end
          y[(r*WO + c)*N + n] = avg ? floor_div_pow2(sm, 2) : mx;
        end
  endfunction

  task automatic build_reference();
    for (int s = 0; s < NS; s++) begin
      longint p1[], c2[], p2[], c3[], p3[];
      conv_ref(x0[s], H0, W0, 1, CH[1], 0, y1[s]);
      pool_ref(y1[s], H0, W0, CH[1], 1'b0, p1);
      conv_ref(p1, H0/2, W0/2, CH[1], CH[2], 1, c2);
      pool_ref(c2, H0/2, W0/2, CH[2], 1'b0, p2);
      conv_ref(p2, H0/4, W0/4, CH[2], CH[3], 2, c3);
      pool_ref(c3, H0/4, W0/4, CH[3], 1'b1, p3);
      conv_ref(p3, H0/8, W0/8, CH[3], CH[4], 3, y4[s]);
      // flatten channel-major, FC, class
      cls[s] = 0;
      for (int k = 0; k < NCLS; k++) begin
        longint acc;
        int npix;
        npix = (H0/8) * (W0/8);
        acc = 0;
        for (int n = 0; n < CH[4]; n++)
          for (int p = 0; p < npix; p++)
            acc += y4[s][p*CH[4] + n] * wval(wl[4][k*CH[4]*npix + n*npix + p]);
        sc[s][k] = post(acc, offl[4], bl[4][k], 1'b0);
        if (sc[s][k] > sc[s][cls[s]]) cls[s] = k;
      end
    end
  endtask

  // -------------------------------------------------------------- checking
  int checks = 0, failures = 0;
  int got = 0, got1 = 0, got4 = 0, s1 = 0, s4 = 0;
  int t_in0 = -1, t_out0 = -1, cyc = 0, n_in = 0, t_in1 = -1;
  int n_in_stall = 0, n_look = 0, n_layer_stall = 0, n_out_stall = 0;
  int n_maxpool = 0, n_avgpool = 0;

  always @(posedge clk) cyc <= cyc + 1;

  // handshake rule on the result port: a result that is not taken stays
  // valid and unchanged
  logic held = 0;
  act_t held_score [NCLS];
  always @(posedge clk) begin
    if (rst_n && held) begin
      checks++;
      if (!out_valid || out_score != held_score) begin
        failures++;
        $display("result changed while waiting for out_ready");
      end
    end
    held <= rst_n && out_valid && !out_ready;
    held_score <= out_score;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      if (in_valid && !in_ready) n_in_stall++;
      if (in_valid && in_ready) begin
        if (n_in == 0) t_in0 = cyc;
        if (n_in == H0*W0) t_in1 = cyc;
        n_in++;
      end
      if (dut.u_conv1.accept && dut.u_conv1.lookahead) n_look++;
      if (dut.u_conv2.accept && dut.u_conv2.lookahead) n_look++;
      if ((dut.u_conv2.in_valid && !dut.u_conv2.in_ready) ||
          (dut.u_conv3.in_valid && !dut.u_conv3.in_ready) ||
          (dut.u_conv4.in_valid && !dut.u_conv4.in_ready) ||
          (dut.u_fc.in_valid && !dut.u_fc.in_ready)) n_layer_stall++;
      if (out_valid && !out_ready) n_out_stall++;
      if (dut.u_pool1.emit || dut.u_pool2.emit) n_maxpool++;
      if (dut.u_pool3.emit) n_avgpool++;

      // conv1 output pixels
      if (dut.u_conv1.out_valid && dut.u_conv1.out_ready && s1 < NS) begin
        for (int m = 0; m < CH[1]; m++) begin
          checks++;
          if (longint'(dut.u_conv1.out_data[m]) != y1[s1][got1*CH[1] + m]) begin
            failures++;
            if (failures < 20) $display("conv1 sample %0d pix %0d ch %0d: got %0d exp %0d",
                                        s1, got1, m, dut.u_conv1.out_data[m], y1[s1][got1*CH[1] + m]);
          end
        end
        got1++;
        if (got1 == H0*W0) begin got1 = 0; s1++; end
      end
      // conv4 output pixels
      if (dut.u_conv4.out_valid && dut.u_conv4.out_ready && s4 < NS) begin
        for (int m = 0; m < CH[4]; m++) begin
          checks++;
          if (longint'(dut.u_conv4.out_data[m]) != y4[s4][got4*CH[4] + m]) begin
            failures++;
            if (failures < 20) $display("conv4 sample %0d pix %0d ch %0d: got %0d exp %0d",
                                        s4, got4, m, dut.u_conv4.out_data[m], y4[s4][got4*CH[4] + m]);
          end
        end
        got4++;
        if (got4 == (H0/8)*(W0/8)) begin got4 = 0; s4++; end
      end
      // results
      if (out_valid && t_out0 < 0) t_out0 = cyc;
      if (out_valid && out_ready && got < NS) begin
        for (int k = 0; k < NCLS; k++) begin
          checks++;
          if (longint'(out_score[k]) != sc[got][k]) begin
            failures++;
            $display("sample %0d score %0d: got %0d exp %0d", got, k, out_score[k], sc[got][k]);
          end
        end
        checks++;
        if (int'(out_class) != cls[got]) begin
          failures++;
          $display("sample %0d: class %0d exp %0d", got, out_class, cls[got]);
        end
        $display("sample %0d: scores %0d %0d %0d class %0d", got,
                 out_score[0], out_score[1], out_score[2], out_class);
        got++;
      end
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic cfg_write(input int l, input cfg_kind_e k, input int a,
                           input logic [ACT_W-1:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_layer = 3'(l); cfg_kind = k; cfg_addr = CFG_ADDR_W'(a); cfg_data = d;
  endtask

  task automatic expect_seen(input string what, input int n);
    checks++;
    $display("mechanism %-28s %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("mechanism %s never happened", what);
    end
  endtask

  logic in_hs = 0;
  always @(posedge clk) in_hs <= in_valid && in_ready;

  initial begin
    // parameters: layer-wise offsets sized to the fan-in
    offl = '{8, 9, 10, 10, 11};
    for (int l = 0; l < 5; l++) begin
      int nw, nb;
      nw = (l < 4) ? CH[l+1] * CH[l] * 9 : NCLS * CH[4] * (H0/8) * (W0/8);
      nb = (l < 4) ? CH[l+1] : NCLS;
      wl[l] = new[nw];
      bl[l] = new[nb];
      foreach (wl[l][i]) begin
        wl[l][i] = rand_weight();
        for (int k = 0; k < NSHIFT; k++) if (!wl[l][i].valid[k]) n_absent++;
      end
      foreach (bl[l][i]) bl[l][i] = $urandom_range(0, 200) - 100;
    end
    for (int s = 0; s < NS; s++) begin
      x0[s] = new[H0*W0];
      foreach (x0[s][i]) x0[s][i] = rand_act(600);
      if (s == 1)
        for (int i = 100*W0; i < 104*W0; i++) x0[s][i] = 32767;
    end
    build_reference();

    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int l = 0; l < 5; l++) begin
      foreach (wl[l][i]) cfg_write(l, CFG_WEIGHT, i, ACT_W'(wl[l][i]));
      foreach (bl[l][i]) cfg_write(l, CFG_BIAS, i, ACT_W'(bl[l][i]));
      cfg_write(l, CFG_OFFSET, 0, ACT_W'(offl[l]));
    end
    @(negedge clk);
    cfg_we = 0;

    // result port: the second result is held back until the layers behind it
    // have stalled for a while, so that the pipeline backs up
    fork
      forever begin
        @(negedge clk);
        out_ready = (got != 1) ? 1'b1 : (n_layer_stall >= 300 && $urandom_range(0, 3) == 0);
      end
    join_none

    for (int s = 0; s < NS; s++)
      for (int i = 0; i < H0*W0; i++) begin
        in_valid = 1;
        in_data  = act_t'(x0[s][i]);
        do @(negedge clk); while (!in_hs);
      end
    in_valid = 0;
    wait (got == NS);

    checks++;
    $display("first sample: %0d clocks from first input to result (reference FPGA: %0d)",
             t_out0 - t_in0, PAPER_LATENCY);
    $display("sample interval: %0d clocks between the first inputs of samples 0 and 1",
             t_in1 - t_in0);
    if (t_out0 - t_in0 > PAPER_LATENCY) begin
      failures++;
      $display("latency above %0d clocks", PAPER_LATENCY);
    end
    expect_seen("input back-pressure", n_in_stall);
    expect_seen("look-ahead input reads", n_look);
    expect_seen("stalls between layers", n_layer_stall);
    expect_seen("output back-pressure", n_out_stall);
    expect_seen("max-pool outputs", n_maxpool);
    expect_seen("avg-pool outputs", n_avgpool);
    expect_seen("ReLU clamps", n_relu);
    expect_seen("saturations", n_sat);
    expect_seen("absent shift parameters", n_absent);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
