// conv_layer_harness: drives one conv_layer instance with random parameters
// and FRAMES random input maps, with random gaps on the input and random
// back-pressure on the output, and checks every output pixel against a
// direct evaluation of the padded 3x3 convolution (integer multiplication,
// floor of the offset division, bias, ReLU, saturation). With STRESS=0 input
// is offered every clock and output always accepted, and the clocks per frame
// are checked against the one-channel-per-clock rate.
module conv_layer_harness
  import dvs_cnn_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int unsigned H = 7,
  parameter int unsigned W = 4,
  parameter int unsigned N = 2,
  parameter int unsigned M = 3,
  parameter int unsigned FRAMES = 3,
  parameter bit          STRESS = 1'b1
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int TAPS = N * 9;

  logic rst_n = 0;
  logic cfg_we = 0;
  cfg_kind_e cfg_kind = CFG_WEIGHT;
  logic [CFG_ADDR_W-1:0] cfg_addr = '0;
  logic [ACT_W-1:0] cfg_data = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  act_t in_data [N];
  act_t out_data [M];

  conv_layer #(.H(H), .W(W), .N(N), .M(M)) dut (.*);

  sweight_t wts [M*TAPS];
  longint   bias [M];
  int       off;
  act_t     img [FRAMES][H][W][N];
  longint   expv [FRAMES][H][W][M];
  int       got_frames, got_pix;
  int       t_first, t_last;

  logic in_hs = 0;
  always @(posedge clk) in_hs <= in_valid && in_ready;

  // output checker, sampling at the rising edge
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready && got_frames < FRAMES) begin
      int r, c;
      r = got_pix / W; c = got_pix % W;
      for (int m = 0; m < M; m++) begin
        checks++;
        if (longint'(out_data[m]) != expv[got_frames][r][c][m]) begin
          failures++;
          if (failures < 30)
            $display("conv H%0d W%0d: frame %0d pix (%0d,%0d) ch %0d got %0d exp %0d",
                     H, W, got_frames, r, c, m, out_data[m], expv[got_frames][r][c][m]);
        end
      end
      got_pix++;
      if (got_pix == H*W) begin
        got_pix = 0;
        got_frames++;
        if (got_frames == 1) t_last = $time;
      end
    end
  end

  task automatic cfg_write(input cfg_kind_e k, input int a, input logic [ACT_W-1:0] d);
    // one write per clock, inputs changed at the falling edge
    @(negedge clk);
    cfg_we = 1; cfg_kind = k; cfg_addr = CFG_ADDR_W'(a); cfg_data = d;
  endtask

  initial begin
    done = 0; checks = 0; failures = 0; got_frames = 0; got_pix = 0;
    t_first = 0; t_last = 0;
    for (int n = 0; n < N; n++) in_data[n] = '0;
    off = $urandom_range(6, 9);
    for (int i = 0; i < M*TAPS; i++) wts[i] = rand_weight();
    for (int m = 0; m < M; m++) bias[m] = $urandom_range(0, 600) - 300;
    for (int f = 0; f < FRAMES; f++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++)
          for (int n = 0; n < N; n++)
            img[f][r][c][n] = (f == FRAMES - 1 && r == 1) ? act_t'(16'sh7fff)
                                                          : rand_act(700);
    // reference
    for (int f = 0; f < FRAMES; f++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++)
          for (int m = 0; m < M; m++) begin
            longint acc;
            acc = 0;
            for (int n = 0; n < N; n++)
              for (int p = 0; p < 3; p++)
                for (int q = 0; q < 3; q++) begin
                  int rr, cc;
                  rr = r + p - 1; cc = c + q - 1;
                  if (rr >= 0 && rr < H && cc >= 0 && cc < W)
                    acc += longint'(img[f][rr][cc][n]) * wval(wts[m*TAPS + (n*3+p)*3 + q]);
                end
            expv[f][r][c][m] = post(acc, off, bias[m], 1'b1);
          end

    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < M*TAPS; i++)
      cfg_write(CFG_WEIGHT, i, ACT_W'(wts[i]));
    for (int m = 0; m < M; m++)
      cfg_write(CFG_BIAS, m, ACT_W'(bias[m]));
    cfg_write(CFG_OFFSET, 0, ACT_W'(off));
    @(negedge clk);
    cfg_we = 0;

    // input driver: changes inputs at the falling edge; in_hs tells
    // whether the rising edge before took the offered pixel
    fork
      forever begin
        @(negedge clk);
        out_ready = STRESS ? ($urandom_range(0, 2) != 0) : 1'b1;
      end
    join_none
    @(negedge clk);
    for (int f = 0; f < FRAMES; f++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          if (STRESS) begin
            in_valid = 0;
            while ($urandom_range(0, 3) == 0) @(negedge clk);
          end
          in_valid = 1;
          in_data  = img[f][r][c];
          do @(negedge clk); while (!in_hs);
          if (f == 0 && r == 0 && c == 0) t_first = $time;
        end
    in_valid = 0;
    wait (got_frames == FRAMES);
    if (!STRESS) begin
      // first frame: H*W pixels at M clocks each, plus fill and row bubbles
      int cyc;
      cyc = (t_last - t_first) / 10;
      checks++;
      if (cyc < H*W*M || cyc > H*W*M + 2*H + W + 8) begin
        failures++;
        $display("conv rate: %0d clocks for a frame, expected about %0d", cyc, H*W*M);
      end
    end
    done = 1;
  end
endmodule
