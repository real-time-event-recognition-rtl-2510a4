// pool_layer_harness: streams FRAMES random maps through one pool_layer with
// random input gaps and output back-pressure, and checks every output pixel
// against a direct 2x2 max or floor-average over the map.
module pool_layer_harness
  import dvs_cnn_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int unsigned H = 5,
  parameter int unsigned W = 5,
  parameter int unsigned N = 2,
  parameter bit          AVG = 1'b0,
  parameter int unsigned FRAMES = 3
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int HO = H / 2, WO = W / 2;

  logic rst_n = 0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  act_t in_data [N];
  act_t out_data [N];

  pool_layer #(.H(H), .W(W), .N(N), .AVG(AVG)) dut (.*);

  act_t   img  [FRAMES][H][W][N];
  longint expv [FRAMES][HO][WO][N];
  int     got_frames = 0, got_pix = 0;
  logic   in_hs = 0;

  always @(posedge clk) in_hs <= in_valid && in_ready;

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready && got_frames < FRAMES) begin
      int r, c;
      r = got_pix / WO; c = got_pix % WO;
      for (int n = 0; n < N; n++) begin
        checks++;
        if (longint'(out_data[n]) != expv[got_frames][r][c][n]) begin
          failures++;
          if (failures < 20)
            $display("pool AVG=%0d: frame %0d pix (%0d,%0d) ch %0d got %0d exp %0d",
                     AVG, got_frames, r, c, n, out_data[n], expv[got_frames][r][c][n]);
        end
      end
      got_pix++;
      if (got_pix == HO*WO) begin
        got_pix = 0;
        got_frames++;
      end
    end
  end

  initial begin
    done = 0; checks = 0; failures = 0;
    for (int n = 0; n < N; n++) in_data[n] = '0;
    for (int f = 0; f < FRAMES; f++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++)
          for (int n = 0; n < N; n++)
            img[f][r][c][n] = act_t'($urandom);
    for (int f = 0; f < FRAMES; f++)
      for (int r = 0; r < HO; r++)
        for (int c = 0; c < WO; c++)
          for (int n = 0; n < N; n++) begin
            longint v [4];
            longint mx, sm;
            v[0] = img[f][2*r][2*c][n];   v[1] = img[f][2*r][2*c+1][n];
            v[2] = img[f][2*r+1][2*c][n]; v[3] = img[f][2*r+1][2*c+1][n];
            mx = v[0]; sm = 0;
            for (int i = 0; i < 4; i++) begin
              if (v[i] > mx) mx = v[i];
              sm += v[i];
            end
            expv[f][r][c][n] = AVG ? floor_div_pow2(sm, 2) : mx;
          end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    fork
      forever begin
        @(negedge clk);
        out_ready = ($urandom_range(0, 2) != 0);
      end
    join_none
    @(negedge clk);
    for (int f = 0; f < FRAMES; f++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          in_valid = 0;
          while ($urandom_range(0, 3) == 0) @(negedge clk);
          in_valid = 1;
          in_data  = img[f][r][c];
          do @(negedge clk); while (!in_hs);
        end
    in_valid = 0;
    wait (got_frames == FRAMES);
    done = 1;
  end
endmodule
