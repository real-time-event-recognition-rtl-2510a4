// pool_layer: one 2x2, stride-2 pooling layer block (max or average).
//
// Input and output are row-major pixel streams with N channels per pixel.
// The output map is floor(H/2) x floor(W/2); an odd last row or column is
// dropped, as an unpadded stride-2 pooling does (11 columns give 5, 5 give 2).
//
// How it works. The block's activation buffer is a two-row line buffer: each
// column keeps its last two pixels. When the bottom-right pixel of a 2x2
// window arrives (odd row, odd column), the other three values are already in
// the buffer: both pixels of the left column and the upper pixel of the right
// column. The window is reduced on the spot, per channel, to its maximum
// (AVG=0) or to the floor of its mean (AVG=1, sum shifted right by two), and
// the result is registered.
//
// Timing: the block takes one pixel per clock whenever its output register
// is empty or being read; an output appears one clock after the pixel that
// completes its window.
//
// From the paper: 2x2 windows, stride 2, no padding, max pooling after the
// first two convolutions and average pooling after the third (Table III),
// and buffering only the rows a window needs. This design's own: the
// handshake, the floor rounding of the average and dropping odd edges.
module pool_layer
  import dvs_cnn_pkg::*;
#(
  parameter int unsigned H   = 256,  // input rows
  parameter int unsigned W   = 11,   // input columns
  parameter int unsigned N   = 8,    // channels
  parameter bit          AVG = 1'b0  // 0: max pooling, 1: average pooling
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  act_t in_data  [N],
  output logic out_valid,
  input  logic out_ready,
  output act_t out_data [N]
);

  localparam int unsigned HO    = H / 2;
  localparam int unsigned WO    = W / 2;
  localparam int unsigned ROW_W = $clog2(H + 1);
  localparam int unsigned COL_W = $clog2(W + 1);
  localparam int unsigned IX_W  = (W > 1) ? $clog2(W) : 1;   // buffer column index

  logic [ROW_W-1:0] ri;
  logic [COL_W-1:0] ci;
  logic             accept, emit;

  assign in_ready = !out_valid || out_ready;
  assign accept   = in_valid && in_ready;
  assign emit     = accept && ri[0] && ci[0] &&
                    (int'(ri) < 2*HO) && (int'(ci) < 2*WO);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ri <= '0;
      ci <= '0;
    end else if (accept) begin
      if (int'(ci) == W - 1) begin
        ci <= '0;
        ri <= (int'(ri) == H - 1) ? '0 : ri + 1'b1;
      end else begin
        ci <= ci + 1'b1;
      end
    end
  end

  // activation buffer: two rows
  act_t lb [W][2][N];

  line_buffer #(.P(2), .W(W), .N(N)) u_lb (
    .clk     (clk),
    .rst_n   (rst_n),
    .wr_en   (accept),
    .wr_col  (ci),
    .wr_data (in_data),
    .data_o  (lb)
  );

  // 2x2 window ending at the incoming pixel
  act_t res [N];

  always_comb begin
    for (int n = 0; n < N; n++) begin
      act_t a, b, c, d;
      logic signed [ACT_W+1:0] s;
      logic [IX_W-1:0] lc, rc;
      rc = IX_W'(ci);
      lc = (rc != '0) ? rc - 1'b1 : '0;
      a  = lb[lc][0][n];            // row ri-1, column ci-1
      b  = lb[lc][1][n];            // row ri,   column ci-1
      c  = lb[rc][1][n];            // row ri-1, column ci
      d  = in_data[n];              // row ri,   column ci
      if (AVG) begin
        s      = (ACT_W+2)'(a) + (ACT_W+2)'(b) + (ACT_W+2)'(c) + (ACT_W+2)'(d);
        res[n] = act_t'(s >>> 2);
      end else begin
        res[n] = a;
        if (b > res[n]) res[n] = b;
        if (c > res[n]) res[n] = c;
        if (d > res[n]) res[n] = d;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int n = 0; n < N; n++)
        out_data[n] <= '0;
    end else begin
      if (emit) begin
        out_data  <= res;
        out_valid <= 1'b1;
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

endmodule
