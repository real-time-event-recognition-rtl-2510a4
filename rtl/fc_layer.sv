// fc_layer: flatten and fully connected output layer with class decision.
//
// The block receives the last convolution's map as a row-major stream of
// NPIX pixels of N channels and computes K class scores
//     y[k] = sum_{n,pix} x[n][pix] * w[k][n*NPIX + pix] + b[k],
// i.e. a flatten in channel-major order (channel, then pixel) followed by a
// linear layer. 32 pixels x 64 channels give the 2048 features of the paper's
// model, and K = 3 event classes.
//
// How it works. There is no feature buffer: every arriving pixel is folded
// straight into K running sums, all N channels and all K classes at once,
// with shift_add units in place of multipliers. After the last pixel of a
// sample the sums have the layer's encoding offset removed (arithmetic right
// shift), the biases added and are saturated to the activation width; the
// class with the largest score (the lowest index on a tie) is reported.
// Softmax is monotonic, so the argmax of the scores is the class it would
// pick; the softmax itself is only used in training.
//
// Timing: one pixel per clock; the result is registered one clock after the
// last pixel and held until out_ready. Input is held off only while a
// finished result has not been taken.
//
// Parameters are written through cfg_*: weight address = k*(N*NPIX) +
// n*NPIX + pix, bias address = k.
//
// From the paper: the flatten to 2048 features and the 3-class FC layer
// (Table III), shift-add arithmetic and encoded weights. This design's own:
// the streaming accumulation order, the handshake and the argmax output.
module fc_layer
  import dvs_cnn_pkg::*;
#(
  parameter int unsigned NPIX = 32,  // pixels per sample (H x W of its input)
  parameter int unsigned N    = 64,  // channels per pixel
  parameter int unsigned K    = 3    // classes
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   cfg_we,
  input  cfg_kind_e              cfg_kind,
  input  logic [CFG_ADDR_W-1:0]  cfg_addr,
  input  logic [ACT_W-1:0]       cfg_data,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  act_t                   in_data [N],
  output logic                   out_valid,
  input  logic                   out_ready,
  output act_t                   out_score [K],
  output logic [$clog2(K)-1:0]   out_class
);

  localparam int unsigned F     = N * NPIX;     // flattened features
  localparam int unsigned PIX_W = $clog2(NPIX + 1);
  localparam int unsigned WA_W  = (K*F > 1) ? $clog2(K*F) : 1;
  localparam int unsigned BA_W  = (K > 1) ? $clog2(K) : 1;

  sweight_t wmem [K*F];
  act_t     bmem [K];
  offset_t  off_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      off_q <= '0;
    end else if (cfg_we) begin
      unique case (cfg_kind)
        CFG_WEIGHT: if (int'(cfg_addr) < K*F)
                      wmem[WA_W'(cfg_addr)] <= sweight_t'(cfg_data[SWEIGHT_W-1:0]);
        CFG_BIAS:   if (int'(cfg_addr) < K)
                      bmem[BA_W'(cfg_addr)] <= act_t'(cfg_data);
        CFG_OFFSET: off_q <= cfg_data[OFF_W-1:0];
        default: ;
      endcase
    end
  end

  logic [PIX_W-1:0] pix;
  logic             accept, last;

  assign in_ready = !(out_valid && !out_ready);
  assign accept   = in_valid && in_ready;
  assign last     = (int'(pix) == NPIX - 1);

  // per-class contribution of the arriving pixel
  sweight_t wsel [K][N];      // weights met by the arriving pixel
  acc_t     prod [K][N];

  always_comb
    for (int k = 0; k < K; k++)
      for (int n = 0; n < N; n++)
        wsel[k][n] = wmem[k*F + n*NPIX + int'(pix)];

  acc_t part [K];
  acc_t acc  [K];
  acc_t nxt  [K];

  for (genvar k = 0; k < K; k++) begin : g_cls
    for (genvar n = 0; n < N; n++) begin : g_ch
      shift_add u_sa (
        .act_i (in_data[n]),
        .w_i   (wsel[k][n]),
        .sum_i ('0),
        .sum_o (prod[k][n])
      );
    end
  end

  always_comb begin
    for (int k = 0; k < K; k++) begin
      part[k] = '0;
      for (int n = 0; n < N; n++)
        part[k] = part[k] + prod[k][n];
      nxt[k] = acc[k] + part[k];
    end
  end

  // final scores and argmax
  act_t                 score [K];
  logic [$clog2(K)-1:0] best;

  always_comb begin
    for (int k = 0; k < K; k++)
      score[k] = sat_act((nxt[k] >>> off_q) + acc_t'(bmem[k]));
    best = '0;
    for (int k = 1; k < K; k++)
      if (score[k] > score[best])
        best = ($clog2(K))'(k);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pix       <= '0;
      out_valid <= 1'b0;
      out_class <= '0;
      for (int k = 0; k < K; k++) begin
        acc[k]       <= '0;
        out_score[k] <= '0;
      end
    end else begin
      if (accept) begin
        pix <= last ? '0 : pix + 1'b1;
        for (int k = 0; k < K; k++)
          acc[k] <= last ? '0 : nxt[k];
      end
      if (accept && last) begin
        out_score <= score;
        out_class <= best;
        out_valid <= 1'b1;
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

endmodule
