// dvs_cnn_top: streaming shift-add CNN that classifies vibration events of a
// distributed fibre vibration sensor.
//
// A sample is a spatial-temporal map of IN_H x IN_W values (256 time steps of
// 1 ms by 11 fibre positions 1.25 m apart), fed in row-major order, one value
// per pixel. The network is the 4-layer CNN of the paper's Table III:
//
//   conv1 3x3 -> 8ch,  ReLU,  maxpool 2x2   256x11 -> 128x5
//   conv2 3x3 -> 16ch, ReLU,  maxpool 2x2   128x5  -> 64x2
//   conv3 3x3 -> 32ch, ReLU,  avgpool 2x2   64x2   -> 32x1
//   conv4 3x3 -> 64ch, ReLU                 32x1
//   flatten (2048) -> FC -> 3 scores -> class (0 hammer, 1 air pick,
//   2 excavator, in whatever order the loaded weights were trained for)
//
// Every layer is a block of its own with its own activation buffer, and the
// blocks run concurrently as a pipeline joined by valid/ready pixel streams,
// so all parameters and intermediate data stay on chip. Multiplications are
// replaced by shifts: each weight is a sign plus three 3-bit shift codes with
// a layer-wise offset (see dvs_cnn_pkg).
//
// Interface: in_* takes input pixels; out_* gives the three saturated class
// scores and the class index of each sample. The cfg_* port loads the
// parameters of one layer (cfg_layer 0..3: conv1..conv4, 4: FC) one word per
// clock: weights, biases and the encoding offset (cfg_kind). Load all of
// them before the first sample; loading while a sample is in flight changes
// the result of that sample.
//
// Timing: conv1 produces one output channel per clock, 8 clocks per pixel,
// and paces the whole pipeline. With input offered every clock a 256 x 11
// sample takes 23,150 clocks from first input to result, and a new sample
// can start every 22,795 clocks (samples overlap in the pipeline).
//
// From the paper: the layer structure, the pipeline of layer blocks with
// activation buffers, shift-add arithmetic and the weight encoding. This
// design's own: the stream handshakes, the parameter load port, ReLU after
// each convolution, the fixed-point formats and the class output.
module dvs_cnn_top
  import dvs_cnn_pkg::*;
#(
  parameter int unsigned IN_H = 256,  // time steps per sample
  parameter int unsigned IN_W = 11,   // fibre positions per sample
  parameter int unsigned C1   = 8,    // conv1 output channels
  parameter int unsigned C2   = 16,   // conv2 output channels
  parameter int unsigned C3   = 32,   // conv3 output channels
  parameter int unsigned C4   = 64,   // conv4 output channels
  parameter int unsigned NCLS = 3     // event classes
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // parameter load
  input  logic                   cfg_we,
  input  logic [2:0]             cfg_layer,
  input  cfg_kind_e              cfg_kind,
  input  logic [CFG_ADDR_W-1:0]  cfg_addr,
  input  logic [ACT_W-1:0]       cfg_data,
  // sample input, row-major
  input  logic                   in_valid,
  output logic                   in_ready,
  input  act_t                   in_data,
  // result
  output logic                   out_valid,
  input  logic                   out_ready,
  output act_t                   out_score [NCLS],
  output logic [$clog2(NCLS)-1:0] out_class
);

  // feature map sizes after each pooling
  localparam int unsigned H2 = IN_H / 2, W2 = IN_W / 2;
  localparam int unsigned H3 = H2 / 2,   W3 = W2 / 2;
  localparam int unsigned H4 = H3 / 2,   W4 = W3 / 2;

  logic [4:0] we;
  always_comb
    for (int l = 0; l < 5; l++)
      we[l] = cfg_we && (int'(cfg_layer) == l);

  // streams between blocks
  logic c1_v, c1_r, p1_v, p1_r, c2_v, c2_r, p2_v, p2_r;
  logic c3_v, c3_r, p3_v, p3_r, c4_v, c4_r;
  act_t x0 [1];
  act_t c1_d [C1];
  act_t p1_d [C1];
  act_t c2_d [C2];
  act_t p2_d [C2];
  act_t c3_d [C3];
  act_t p3_d [C3];
  act_t c4_d [C4];

  assign x0[0] = in_data;

  conv_layer #(.H(IN_H), .W(IN_W), .N(1), .M(C1)) u_conv1 (
    .clk, .rst_n,
    .cfg_we (we[0]), .cfg_kind, .cfg_addr, .cfg_data,
    .in_valid (in_valid), .in_ready (in_ready), .in_data (x0),
    .out_valid (c1_v), .out_ready (c1_r), .out_data (c1_d)
  );

  pool_layer #(.H(IN_H), .W(IN_W), .N(C1), .AVG(1'b0)) u_pool1 (
    .clk, .rst_n,
    .in_valid (c1_v), .in_ready (c1_r), .in_data (c1_d),
    .out_valid (p1_v), .out_ready (p1_r), .out_data (p1_d)
  );

  conv_layer #(.H(H2), .W(W2), .N(C1), .M(C2)) u_conv2 (
    .clk, .rst_n,
    .cfg_we (we[1]), .cfg_kind, .cfg_addr, .cfg_data,
    .in_valid (p1_v), .in_ready (p1_r), .in_data (p1_d),
    .out_valid (c2_v), .out_ready (c2_r), .out_data (c2_d)
  );

  pool_layer #(.H(H2), .W(W2), .N(C2), .AVG(1'b0)) u_pool2 (
    .clk, .rst_n,
    .in_valid (c2_v), .in_ready (c2_r), .in_data (c2_d),
    .out_valid (p2_v), .out_ready (p2_r), .out_data (p2_d)
  );

  conv_layer #(.H(H3), .W(W3), .N(C2), .M(C3)) u_conv3 (
    .clk, .rst_n,
    .cfg_we (we[2]), .cfg_kind, .cfg_addr, .cfg_data,
    .in_valid (p2_v), .in_ready (p2_r), .in_data (p2_d),
    .out_valid (c3_v), .out_ready (c3_r), .out_data (c3_d)
  );

  pool_layer #(.H(H3), .W(W3), .N(C3), .AVG(1'b1)) u_pool3 (
    .clk, .rst_n,
    .in_valid (c3_v), .in_ready (c3_r), .in_data (c3_d),
    .out_valid (p3_v), .out_ready (p3_r), .out_data (p3_d)
  );

  conv_layer #(.H(H4), .W(W4), .N(C3), .M(C4)) u_conv4 (
    .clk, .rst_n,
    .cfg_we (we[3]), .cfg_kind, .cfg_addr, .cfg_data,
    .in_valid (p3_v), .in_ready (p3_r), .in_data (p3_d),
    .out_valid (c4_v), .out_ready (c4_r), .out_data (c4_d)
  );

  fc_layer #(.NPIX(H4*W4), .N(C4), .K(NCLS)) u_fc (
    .clk, .rst_n,
    .cfg_we (we[4]), .cfg_kind, .cfg_addr, .cfg_data,
    .in_valid (c4_v), .in_ready (c4_r), .in_data (c4_d),
    .out_valid, .out_ready, .out_score, .out_class
  );

endmodule
