// conv_layer: one 3x3 convolution layer block of the pipelined CNN.
//
// The block receives its input feature map as a row-major stream of pixels
// (rows are time steps, columns are fibre positions; all N input channels of
// a pixel arrive together) and sends its output map out in the same form with
// M channels per pixel. Kernel 3x3, stride 1, zero padding 1, so the output
// map has the input's H x W size.
//
// How it works. Input pixels go into a three-row line buffer (the layer's
// activation buffer). Output pixel (r, c) can be computed as soon as input
// pixel (min(r+1,H-1), min(c+1,W-1)) has arrived; pixels beyond it are held
// off (in_ready low) so that no row still needed is shifted out, except for
// one look-ahead pixel whose column lies outside the current window, which
// lets input transfer overlap computation. Each cycle one output channel m is
// issued: all N*9 window taps are multiplied by their encoded weights with
// shift_add units (no multipliers) and summed. The next stage removes the
// layer's encoding offset (arithmetic right shift), adds the channel bias,
// applies ReLU and saturates to the activation width. When channel M-1 is
// done the M-channel pixel is handed to the output register.
//
// Timing: one output channel per clock, so an output pixel takes M clocks in
// steady state; a pixel leaves 2 clocks after its last channel is issued.
// Issue pauses while the output register is full and not accepted.
//
// Parameters (weights, biases, offset) are written through the cfg_* port
// before use. Weight address = m*(N*9) + (n*3 + p)*3 + q for output channel
// m, input channel n, kernel row p (time) and column q (space).
//
// From the paper: layer-per-block pipeline, P-row activation buffer with
// column shifting, shift-add instead of MAC, 3 shift parameters per weight,
// a layer-wise encoding offset, kernel/stride/padding of Table III. This
// design's own: the handshakes, one channel per clock, ReLU after every
// convolution (the paper names no activation function), the rounding
// (floor) and saturation, and biases kept as plain fixed-point words.
module conv_layer
  import dvs_cnn_pkg::*;
#(
  parameter int unsigned H    = 256,  // input (and output) rows
  parameter int unsigned W    = 11,   // input (and output) columns
  parameter int unsigned N    = 1,    // input channels
  parameter int unsigned M    = 8,    // output channels
  parameter bit          RELU = 1'b1  // apply ReLU to the outputs
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // parameter load
  input  logic                  cfg_we,
  input  cfg_kind_e             cfg_kind,
  input  logic [CFG_ADDR_W-1:0] cfg_addr,
  input  logic [ACT_W-1:0]      cfg_data,
  // input pixel stream
  input  logic                  in_valid,
  output logic                  in_ready,
  input  act_t                  in_data  [N],
  // output pixel stream
  output logic                  out_valid,
  input  logic                  out_ready,
  output act_t                  out_data [M]
);

  localparam int unsigned K     = 3;            // kernel height and width
  localparam int unsigned TAPS  = N * K * K;
  localparam int unsigned HW    = H * W;
  localparam int unsigned IDX_W = $clog2(HW + 2);
  localparam int unsigned ROW_W = $clog2(H + 1);
  localparam int unsigned COL_W = $clog2(W + 1);
  localparam int unsigned CH_W  = (M > 1) ? $clog2(M) : 1;        // 0..M-1
  localparam int unsigned WA_W  = (M*TAPS > 1) ? $clog2(M*TAPS) : 1;

  // ---------------------------------------------------------------- params
  sweight_t wmem [M*TAPS];
  act_t     bmem [M];
  offset_t  off_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      off_q <= '0;
    end else if (cfg_we) begin
      unique case (cfg_kind)
        CFG_WEIGHT: if (int'(cfg_addr) < M*TAPS)
                      wmem[WA_W'(cfg_addr)] <= sweight_t'(cfg_data[SWEIGHT_W-1:0]);
        CFG_BIAS:   if (int'(cfg_addr) < M)
                      bmem[CH_W'(cfg_addr)] <= act_t'(cfg_data);
        CFG_OFFSET: off_q <= cfg_data[OFF_W-1:0];
        default: ;
      endcase
    end
  end

  // ----------------------------------------------------- position counters
  logic [IDX_W-1:0] in_cnt;     // input pixels received in this frame
  logic [COL_W-1:0] in_col;     // column of the next input pixel
  logic [ROW_W-1:0] ro;         // output pixel being computed
  logic [COL_W-1:0] co;
  logic [CH_W-1:0]  mc;         // output channel being issued

  logic [ROW_W-1:0] need_r;
  logic [COL_W-1:0] need_c;
  logic [IDX_W-1:0] need_idx;   // linear index of the last pixel the window needs
  logic             win_ok;     // window of (ro, co) fully buffered
  logic             lookahead;  // next pixel may enter during computation
  logic             accept;
  logic             issue;
  logic             last_ch, last_pix;
  logic             out_busy;

  always_comb begin
    need_r   = (int'(ro) + 1 < H) ? ROW_W'(ro + 1'b1) : ROW_W'(H - 1);
    need_c   = (int'(co) + 1 < W) ? COL_W'(co + 1'b1) : COL_W'(W - 1);
    need_idx = IDX_W'(need_r) * IDX_W'(W) + IDX_W'(need_c);
    win_ok   = in_cnt > need_idx;
    lookahead = (in_cnt == need_idx + 1'b1) && (int'(in_cnt) < HW) &&
                ((int'(in_col) + 1 < int'(co)) || (int'(in_col) > int'(co) + 1));
  end

  assign in_ready = (in_cnt <= need_idx) || lookahead;
  assign accept   = in_valid && in_ready;
  assign out_busy = out_valid && !out_ready;
  assign issue    = win_ok && !out_busy;
  assign last_ch  = (int'(mc) == M - 1);
  assign last_pix = (int'(ro) == H - 1) && (int'(co) == W - 1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      in_cnt <= '0;
      in_col <= '0;
      ro     <= '0;
      co     <= '0;
      mc     <= '0;
    end else begin
      if (accept)
        in_col <= (int'(in_col) == W - 1) ? '0 : in_col + 1'b1;
      if (issue && last_ch && last_pix)
        in_cnt <= '0;
      else if (accept)
        in_cnt <= in_cnt + 1'b1;
      if (issue) begin
        if (last_ch) begin
          mc <= '0;
          if (int'(co) == W - 1) begin
            co <= '0;
            ro <= last_pix ? '0 : ro + 1'b1;
          end else begin
            co <= co + 1'b1;
          end
        end else begin
          mc <= mc + 1'b1;
        end
      end
    end
  end

  // ------------------------------------------------------ activation buffer
  act_t lb [W][K][N];

  line_buffer #(.P(K), .W(W), .N(N)) u_lb (
    .clk     (clk),
    .rst_n   (rst_n),
    .wr_en   (accept),
    .wr_col  (in_col),
    .wr_data (in_data),
    .data_o  (lb)
  );

  // Window taps. Every column of the window holds the rows up to need_r, so
  // the wanted row rr sits in slot rr - need_r + K - 1 (slot K-1 newest).
  act_t win [TAPS];

  always_comb begin
    for (int n = 0; n < N; n++) begin
      for (int p = 0; p < K; p++) begin
        for (int q = 0; q < K; q++) begin
          int rr, cc, slot;
          rr   = int'(ro) + p - 1;
          cc   = int'(co) + q - 1;
          slot = rr - int'(need_r) + K - 1;
          if (rr < 0 || rr >= H || cc < 0 || cc >= W || slot < 0 || slot >= K)
            win[(n*K + p)*K + q] = '0;
          else
            win[(n*K + p)*K + q] = lb[cc][slot][n];
        end
      end
    end
  end

  // ---------------------------------------------------- shift-add datapath
  acc_t     prod [TAPS];
  sweight_t wsel [TAPS];      // weights of output channel mc

  always_comb
    for (int t = 0; t < TAPS; t++)
      wsel[t] = wmem[int'(mc)*TAPS + t];

  for (genvar t = 0; t < TAPS; t++) begin : g_tap
    shift_add u_sa (
      .act_i (win[t]),
      .w_i   (wsel[t]),
      .sum_i ('0),
      .sum_o (prod[t])
    );
  end

  acc_t dot;
  always_comb begin
    dot = '0;
    for (int t = 0; t < TAPS; t++)
      dot = dot + prod[t];
  end

  // stage 1: registered channel sum
  logic            s_valid;
  logic [CH_W-1:0] s_m;
  acc_t            s_acc;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_valid <= 1'b0;
      s_m     <= '0;
      s_acc   <= '0;
    end else begin
      s_valid <= issue;
      if (issue) begin
        s_m   <= mc;
        s_acc <= dot;
      end
    end
  end

  // stage 2: offset, bias, ReLU, saturation, collect the pixel
  acc_t post_full;
  act_t post;
  act_t vec   [M];
  act_t vec_n [M];

  always_comb begin
    post_full = (s_acc >>> off_q) + acc_t'(bmem[s_m]);
    if (RELU && post_full < 0)
      post_full = '0;
    post = sat_act(post_full);
    vec_n = vec;
    if (s_valid)
      vec_n[s_m] = post;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int m = 0; m < M; m++) begin
        vec[m]      <= '0;
        out_data[m] <= '0;
      end
    end else begin
      vec <= vec_n;
      if (s_valid && int'(s_m) == M - 1) begin
        out_data  <= vec_n;
        out_valid <= 1'b1;
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

  // Issue never runs while the output is blocked, so a finished pixel always
  // finds the output register free or being emptied.
  always_ff @(posedge clk) begin
    if (rst_n && s_valid && int'(s_m) == M - 1)
      a_no_overwrite: assert (!(out_valid && !out_ready))
        else $error("conv_layer: output pixel overwritten");
  end

endmodule
