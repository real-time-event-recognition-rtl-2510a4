// line_buffer: activation buffer of a layer block.
//
// The buffer holds P rows of a W-pixel-wide feature map, every pixel carrying
// N channels. It is organised as W columns, each a P-deep shift register.
// When a pixel arrives, the input multiplexer steers it to its column; that
// column shifts its contents up by one place (the oldest row falls out at the
// top) and the new pixel enters at the bottom. Other columns keep their data.
// Thus for a row-major stream each column holds the newest P rows seen in it,
// and the window of any P x Q kernel over the last P rows can be read out
// without storing the whole feature map.
//
// Interface: wr_en/wr_col/wr_data write one pixel (wr_col must be < W); the
// whole content is visible on data_o one cycle later: data_o[col][P-1] is the
// newest row of the column, data_o[col][0] the oldest. Contents are cleared
// by the synchronous, active-low reset.
//
// Follows the paper: column shift registers, the input MUX and P rows of
// storage. Own choice: a register array rather than RAM, the output ordering
// and reset.
module line_buffer
  import dvs_cnn_pkg::*;
#(
  parameter int unsigned P = 3,    // rows held (kernel height)
  parameter int unsigned W = 11,   // feature map width
  parameter int unsigned N = 1     // channels per pixel
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   wr_en,
  input  logic [$clog2(W+1)-1:0] wr_col,
  input  act_t                   wr_data [N],
  output act_t                   data_o  [W][P][N]
);

  act_t mem [W][P][N];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int c = 0; c < W; c++)
        for (int r = 0; r < P; r++)
          for (int n = 0; n < N; n++)
            mem[c][r][n] <= '0;
    end else if (wr_en) begin
      for (int c = 0; c < W; c++) begin
        if (c == int'(wr_col)) begin
          for (int r = 0; r < P - 1; r++)
            mem[c][r] <= mem[c][r+1];
          mem[c][P-1] <= wr_data;
        end
      end
    end
  end

  assign data_o = mem;

  // A write must address an existing column.
  always_ff @(posedge clk) begin
    if (rst_n && wr_en)
      a_col_in_range: assert (int'(wr_col) < W)
        else $error("line_buffer: column %0d out of range", wr_col);
  end

endmodule
