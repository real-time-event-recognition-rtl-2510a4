// tb_line_buffer: writes random pixels to random columns of a 3-row, 5-column,
// 2-channel buffer and compares the whole content after every write with a
// model that keeps, per column, the last three pixels written to it.
module tb_line_buffer;
  import dvs_cnn_pkg::*;

  localparam int P = 3, W = 5, N = 2;

  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [$clog2(W+1)-1:0] wr_col = '0;
  act_t wr_data [N];
  act_t data_o [W][P][N];
  act_t model [W][P][N];
  int checks = 0, failures = 0;

  line_buffer #(.P(P), .W(W), .N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    for (int c = 0; c < W; c++)
      for (int r = 0; r < P; r++)
        for (int n = 0; n < N; n++) begin
          checks++;
          if (data_o[c][r][n] !== model[c][r][n]) begin
            failures++;
            if (failures < 10)
              $display("col %0d slot %0d ch %0d: got %0d exp %0d", c, r, n,
                       data_o[c][r][n], model[c][r][n]);
          end
        end
  endtask

  initial begin
    for (int n = 0; n < N; n++) wr_data[n] = '0;
    for (int c = 0; c < W; c++)
      for (int r = 0; r < P; r++)
        for (int n = 0; n < N; n++) model[c][r][n] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    #1 compare();
    for (int i = 0; i < 500; i++) begin
      int c;
      logic en;
      c  = $urandom_range(0, W - 1);
      en = ($urandom_range(0, 3) != 0);
      wr_en  <= en;
      wr_col <= ($clog2(W+1))'(c);
      for (int n = 0; n < N; n++) wr_data[n] <= act_t'($urandom);
      @(posedge clk);
      if (en) begin
        for (int r = 0; r < P - 1; r++) model[c][r] = model[c][r+1];
        model[c][P-1] = wr_data;
      end
      #1 compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
