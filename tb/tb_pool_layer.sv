// tb_pool_layer: max pooling on an odd-sized map (last row and column
// dropped), max pooling on an 11-column map as after the first convolution,
// and average pooling on a 2-column map as after the third convolution.
module tb_pool_layer;
  logic clk = 0;
  logic d0, d1, d2;
  int c0, c1, c2, f0, f1, f2;

  always #5 clk = ~clk;

  pool_layer_harness #(.H(5), .W(5), .N(2), .AVG(1'b0)) h0 (.clk, .done(d0), .checks(c0), .failures(f0));
  pool_layer_harness #(.H(6), .W(11), .N(3), .AVG(1'b0)) h1 (.clk, .done(d1), .checks(c1), .failures(f1));
  pool_layer_harness #(.H(8), .W(2), .N(4), .AVG(1'b1)) h2 (.clk, .done(d2), .checks(c2), .failures(f2));

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2 + 1);
    $finish;
  end

  initial begin
    @(posedge clk);
    wait (d0 && d1 && d2);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2);
    $finish;
  end
endmodule
