// tb_conv_layer: runs conv_layer at three sizes (a general map under random
// stalls, a one-column map where the padding covers both sides, and a
// free-running map whose frame time is checked) against the reference.
module tb_conv_layer;
  logic clk = 0;
  logic d0, d1, d2;
  int c0, c1, c2, f0, f1, f2;

  always #5 clk = ~clk;

  conv_layer_harness #(.H(7), .W(4), .N(2), .M(3), .FRAMES(3), .STRESS(1'b1))
    h0 (.clk, .done(d0), .checks(c0), .failures(f0));
  conv_layer_harness #(.H(6), .W(1), .N(3), .M(2), .FRAMES(2), .STRESS(1'b1))
    h1 (.clk, .done(d1), .checks(c1), .failures(f1));
  conv_layer_harness #(.H(8), .W(11), .N(1), .M(8), .FRAMES(2), .STRESS(1'b0))
    h2 (.clk, .done(d2), .checks(c2), .failures(f2));

  initial begin
    repeat (200000) @(posedge clk);
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
