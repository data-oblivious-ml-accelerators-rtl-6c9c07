// tb_resnet_layer: the ResNet-50 layer slice of resnet_slice (first 1x1
// convolution of a conv2_x bottleneck, 64 -> 64 channels over 8x8 pixels,
// blinded activations, public weights, accumulation over K slices, ReLU and
// scale) run on the three array sizes of the evaluation, 8x8, 16x16 and
// 32x32, side by side on one clock. Passes when all three match the
// reference layer.
module tb_resnet_layer;
  int c8, f8, c16, f16, c32, f32;
  logic d8, d16, d32;
  logic clk = 0;
  always #5 clk = ~clk;

  resnet_slice #(.DIM(8))  u_8  (.clk(clk), .checks(c8),  .failures(f8),  .done(d8));
  resnet_slice #(.DIM(16)) u_16 (.clk(clk), .checks(c16), .failures(f16), .done(d16));
  resnet_slice #(.DIM(32)) u_32 (.clk(clk), .checks(c32), .failures(f32), .done(d32));

  initial begin
    @(posedge clk);
    while (!(d8 && d16 && d32)) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c8 + c16 + c32, f8 + f16 + f32);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c8 + c16 + c32, f8 + f16 + f32 + 1);
    $finish;
  end
endmodule
