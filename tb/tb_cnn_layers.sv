// tb_cnn_layers: first convolution layers of the two networks evaluated for
// this architecture, each at its real size, each on a co-processor built
// with the kernel size and input depth it needs (16 cell bodies):
//  * ZynqNet layer 1: 256x256x3 image, 3x3 kernels, stride 2, zero padding,
//    128x128 outputs (build K = 3, D_IN = 3);
//  * AlexNet layer 1: 227x227x3 image, 11x11 kernels, stride 4, no padding,
//    55x55 outputs (build K = 11, D_IN = 3).
// Each network has more than 16 filters in this layer (64 and 96), so the
// full layer takes several passes; each case runs one pass of 16 filters and
// checks every output, the instruction count and the cycle count (see
// tb_layer_case). The two cases run side by side.
module tb_cnn_layers;
  logic clk = 0;
  always #5 clk = ~clk;
  int c0, f0, c1, f1;
  bit d0, d1;

  tb_layer_case #(.K(3),  .D(3), .W(256), .S(2), .ZPAD(1), .NAME("ZynqNet layer 1"))
    u_zynq (.clk, .checks(c0), .failures(f0), .finished(d0));
  tb_layer_case #(.K(11), .D(3), .W(227), .S(4), .ZPAD(0), .NAME("AlexNet layer 1"))
    u_alex (.clk, .checks(c1), .failures(f1), .finished(d1));

  initial begin
    repeat (450000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1 + 1);
    $finish;
  end

  initial begin
    wait (d0 && d1);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1);
    $finish;
  end
endmodule
