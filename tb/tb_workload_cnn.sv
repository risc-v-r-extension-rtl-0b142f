// tb_workload_cnn: first convolution layers of the three networks used to
// evaluate the R-extension, each run on its own RV64R core instance in
// R-extension form and in plain F form, with every output checked against
// the reference (see tb_conv_harness):
//   LeNet-5 conv1     : 1 x 32 x 32 input, 6 filters 5x5, stride 1 -> 6 x 28 x 28
//   ResNet-20 conv1   : 3 x 32 x 32 input, 16 filters 3x3, stride 1 -> 16 x 30 x 30
//                       (the loop nest has no zero padding, so 30 x 30, not 32 x 32)
//   MobileNet-V1 conv1: stride-2 3x3 convolution with 8 filters on a 3 x 32 x 32
//                       input -> 8 x 15 x 15 (a scaled-down first layer)
// Cycle counts, IPC and data-memory accesses of both forms are printed.
module tb_workload_cnn;
  bit d0, d1, d2;
  int c0, c1, c2, f0, f1, f2;

  tb_conv_harness #(.M(6), .C(1), .HIN(32), .WIN(32), .HF(5), .WF(5), .S(1),
                    .DIRECTED(0), .RUN_F(1), .MAX_CYCLES(20_000_000), .STANDALONE(0))
    lenet (.done(d0), .n_checks(c0), .n_failures(f0));
  tb_conv_harness #(.M(16), .C(3), .HIN(32), .WIN(32), .HF(3), .WF(3), .S(1),
                    .DIRECTED(0), .RUN_F(1), .MAX_CYCLES(20_000_000), .STANDALONE(0))
    resnet (.done(d1), .n_checks(c1), .n_failures(f1));
  tb_conv_harness #(.M(8), .C(3), .HIN(32), .WIN(32), .HF(3), .WF(3), .S(2),
                    .DIRECTED(0), .RUN_F(1), .MAX_CYCLES(20_000_000), .STANDALONE(0))
    mobilenet (.done(d2), .n_checks(c2), .n_failures(f2));

  initial begin
    wait (d0 && d1 && d2);
    #1;
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2);
    $finish;
  end
endmodule
