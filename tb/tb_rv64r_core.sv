// tb_rv64r_core: end-to-end test of the RV64R core at its default
// parameters: directed tests plus a small convolution layer (M=2 filters,
// C=2 channels, 6x6 input, 3x3 filter, stride 1) run in R-extension form,
// in plain F form and in R-extension form with round-toward-zero. See
// tb_conv_harness for what is checked.
module tb_rv64r_core;
  tb_conv_harness #(.M(2), .C(2), .HIN(6), .WIN(6), .HF(3), .WF(3), .S(1),
                    .DIRECTED(1), .RUN_F(1)) h (.done(), .n_checks(), .n_failures());
endmodule
