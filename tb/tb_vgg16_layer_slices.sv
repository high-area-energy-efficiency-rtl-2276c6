// tb_vgg16_layer_slices: runs slices of pattern-pruned VGG16 convolution
// layers on three computing units side by side, one per evaluated network.
// Each slice is 128 input channels x 256 output channels, the largest that
// fits one 512x512 crossbar with margin. Pattern counts and all-zero kernel
// shares are the reported ones for that layer and network; pattern sizes
// cycle 3,2,1, which with those zero shares gives about the reported
// sparsity:
//   CIFAR-10  conv3_1:  8 patterns, 40.9 % all-zero kernels (sparsity ~87 %)
//   CIFAR-100 conv3_2:  8 patterns, 27.4 % all-zero kernels (~84 %)
//   ImageNet  conv3_2: 12 patterns, 28.5 % all-zero kernels (~84 %)
// Activations are 50 % zero (post-ReLU). Every output of four pooled windows
// and one unpooled window is checked, as in tb_pp_rram_accel.
module tb_vgg16_layer_slices;
  int c0, f0, c1, f1, c2, f2;
  logic d0, d1, d2;
  pp_layer_tester #(.NCH(128), .NOC(256), .NPAT(8),  .MAXSZ(3), .KZERO_PCT(41), .XZERO_PCT(50))
    u_cifar10  (.checks(c0), .failures(f0), .finished(d0));
  pp_layer_tester #(.NCH(128), .NOC(256), .NPAT(8),  .MAXSZ(3), .KZERO_PCT(27), .XZERO_PCT(50))
    u_cifar100 (.checks(c1), .failures(f1), .finished(d1));
  pp_layer_tester #(.NCH(128), .NOC(256), .NPAT(12), .MAXSZ(3), .KZERO_PCT(29), .XZERO_PCT(50))
    u_imagenet (.checks(c2), .failures(f2), .finished(d2));
  initial begin
    repeat (3000000) @(posedge u_cifar10.clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2 + 1);
    $finish;
  end
  initial begin
    wait (d0 && d1 && d2);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2);
    $finish;
  end
endmodule
