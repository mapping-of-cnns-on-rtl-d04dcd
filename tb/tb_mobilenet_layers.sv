// tb_mobilenet_layers: runs MobileNet 1x1 convolution layers 1 to 4 on four
// copies of the default-size system (16 cores, 128x128 crossbars, 16-byte
// bus), in parallel in one simulation:
//   layer 1: 56x56 outputs, 128 -> 128 channels, 1 core   (P_V=1, P_H=1)
//   layer 2: 28x28 outputs, 128 -> 256 channels, 2 cores  (P_V=1, P_H=2)
//   layer 3: 28x28 outputs, 256 -> 256 channels, 4 cores  (P_V=2, P_H=2)
//   layer 4: 14x14 outputs, 256 -> 512 channels, 8 cores  (P_V=2, P_H=4)
// Layers 1 and 2 need no synchronisation (one core per horizontal group);
// layers 3 and 4 run with the sequential, linear and cyclic schemes, and
// their linear CALL counts (P_H * O * (P_V - 1) = 1568 and 784) are checked
// by the harness. Layer 5 (16 cores) is the separate full-size test. Every
// output value of every layer is compared with a reference model; the
// result is the sum over the four layers.
module tb_mobilenet_layers;
  tb_layer_sys #(.NAME("layer1"), .O_V(3136), .K_Z(128), .K_NUM(128), .SCHEMES(3'b010)) l1 ();
  tb_layer_sys #(.NAME("layer2"), .O_V(784),  .K_Z(128), .K_NUM(256), .SCHEMES(3'b010)) l2 ();
  tb_layer_sys #(.NAME("layer3"), .O_V(784),  .K_Z(256), .K_NUM(256), .SCHEMES(3'b111)) l3 ();
  tb_layer_sys #(.NAME("layer4"), .O_V(196),  .K_Z(256), .K_NUM(512), .SCHEMES(3'b111)) l4 ();

  int checks, failures;

  initial begin
    // watchdog: each harness also stops itself after 8M of its cycles
    #100_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", l1.h.checks + l2.h.checks + l3.h.checks + l4.h.checks,
             1 + l1.h.failures + l2.h.failures + l3.h.failures + l4.h.failures);
    $finish;
  end

  initial begin
    wait (l1.h.finished && l2.h.finished && l3.h.finished && l4.h.finished);
    checks   = l1.h.checks + l2.h.checks + l3.h.checks + l4.h.checks;
    failures = l1.h.failures + l2.h.failures + l3.h.failures + l4.h.failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
