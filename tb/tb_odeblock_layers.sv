// tb_odeblock_layers: the other two ODEBlocks the paper maps to the FPGA,
// built from the same RTL with their own sizes and 16 lanes: layer1 (16
// channels, 32x32) and layer2_2 (32 channels, 16x16), one Euler step each,
// both checked end to end against the reference model. Together with the
// full-size layer3_2 test this covers all three offload targets.
module tb_odeblock_layers;
  logic f1, f2;
  int c1, c2, e1, e2;
  int checks, failures;

  odeblock_layer_run #(.C(16), .H(32), .W(32), .P(16), .M(1)) u_layer1 (
    .finished(f1), .checks(c1), .failures(e1));
  odeblock_layer_run #(.C(32), .H(16), .W(16), .P(16), .M(1)) u_layer2_2 (
    .finished(f2), .checks(c2), .failures(e2));

  initial begin
    #1;   // let both runs clear their finished flags first
    wait (f1 && f2);
    checks = c1 + c2; failures = e1 + e2;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #20ms;
    $display("TB_RESULT checks=%0d failures=%0d", c1 + c2, e1 + e2 + 1);
    $finish;
  end
endmodule
