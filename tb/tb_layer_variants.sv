// tb_layer_variants: the layer-module variants of the architecture.
// Runs, against the reference model, (a) a depthwise layer (C = K = 4, 3x3 kernels
// mapped onto the crossbar diagonals), first with random weights and then with all
// weights +1, which is 3x3 average pooling followed by the neuron; and (b) a
// fully-connected layer, a 1x1 kernel with C = 5 inputs and K = 3 outputs per
// position. Both must produce spikes.
module tb_layer_variants;
  logic clk = 0;
  logic done_dw, done_fc;
  int checks_dw, failures_dw, spikes_dw, checks_fc, failures_fc, spikes_fc;
  int checks, failures;

  always #5 clk = ~clk;

  layer_variant_check #(.C(4), .H(5), .W(6), .I(3), .J(3), .K(4), .DEPTHWISE(1'b1)) u_dw (
    .clk, .done(done_dw), .checks(checks_dw), .failures(failures_dw), .spikes(spikes_dw));
  layer_variant_check #(.C(5), .H(4), .W(3), .I(1), .J(1), .K(3), .DEPTHWISE(1'b0)) u_fc (
    .clk, .done(done_fc), .checks(checks_fc), .failures(failures_fc), .spikes(spikes_fc));

  initial begin
    fork
      begin
        wait (done_dw && done_fc);
        checks = checks_dw + checks_fc + 2;
        failures = failures_dw + failures_fc;
        if (spikes_dw == 0) failures++;
        if (spikes_fc == 0) failures++;
        $display("depthwise: %0d checks, %0d spikes; fully-connected: %0d checks, %0d spikes",
                 checks_dw, spikes_dw, checks_fc, spikes_fc);
      end
      begin
        repeat (20000) @(posedge clk);
        checks = checks_dw + checks_fc;
        failures = failures_dw + failures_fc + 1;
        $display("FAIL watchdog");
      end
    join_any
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
