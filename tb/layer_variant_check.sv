// layer_variant_check: testbench component that drives one layer_module of a
// given shape against the reference model and reports its check counts.
//
// It loads random weights, thresholds and biases, runs an inference of STEPS time
// steps with random input gaps, then reloads all weights as +1 (for a depthwise
// layer this is average pooling) and runs a second inference. Every output vector is
// compared with snn_ref_pkg in order and must leave 3 cycles after the input vector
// that completed its window. done rises when it has finished.
module layer_variant_check
  import snn_ref_pkg::*;
#(
  parameter int unsigned C = 4,
  parameter int unsigned H = 5,
  parameter int unsigned W = 6,
  parameter int unsigned I = 3,
  parameter int unsigned J = 3,
  parameter int unsigned K = 4,
  parameter bit          DEPTHWISE = 1'b0
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures,
  output int   spikes
);
  localparam int unsigned VW = 8, X = H - I + 1, Y = W - J + 1;
  localparam int unsigned WA_W = (I * J * K > 1) ? $clog2(I * J * K) : 1;
  localparam int unsigned K_W = (K > 1) ? $clog2(K) : 1;
  localparam int STEPS = 3;

  logic rst_n, start, in_valid, out_valid, out_last, out_sat;
  logic [C-1:0] in_spike, bypass_spike, wt_data;
  logic [K-1:0] out_spike;
  logic wt_we, cfg_we, cfg_is_bias;
  logic [WA_W-1:0] wt_addr;
  logic [K_W-1:0] cfg_k;
  logic signed [VW-1:0] cfg_data;
  int cyc = 0;
  typedef struct { logic [K-1:0] spk; int due; } exp_t;
  exp_t expq [$];
  snn_layer_ref ref_l;

  layer_module #(.C(C), .H(H), .W(W), .I(I), .J(J), .K(K), .VW(VW), .DEPTHWISE(DEPTHWISE)) dut (.*);

  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (expq.size() == 0) begin
        failures++; $display("FAIL unexpected output");
      end else begin
        automatic exp_t e = expq.pop_front();
        if (out_spike != e.spk || cyc != e.due) begin
          failures++;
          $display("FAIL %s out %b exp %b cycle %0d/%0d", DEPTHWISE ? "dw" : "conv",
                   out_spike, e.spk, cyc, e.due);
        end
      end
    end
  end

  task automatic load(input bit all_ones);
    for (int k = 0; k < int'(K); k++)
      for (int i = 0; i < int'(I); i++)
        for (int j = 0; j < int'(J); j++) begin
          for (int c = 0; c < int'(C); c++)
            ref_l.wt[ref_l.widx(k, c, i, j)] = all_ones ? 1'b1 : 1'($urandom);
          @(negedge clk);
          wt_we = 1; wt_addr = WA_W'((i * J + j) * K + k); wt_data = C'(ref_l.wt_word(k, i, j));
        end
    @(negedge clk); wt_we = 0;
    for (int k = 0; k < int'(K); k++) begin
      ref_l.th[k] = all_ones ? int'(I * J) / 2 : $urandom_range(1, 3);
      ref_l.bias[k] = all_ones ? 0 : int'($urandom_range(0, 2)) - 1;
      cfg_we = 1; cfg_is_bias = 0; cfg_k = K_W'(k); cfg_data = VW'(ref_l.th[k]);
      @(negedge clk);
      cfg_is_bias = 1; cfg_data = VW'(ref_l.bias[k]);
      @(negedge clk);
    end
    cfg_we = 0;
  endtask

  task automatic inference();
    bit s [], o [];
    start = 1; @(negedge clk); start = 0;
    for (int t = 0; t < STEPS; t++) begin
      s = new[C * H * W];
      foreach (s[q]) s[q] = 1'($urandom);
      ref_l.step(s, o, t == 0);
      for (int h = 0; h < int'(H); h++)
        for (int w = 0; w < int'(W); w++) begin
          while ($urandom_range(0, 4) == 0) begin in_valid = 0; @(negedge clk); end
          in_valid = 1;
          for (int c = 0; c < int'(C); c++) in_spike[c] = s[(c * H + h) * W + w];
          if (h >= int'(I) - 1 && w >= int'(J) - 1) begin
            exp_t e;
            for (int k = 0; k < int'(K); k++)
              e.spk[k] = o[(k * X + (h - I + 1)) * Y + (w - J + 1)];
            e.due = cyc + 3;
            expq.push_back(e);
          end
          @(negedge clk);
        end
    end
    in_valid = 0;
    repeat (6) @(negedge clk);
  endtask

  initial begin
    checks = 0; failures = 0; done = 0; spikes = 0;
    ref_l = new(C, H, W, I, J, K, VW);
    ref_l.dw = DEPTHWISE;
    rst_n = 0; start = 0; in_valid = 0; in_spike = '0;
    wt_we = 0; wt_addr = '0; wt_data = '0;
    cfg_we = 0; cfg_is_bias = 0; cfg_k = '0; cfg_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    load(1'b0);
    inference();
    load(1'b1);
    inference();
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL outputs missing"); end
    spikes = ref_l.n_spikes;
    done = 1;
  end
endmodule
