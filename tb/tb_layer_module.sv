// tb_layer_module: end-to-end test of one layer module against the reference model.
// A small non-square layer (C=2, H=6, W=5, 3x3 kernels, K=3, 8-bit potentials) is
// loaded with random weights, thresholds and biases (one kernel with a large
// negative bias, so its potentials saturate), then runs two inferences of 4 time
// steps each, the input stream having random gaps. Every output vector is compared
// with the model, in order, and must appear exactly 3 cycles after the input
// vector that completed its window. out_last must mark each step's last position.
module tb_layer_module;
  import snn_ref_pkg::*;
  localparam int unsigned C = 2, H = 6, W = 5, I = 3, J = 3, K = 3, VW = 8;
  localparam int unsigned X = H - I + 1, Y = W - J + 1;
  localparam int unsigned WA_W = $clog2(I * J * K), K_W = $clog2(K);
  localparam int STEPS = 4;

  logic clk = 0, rst_n, start;
  logic in_valid;
  logic [C-1:0] in_spike;
  logic out_valid, out_last, out_sat;
  logic [K-1:0] out_spike;
  logic [C-1:0] bypass_spike;
  logic wt_we, cfg_we, cfg_is_bias;
  logic [WA_W-1:0] wt_addr;
  logic [C-1:0] wt_data;
  logic [K_W-1:0] cfg_k;
  logic signed [VW-1:0] cfg_data;

  int checks = 0, failures = 0, cyc = 0;
  int n_out = 0, n_gaps = 0, n_sat_hw = 0;
  typedef struct { logic [K-1:0] spk; bit last; int due; } exp_t;
  exp_t expq [$];

  layer_module #(.C(C), .H(H), .W(W), .I(I), .J(J), .K(K), .VW(VW)) dut (.*);

  snn_layer_ref ref_l;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output monitor.
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      n_out++;
      if (out_sat) n_sat_hw++;
      checks++;
      if (expq.size() == 0) begin
        failures++; $display("FAIL unexpected output at cycle %0d", cyc);
      end else begin
        automatic exp_t e = expq.pop_front();
        if (out_spike != e.spk || out_last != e.last || cyc != e.due) begin
          failures++;
          $display("FAIL out %b/%b last %0d/%0d cycle %0d/%0d", out_spike, e.spk,
                   out_last, e.last, cyc, e.due);
        end
      end
    end
  end

  task automatic configure();
    for (int k = 0; k < K; k++)
      for (int i = 0; i < I; i++)
        for (int j = 0; j < J; j++) begin
          for (int c = 0; c < C; c++) ref_l.wt[ref_l.widx(k, c, i, j)] = 1'($urandom);
          @(negedge clk);
          wt_we = 1; wt_addr = WA_W'((i * J + j) * K + k); wt_data = C'(ref_l.wt_word(k, i, j));
        end
    @(negedge clk); wt_we = 0;
    for (int k = 0; k < K; k++) begin
      ref_l.th[k] = $urandom_range(1, 4);
      ref_l.bias[k] = (k == 2) ? -100 : int'($urandom_range(0, 3)) - 1;
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
          while ($urandom_range(0, 4) == 0) begin
            in_valid = 0; n_gaps++; @(negedge clk);
          end
          in_valid = 1;
          for (int c = 0; c < C; c++) in_spike[c] = s[(c * H + h) * W + w];
          if (h >= int'(I) - 1 && w >= int'(J) - 1) begin
            exp_t e;
            automatic int x = h - I + 1, y = w - J + 1;
            for (int k = 0; k < K; k++) e.spk[k] = o[(k * X + x) * Y + y];
            e.last = (h == int'(H) - 1 && w == int'(W) - 1);
            e.due = cyc + 3;   // three clock edges later
            expq.push_back(e);
          end
          @(negedge clk);
        end
    end
    in_valid = 0;
    repeat (8) @(negedge clk);
  endtask

  initial begin
    ref_l = new(C, H, W, I, J, K, VW);
    rst_n = 0; start = 0; in_valid = 0; in_spike = '0;
    wt_we = 0; wt_addr = '0; wt_data = '0;
    cfg_we = 0; cfg_is_bias = 0; cfg_k = '0; cfg_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    configure();
    inference();
    inference();   // second inference must start again from zero potentials
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d outputs missing", expq.size()); end
    checks++;
    if (n_out != 2 * STEPS * int'(X * Y)) begin failures++; $display("FAIL output count %0d", n_out); end
    $display("events: outputs=%0d spikes=%0d saturations(model)=%0d out_sat=%0d gaps=%0d",
             n_out, ref_l.n_spikes, ref_l.n_sat, n_sat_hw, n_gaps);
    checks++;
    if (ref_l.n_spikes == 0 || ref_l.n_sat == 0 || n_sat_hw == 0 || n_gaps == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
