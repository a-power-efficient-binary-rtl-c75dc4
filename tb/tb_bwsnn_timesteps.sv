// tb_bwsnn_timesteps: the full-size network run for the three time-step counts of
// the MNIST latency table (37, 90 and 212 time steps per inference).
//
// Weights, thresholds and biases are random (trained MNIST weights are not
// available), inputs are random 16x16x3 spike maps streamed at the full rate of one
// vector per cycle. For each inference the test checks every Conv 5 output vector
// against the reference model and measures the latency from the first input vector
// to the last Conv 5 output: it must be T*256 + 15 cycles, which at a 100 MHz clock
// gives 0.0949, 0.2306 and 0.5429 ms, i.e. the table's 0.095, 0.231 and 0.543 ms
// once rounded to three decimals.
module tb_bwsnn_timesteps;
  import bwsnn_pkg::*;
  import snn_ref_pkg::*;
  localparam int LAT = 3 * NUM_LAYERS;
  localparam int NT = 3;
  localparam int T_STEPS [NT] = '{37, 90, 212};
  localparam int PAPER_US [NT] = '{95, 231, 543};   // latency in microseconds

  logic clk = 0, rst_n, start, in_valid;
  logic [L_C[0]-1:0] in_spike;
  logic out_valid, out_last, tap4_valid, sat_flag;
  logic [L_K[4]-1:0] out_spike;
  logic [L_K[3]-1:0] tap4_spike;
  logic wt_we, cfg_we, cfg_is_bias;
  logic [CFG_LAYER_W-1:0] wt_layer, cfg_layer;
  logic [WT_ADDR_W-1:0] wt_addr;
  logic [WT_DATA_W-1:0] wt_data;
  logic [CFG_K_W-1:0] cfg_k;
  logic signed [V_W-1:0] cfg_data;

  bwsnn_top dut (.*);

  snn_layer_ref ref_l [NUM_LAYERS];
  logic [15:0] exp5 [$];
  int checks = 0, failures = 0, cyc = 0, last_out_cyc = 0, n_spk5 = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (exp5.size() == 0) begin
        failures++; $display("FAIL unexpected output");
      end else begin
        automatic logic [15:0] e = exp5.pop_front();
        if (out_spike != e[L_K[4]-1:0]) begin failures++; $display("FAIL conv5 at %0d", cyc); end
      end
      if (out_last) last_out_cyc = cyc;
      n_spk5 += $countones(out_spike);
    end
  end

  task automatic configure();
    for (int l = 0; l < int'(NUM_LAYERS); l++) begin
      snn_layer_ref r = ref_l[l];
      for (int k = 0; k < r.K; k++)
        for (int i = 0; i < r.I; i++)
          for (int j = 0; j < r.J; j++) begin
            for (int c = 0; c < r.C; c++) r.wt[r.widx(k, c, i, j)] = 1'($urandom);
            @(negedge clk);
            wt_we = 1; wt_layer = CFG_LAYER_W'(l);
            wt_addr = WT_ADDR_W'((i * r.J + j) * r.K + k); wt_data = r.wt_word(k, i, j);
          end
      @(negedge clk); wt_we = 0;
      for (int k = 0; k < r.K; k++) begin
        r.th[k]   = (l == 0) ? $urandom_range(2, 5) : $urandom_range(3, 10);
        r.bias[k] = $urandom_range(0, 1);
        cfg_we = 1; cfg_layer = CFG_LAYER_W'(l); cfg_k = CFG_K_W'(k);
        cfg_is_bias = 0; cfg_data = V_W'(r.th[k]);
        @(negedge clk);
        cfg_is_bias = 1; cfg_data = V_W'(r.bias[k]);
        @(negedge clk);
      end
      cfg_we = 0;
    end
  endtask

  task automatic inference(input int steps, input int paper_us);
    bit s [NUM_LAYERS+1][];
    int first_cyc, lat;
    start = 1; @(negedge clk); start = 0;
    first_cyc = cyc;
    for (int t = 0; t < steps; t++) begin
      s[0] = new[L_C[0] * L_H[0] * L_H[0]];
      foreach (s[0][q]) s[0][q] = 1'($urandom);
      for (int l = 0; l < int'(NUM_LAYERS); l++) ref_l[l].step(s[l], s[l+1], t == 0);
      for (int x = 0; x < 6; x++)
        for (int y = 0; y < 6; y++) begin
          logic [15:0] v = '0;
          for (int k = 0; k < int'(L_K[4]); k++) v[k] = s[5][(k * 6 + x) * 6 + y];
          exp5.push_back(v);
        end
      for (int p = 0; p < int'(L_H[0] * L_H[0]); p++) begin
        in_valid = 1;
        for (int c = 0; c < int'(L_C[0]); c++) in_spike[c] = s[0][c * L_H[0] * L_H[0] + p];
        @(negedge clk);
      end
    end
    in_valid = 0;
    repeat (LAT + 4) @(negedge clk);
    // Cycles from the one in which the first vector is presented to the one in
    // which the last output is valid, both included.
    lat = last_out_cyc - first_cyc + 1;
    $display("T=%0d: latency %0d cycles = %0.4f ms at 100 MHz (table: 0.%03d ms)",
             steps, lat, lat * 1.0e-5, paper_us);
    checks++;
    if (lat != steps * 256 + LAT) begin failures++; $display("FAIL latency"); end
    checks++;
    if ((lat + 50) / 100 != paper_us) begin failures++; $display("FAIL differs from table"); end
  endtask

  initial begin
    for (int l = 0; l < int'(NUM_LAYERS); l++)
      ref_l[l] = new(L_C[l], L_H[l], L_H[l], L_I[l], L_I[l], L_K[l], V_W);
    rst_n = 0; start = 0; in_valid = 0; in_spike = '0;
    wt_we = 0; wt_layer = '0; wt_addr = '0; wt_data = '0;
    cfg_we = 0; cfg_layer = '0; cfg_is_bias = 0; cfg_k = '0; cfg_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    configure();
    for (int n = 0; n < NT; n++) inference(T_STEPS[n], PAPER_US[n]);
    checks++;
    if (exp5.size() != 0 || n_spk5 == 0) begin failures++; $display("FAIL outputs missing or no spikes"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
