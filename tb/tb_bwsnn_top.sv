// tb_bwsnn_top: end-to-end test of the 5-layer BW-SNN at its full size.
//
// The network (default parameters) is loaded through the configuration ports with
// random +-1 weights and random thresholds and biases; kernel 0 of Conv 2 gets a
// large negative bias so that its potentials saturate. Two inferences of STEPS time
// steps are run with random 16x16x3 input spike maps: the first with random gaps
// in the input stream, the second at the full rate of one vector per cycle. A chain
// of five reference layers computes the expected spike maps; the Conv 5 stream
// (out_*) and the Conv 4 stream (tap4_*) are compared vector by vector in raster
// order. Timing checks: the last Conv 5 output of every time step leaves exactly
// 15 cycles (3 per layer) after the last input vector of that step, and at full
// rate one time step takes 256 cycles (one per input vector). The test counts
// the mechanisms it exercised (input gaps, spikes in every layer, saturation,
// restart from zero potentials) and fails if one never occurred.
module tb_bwsnn_top;
  import bwsnn_pkg::*;
  import snn_ref_pkg::*;
  localparam int STEPS = 4;
  localparam int LAT   = 3 * NUM_LAYERS;   // pipeline latency, cycles

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
  logic [15:0] exp5 [$], exp4 [$];
  int last_due [$];
  int checks = 0, failures = 0, cyc = 0;
  int n_gaps = 0, n_sat_hw = 0, n_out5 = 0, n_out4 = 0, n_last = 0;
  int step_start [$];

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output monitors.
  always @(negedge clk) begin
    if (rst_n && sat_flag) n_sat_hw++;
    if (rst_n && out_valid) begin
      n_out5++;
      checks++;
      if (exp5.size() == 0) begin
        failures++; $display("FAIL unexpected Conv 5 output");
      end else begin
        automatic logic [15:0] e = exp5.pop_front();
        if (out_spike != e[L_K[4]-1:0]) begin
          failures++; $display("FAIL conv5 %b exp %b at cycle %0d", out_spike, e[L_K[4]-1:0], cyc);
        end
      end
      if (out_last) begin
        n_last++;
        checks++;
        if (last_due.size() == 0 || cyc != last_due.pop_front()) begin
          failures++; $display("FAIL out_last timing at cycle %0d", cyc);
        end
      end
    end
    if (rst_n && tap4_valid) begin
      n_out4++;
      checks++;
      if (exp4.size() == 0) begin
        failures++; $display("FAIL unexpected Conv 4 output");
      end else begin
        automatic logic [15:0] e = exp4.pop_front();
        if (tap4_spike != e) begin
          failures++; $display("FAIL conv4 %h exp %h", tap4_spike, e);
        end
      end
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
      wt_layer = CFG_LAYER_W'((l + 2) % 5);   // idle weight port must not select the layer
      for (int k = 0; k < r.K; k++) begin
        r.th[k]   = (l == 0) ? $urandom_range(2, 5) : $urandom_range(3, 10);
        r.bias[k] = (l == 1 && k == 0) ? -2000 : $urandom_range(0, 2);
        cfg_we = 1; cfg_layer = CFG_LAYER_W'(l); cfg_k = CFG_K_W'(k);
        cfg_is_bias = 0; cfg_data = V_W'(r.th[k]);
        @(negedge clk);
        cfg_is_bias = 1; cfg_data = V_W'(r.bias[k]);
        @(negedge clk);
      end
      cfg_we = 0;
    end
  endtask

  task automatic inference(input bit gaps);
    bit s [NUM_LAYERS+1][];
    start = 1; @(negedge clk); start = 0;
    for (int t = 0; t < STEPS; t++) begin
      s[0] = new[L_C[0] * L_H[0] * L_H[0]];
      foreach (s[0][q]) s[0][q] = 1'($urandom);
      for (int l = 0; l < int'(NUM_LAYERS); l++) ref_l[l].step(s[l], s[l+1], t == 0);
      // Expected streams, raster order.
      for (int l = 3; l < 5; l++) begin
        int xy = ref_l[l].X;
        for (int x = 0; x < xy; x++)
          for (int y = 0; y < xy; y++) begin
            logic [15:0] v = '0;
            for (int k = 0; k < ref_l[l].K; k++) v[k] = s[l+1][(k * xy + x) * xy + y];
            if (l == 3) exp4.push_back(v); else exp5.push_back(v);
          end
      end
      step_start.push_back(cyc);
      for (int h = 0; h < int'(L_H[0]); h++)
        for (int w = 0; w < int'(L_H[0]); w++) begin
          while (gaps && $urandom_range(0, 5) == 0) begin
            in_valid = 0; n_gaps++; @(negedge clk);
          end
          in_valid = 1;
          for (int c = 0; c < int'(L_C[0]); c++) in_spike[c] = s[0][(c * L_H[0] + h) * L_H[0] + w];
          if (h == int'(L_H[0]) - 1 && w == int'(L_H[0]) - 1) last_due.push_back(cyc + LAT);
          @(negedge clk);
        end
      if (!gaps) begin
        checks++;
        if (cyc - step_start[$] != int'(L_H[0] * L_H[0])) begin
          failures++; $display("FAIL time step took %0d cycles", cyc - step_start[$]);
        end
      end
    end
    in_valid = 0;
    repeat (LAT + 4) @(negedge clk);
  endtask

  initial begin
    int spikes_per_layer [NUM_LAYERS];
    for (int l = 0; l < int'(NUM_LAYERS); l++)
      ref_l[l] = new(L_C[l], L_H[l], L_H[l], L_I[l], L_I[l], L_K[l], V_W);
    rst_n = 0; start = 0; in_valid = 0; in_spike = '0;
    wt_we = 0; wt_layer = '0; wt_addr = '0; wt_data = '0;
    cfg_we = 0; cfg_layer = '0; cfg_is_bias = 0; cfg_k = '0; cfg_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    configure();
    inference(1'b1);
    inference(1'b0);   // restart: potentials must start again from zero
    checks++;
    if (exp5.size() != 0 || exp4.size() != 0) begin
      failures++; $display("FAIL missing outputs: %0d conv5, %0d conv4", exp5.size(), exp4.size());
    end
    checks++;
    if (n_out5 != 2 * STEPS * 36 || n_out4 != 2 * STEPS * 64 || n_last != 2 * STEPS) begin
      failures++; $display("FAIL counts conv5=%0d conv4=%0d last=%0d", n_out5, n_out4, n_last);
    end
    for (int l = 0; l < int'(NUM_LAYERS); l++) spikes_per_layer[l] = ref_l[l].n_spikes;
    $display("events: input gaps=%0d saturation cycles=%0d time steps=%0d", n_gaps, n_sat_hw, n_last);
    $display("spikes per layer: %0d %0d %0d %0d %0d", spikes_per_layer[0], spikes_per_layer[1],
             spikes_per_layer[2], spikes_per_layer[3], spikes_per_layer[4]);
    checks++;
    if (n_gaps == 0 || n_sat_hw == 0) begin failures++; $display("FAIL mechanism not exercised"); end
    for (int l = 0; l < int'(NUM_LAYERS); l++) begin
      checks++;
      if (spikes_per_layer[l] == 0) begin failures++; $display("FAIL no spikes in layer %0d", l + 1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
