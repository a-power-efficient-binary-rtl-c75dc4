// tb_local_buffer: self-checking test of the neuron-state memory.
// Writes random potential words to every address, reads them back in random order
// (checking the one-cycle read latency), and writes and checks thresholds and
// biases, including their reset values and that out-of-range kernel indices are
// ignored.
module tb_local_buffer;
  localparam int unsigned K = 3, DEPTH = 10, VW = 8;
  localparam int unsigned A_W = $clog2(DEPTH), K_W = $clog2(K);
  logic clk = 0, rst_n;
  logic rd_en, wr_en, cfg_we, cfg_is_bias;
  logic [A_W-1:0] rd_addr, wr_addr;
  logic [K_W-1:0] cfg_k;
  logic signed [VW-1:0] rd_vmem [K], wr_vmem [K], threshold [K], bias [K], cfg_data;
  logic signed [VW-1:0] model [DEPTH][K];
  logic signed [VW-1:0] th_m [K], bi_m [K];
  int checks = 0, failures = 0;

  local_buffer #(.K(K), .DEPTH(DEPTH), .VW(VW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; rd_en = 0; wr_en = 0; cfg_we = 0; cfg_is_bias = 0; cfg_k = '0;
    cfg_data = '0; rd_addr = '0; wr_addr = '0;
    for (int k = 0; k < K; k++) wr_vmem[k] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < K; k++) begin
      th_m[k] = VW'(1); bi_m[k] = '0;
      checks++;
      if (threshold[k] != 1 || bias[k] != 0) begin failures++; $display("FAIL reset"); end
    end
    for (int rep = 0; rep < 3; rep++) begin
      for (int a = 0; a < int'(DEPTH); a++) begin
        wr_en = 1; wr_addr = A_W'(a);
        for (int k = 0; k < K; k++) begin
          wr_vmem[k] = VW'($urandom); model[a][k] = wr_vmem[k];
        end
        @(negedge clk);
      end
      wr_en = 0;
      for (int n = 0; n < 30; n++) begin
        automatic int a = $urandom_range(0, DEPTH - 1);
        rd_en = 1; rd_addr = A_W'(a);
        @(negedge clk);
        rd_en = 0; rd_addr = A_W'($urandom_range(0, DEPTH - 1));
        for (int k = 0; k < K; k++) begin
          checks++;
          if (rd_vmem[k] != model[a][k]) begin
            failures++; $display("FAIL read a=%0d k=%0d %0d exp %0d", a, k, rd_vmem[k], model[a][k]);
          end
        end
        @(negedge clk);   // output must hold while rd_en is low
        for (int k = 0; k < K; k++) begin
          checks++;
          if (rd_vmem[k] != model[a][k]) begin failures++; $display("FAIL hold"); end
        end
      end
    end
    for (int n = 0; n < 40; n++) begin
      automatic int k = $urandom_range(0, 3);
      cfg_we = 1; cfg_is_bias = 1'($urandom_range(0, 1)); cfg_k = K_W'(k);
      cfg_data = VW'($urandom);
      if (k < int'(K)) begin
        if (cfg_is_bias) bi_m[k] = cfg_data; else th_m[k] = cfg_data;
      end
      @(negedge clk);
      cfg_we = 0;
      for (int q = 0; q < K; q++) begin
        checks++;
        if (threshold[q] != th_m[q] || bias[q] != bi_m[q]) begin
          failures++; $display("FAIL cfg k=%0d", q);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
