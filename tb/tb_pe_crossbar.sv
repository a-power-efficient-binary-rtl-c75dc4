// tb_pe_crossbar: self-checking test of a C x K PE crossbar.
// Loads random weights column by column, then applies random spike vectors and
// partial sums and compares each column output with
// psum_in[k] + sum_c spike[c] * (w[k][c] ? +1 : -1), computed in the testbench.
module tb_pe_crossbar;
  localparam int unsigned C = 5, K = 4, PSUM_W = 7;
  logic clk = 0;
  logic [K-1:0] w_load;
  logic [C-1:0] w_in, spike;
  logic signed [PSUM_W-1:0] psum_in [K], psum_out [K];
  logic [C-1:0] wt [K];
  int checks = 0, failures = 0;

  pe_crossbar #(.C(C), .K(K), .PSUM_W(PSUM_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w_load = '0; w_in = '0; spike = '0;
    for (int k = 0; k < K; k++) psum_in[k] = '0;
    for (int rep = 0; rep < 4; rep++) begin
      for (int k = 0; k < K; k++) begin
        wt[k] = C'($urandom);
        @(negedge clk); w_load = '0; w_load[k] = 1'b1; w_in = wt[k];
      end
      @(negedge clk); w_load = '0; w_in = '1;
      for (int n = 0; n < 50; n++) begin
        spike = C'($urandom);
        for (int k = 0; k < K; k++) psum_in[k] = PSUM_W'($urandom_range(0, 40) - 20);
        #1;
        for (int k = 0; k < K; k++) begin
          int e;
          e = int'(psum_in[k]);
          for (int c = 0; c < C; c++) if (spike[c]) e += wt[k][c] ? 1 : -1;
          checks++;
          if (int'(psum_out[k]) != e) begin
            failures++;
            $display("FAIL k=%0d out=%0d exp=%0d", k, psum_out[k], e);
          end
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
