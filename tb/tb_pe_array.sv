// tb_pe_array: self-checking test of the PE array with a non-square kernel.
// Writes random weights W[k][c][i][j] through the addressed weight port
// (address (i*J+j)*K+k), drives random I x J windows of C-bit spike vectors and
// compares wsum[k] with sum_{i,j,c} S[i][j][c] * W[k][c][i][j] computed here.
module tb_pe_array;
  localparam int unsigned C = 3, K = 4, I = 3, J = 2;
  localparam int unsigned PSUM_W = 6;                   // holds +-18
  localparam int unsigned WA_W = $clog2(I * J * K);
  logic clk = 0;
  logic wt_we;
  logic [WA_W-1:0] wt_addr;
  logic [C-1:0] wt_data;
  logic [C-1:0] window [I][J];
  logic signed [PSUM_W-1:0] wsum [K];
  logic [C-1:0] wt [K][I][J];
  int checks = 0, failures = 0;

  pe_array #(.C(C), .K(K), .I(I), .J(J), .PSUM_W(PSUM_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wt_we = 0; wt_addr = '0; wt_data = '0;
    for (int rep = 0; rep < 3; rep++) begin
      for (int i = 0; i < I; i++)
        for (int j = 0; j < J; j++)
          for (int k = 0; k < K; k++) begin
            wt[k][i][j] = C'($urandom);
            @(negedge clk);
            wt_we = 1; wt_addr = WA_W'((i * J + j) * K + k); wt_data = wt[k][i][j];
          end
      @(negedge clk); wt_we = 0;
      for (int n = 0; n < 60; n++) begin
        for (int i = 0; i < I; i++)
          for (int j = 0; j < J; j++) window[i][j] = (n == 0) ? '1 : C'($urandom);
        #1;
        for (int k = 0; k < K; k++) begin
          automatic int e = 0;
          for (int i = 0; i < I; i++)
            for (int j = 0; j < J; j++)
              for (int c = 0; c < C; c++)
                if (window[i][j][c]) e += wt[k][i][j][c] ? 1 : -1;
          checks++;
          if (int'(wsum[k]) != e) begin
            failures++;
            $display("FAIL k=%0d wsum=%0d exp=%0d", k, wsum[k], e);
          end
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
