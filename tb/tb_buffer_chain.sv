// tb_buffer_chain: self-checking test of the buffer chain.
// Streams random vectors with random gaps (in_valid low) and keeps the history of
// accepted vectors. After each shift, tap (i,j) must hold the vector accepted
// (I-1-i)*W+(J-1-j) shifts ago and bypass_spike the one (I-1)*W+J-1 shifts ago.
// Also checks that reset clears the chain.
module tb_buffer_chain;
  localparam int unsigned C = 4, W = 5, I = 3, J = 2;
  localparam int unsigned LEN = (I - 1) * W + J;
  logic clk = 0, rst_n;
  logic in_valid;
  logic [C-1:0] in_spike;
  logic [C-1:0] window [I][J];
  logic [C-1:0] bypass_spike;
  logic [C-1:0] hist [$];
  int checks = 0, failures = 0;

  buffer_chain #(.C(C), .W(W), .I(I), .J(J)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; in_valid = 0; in_spike = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < I; i++)
      for (int j = 0; j < J; j++) begin
        checks++;
        if (window[i][j] != '0) begin failures++; $display("FAIL not cleared"); end
      end
    for (int n = 0; n < 400; n++) begin
      in_valid = ($urandom_range(0, 3) != 0);
      in_spike = C'($urandom);
      if (in_valid) hist.push_front(in_spike);
      @(negedge clk);
      if (hist.size() >= LEN) begin
        for (int i = 0; i < I; i++)
          for (int j = 0; j < J; j++) begin
            checks++;
            if (window[i][j] != hist[(I - 1 - i) * W + (J - 1 - j)]) begin
              failures++;
              $display("FAIL tap (%0d,%0d) = %h exp %h", i, j, window[i][j],
                       hist[(I - 1 - i) * W + (J - 1 - j)]);
            end
          end
        checks++;
        if (bypass_spike != hist[LEN-1]) begin failures++; $display("FAIL bypass"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
