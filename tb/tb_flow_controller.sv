// tb_flow_controller: self-checking test of the flow controller.
// Streams 3 frames of H x W vectors with random gaps, then restarts with start and
// streams 2 more. A reference raster counter in the testbench predicts, for every
// accepted vector, whether its window is valid (row >= I-1, column >= J-1), the
// output address (row-I+1)*Y + (column-J+1), the first-time-step flag and the
// end-of-frame flag; the registered outputs are compared one edge later. Counts
// the valid windows per frame (must be X*Y).
module tb_flow_controller;
  localparam int unsigned H = 5, W = 6, I = 3, J = 2;
  localparam int unsigned X = H - I + 1, Y = W - J + 1;
  localparam int unsigned A_W = $clog2(X * Y);
  logic clk = 0, rst_n, start, in_valid;
  logic win_valid, win_first, win_last;
  logic [A_W-1:0] win_addr;
  int checks = 0, failures = 0;

  flow_controller #(.H(H), .W(W), .I(I), .J(J)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_frames(input int frames);
    int valid_count;
    for (int f = 0; f < frames; f++) begin
      valid_count = 0;
      for (int r = 0; r < int'(H); r++)
        for (int c = 0; c < int'(W); c++) begin
          bit ev;
          while ($urandom_range(0, 3) == 0) begin   // gap
            in_valid = 0;
            @(negedge clk);
            checks++;
            if (win_valid || win_last) begin failures++; $display("FAIL pulse in gap"); end
          end
          in_valid = 1;
          @(negedge clk);
          in_valid = 0;
          ev = (r >= int'(I) - 1) && (c >= int'(J) - 1);
          checks++;
          if (win_valid != ev) begin
            failures++; $display("FAIL valid f=%0d r=%0d c=%0d", f, r, c);
          end
          checks++;
          if (win_last != (r == int'(H) - 1 && c == int'(W) - 1)) begin
            failures++; $display("FAIL last r=%0d c=%0d", r, c);
          end
          if (ev) begin
            valid_count++;
            checks++;
            if (int'(win_addr) != (r - int'(I) + 1) * int'(Y) + (c - int'(J) + 1)) begin
              failures++; $display("FAIL addr r=%0d c=%0d got %0d", r, c, win_addr);
            end
            checks++;
            if (win_first != (f == 0)) begin failures++; $display("FAIL first f=%0d", f); end
          end
        end
      checks++;
      if (valid_count != int'(X * Y)) begin failures++; $display("FAIL count %0d", valid_count); end
    end
  endtask

  initial begin
    rst_n = 0; start = 0; in_valid = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_frames(3);
    // A partial frame, then a restart in the middle of it.
    in_valid = 1;
    repeat (7) @(negedge clk);
    in_valid = 0; start = 1;
    @(negedge clk);
    start = 0;
    run_frames(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
