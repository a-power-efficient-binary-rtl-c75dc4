// tb_pe: self-checking test of the binary-weight PE.
// Loads each weight value, then drives every spike value with random partial sums
// and compares psum_out with psum_in + (spike ? weight : 0), weight in {-1,+1}.
// Also checks that the weight register holds its value while w_load is low.
module tb_pe;
  localparam int unsigned PSUM_W = 9;
  logic clk = 0;
  logic w_load, w_in, spike;
  logic signed [PSUM_W-1:0] psum_in, psum_out;
  int checks = 0, failures = 0;

  pe #(.PSUM_W(PSUM_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w_load = 0; w_in = 0; spike = 0; psum_in = 0;
    for (int w = 0; w < 2; w++) begin
      @(negedge clk); w_load = 1; w_in = 1'(w);
      @(negedge clk); w_load = 0; w_in = ~1'(w);   // must not be taken
      for (int n = 0; n < 100; n++) begin
        int p, expv;
        p = $urandom_range(0, 200) - 100;
        spike = 1'($urandom_range(0, 1));
        psum_in = PSUM_W'(p);
        #1;
        expv = p + (spike ? (w == 1 ? 1 : -1) : 0);
        checks++;
        if (int'(psum_out) != expv) begin
          failures++;
          $display("FAIL w=%0d s=%0d in=%0d out=%0d exp=%0d", w, spike, p, psum_out, expv);
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
