// tb_neuron_block: self-checking test of the integrate-and-fire neurons.
// Drives random and extreme potentials, weight sums, thresholds and biases, with
// and without clear, and compares spike, saturated and vmem_out with an integer
// model: v = clamp(V + wsum + bias), fire = v >= th, V' = fire ? clamp(v - th) : v.
// Counts how often each case (fire, no fire, saturation, clear) occurred.
module tb_neuron_block;
  localparam int unsigned K = 4, PSUM_W = 6, VW = 8;
  localparam int VMAX = 127, VMIN = -128;
  logic clear;
  logic signed [PSUM_W-1:0] wsum [K];
  logic signed [VW-1:0] vmem_in [K], threshold [K], bias [K], vmem_out [K];
  logic [K-1:0] spike, saturated;
  int checks = 0, failures = 0;
  int n_fire = 0, n_quiet = 0, n_sat = 0, n_clear = 0;

  neuron_block #(.K(K), .PSUM_W(PSUM_W), .VW(VW)) dut (.*);

  function automatic int clamp(input int a);
    return a > VMAX ? VMAX : (a < VMIN ? VMIN : a);
  endfunction

  function automatic int pick(input int lo, input int hi);
    case ($urandom_range(0, 5))
      0: return lo;
      1: return hi;
      default: return $urandom_range(0, hi - lo) + lo;
    endcase
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      clear = ($urandom_range(0, 7) == 0);
      for (int k = 0; k < K; k++) begin
        vmem_in[k]   = VW'(pick(VMIN, VMAX));
        wsum[k]      = PSUM_W'(pick(-32, 31));
        threshold[k] = VW'((n % 3 == 0) ? pick(VMIN, VMAX) : pick(1, 40));
        bias[k]      = VW'((n % 2 == 0) ? pick(VMIN, VMAX) : pick(-4, 4));
      end
      #1;
      if (clear) n_clear++;
      for (int k = 0; k < K; k++) begin
        int acc, v, ev;
        bit ef, es;
        acc = (clear ? 0 : int'(vmem_in[k])) + int'(wsum[k]) + int'(bias[k]);
        v  = clamp(acc);
        es = (acc != v);
        ef = (v >= int'(threshold[k]));
        ev = ef ? clamp(v - int'(threshold[k])) : v;
        if (ef) n_fire++; else n_quiet++;
        if (es) n_sat++;
        checks++;
        if (spike[k] != ef || saturated[k] != es || int'(vmem_out[k]) != ev) begin
          failures++;
          $display("FAIL V=%0d ws=%0d b=%0d th=%0d clr=%0d: spike %0d/%0d v %0d/%0d",
                   vmem_in[k], wsum[k], bias[k], threshold[k], clear, spike[k], ef,
                   vmem_out[k], ev);
        end
      end
      #1;
    end
    $display("cases: fire=%0d quiet=%0d saturated=%0d clear=%0d", n_fire, n_quiet, n_sat, n_clear);
    checks++;
    if (n_fire == 0 || n_quiet == 0 || n_sat == 0 || n_clear == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
