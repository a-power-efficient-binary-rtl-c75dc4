// pe: one processing element of the binary-weight PE crossbar.
//
// A spike s is 0 or 1 and a weight is -1 or +1, so their product is -1, 0 or +1.
// The weight flip-flop holds 1 for +1 and 0 for -1; the product is the two-bit
// two's-complement value {~w & s, s}: an AND gate of the inverted weight and the
// spike gives the sign bit, the spike itself the low bit. The product is sign
// extended and added to the partial sum arriving from the PE below; the result
// goes to the PE above. This is the PE of the paper's crossbar figure: one weight
// flip-flop, one AND gate and one adder.
//
// Interface: w_load/w_in write the weight flip-flop on the clock edge; the adder
// path spike, psum_in -> psum_out is combinational. The load port is this design's
// own choice (the paper does not say how weights are written).
module pe #(
  parameter int unsigned PSUM_W = 9
) (
  input  logic                     clk,
  input  logic                     w_load,
  input  logic                     w_in,
  input  logic                     spike,
  input  logic signed [PSUM_W-1:0] psum_in,
  output logic signed [PSUM_W-1:0] psum_out
);

  logic       w_q;       // 1: weight +1, 0: weight -1
  logic [1:0] prod;      // {~w & s, s}: 00 = 0, 01 = +1, 11 = -1

  always_ff @(posedge clk) begin
    if (w_load) w_q <= w_in;
  end

  always_comb begin
    prod     = {~w_q & spike, spike};
    psum_out = psum_in + PSUM_W'(signed'(prod));
  end

endmodule
