// buffer_chain: the spike-vector delay line that feeds the PE array.
//
// Input vectors (C spikes, one per channel, of one pixel position) arrive in raster
// order, row by row, W per row. The chain has (I-1)*W + J buffers of C bits; on
// every edge where in_valid is high each buffer passes its vector to the next and
// buffer 0 takes in_spike. Buffer d thus holds the vector that entered d shifts
// ago. When the newest vector is pixel (h, w), pixel (h-(I-1)+i, w-(J-1)+j) sits in
// buffer (I-1-i)*W + (J-1-j); these I*J buffers are the taps window[i][j] feeding
// sub-array (i,j) of the PE array. The remaining buffers are the delay-only ones
// between kernel rows (W-J of them per gap). The last buffer is brought out as
// bypass_spike, the path a skip connection can take around the layer.
//
// Timing: window and bypass_spike are registered outputs. Reset (active low,
// synchronous) clears the chain; this is this design's choice.
module buffer_chain #(
  parameter int unsigned C = 16,
  parameter int unsigned W = 14,
  parameter int unsigned I = 3,
  parameter int unsigned J = 3,
  localparam int unsigned LEN = (I - 1) * W + J
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [C-1:0] in_spike,
  output logic [C-1:0] window [I][J],
  output logic [C-1:0] bypass_spike
);

  logic [C-1:0] buf_q [LEN];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int d = 0; d < LEN; d++) buf_q[d] <= '0;
    end else if (in_valid) begin
      buf_q[0] <= in_spike;
      for (int d = 1; d < LEN; d++) buf_q[d] <= buf_q[d-1];
    end
  end

  for (genvar i = 0; i < I; i++) begin : g_i
    for (genvar j = 0; j < J; j++) begin : g_j
      assign window[i][j] = buf_q[(I - 1 - i) * W + (J - 1 - j)];
    end
  end

  assign bypass_spike = buf_q[LEN-1];

  initial begin
    assert (W >= J) else $error("buffer_chain: W must be at least J");
  end

endmodule
