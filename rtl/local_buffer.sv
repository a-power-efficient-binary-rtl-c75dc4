// local_buffer: the neuron-state memory of one layer module.
//
// It holds the membrane potentials of the K x X x Y neurons of the layer, one
// memory word per output position with the K potentials of that position side by
// side, so the K neuron blocks read and write a whole word at a time. The memory
// has one read and one write port with a registered read (rd_vmem is valid the
// cycle after rd_en), the behaviour of the one-read one-write SRAM a chip would
// use; here it is an array. The potential memory is not reset: the layer ignores
// its contents during the first time step.
//
// It also holds the per-kernel neuron parameters, firing threshold and bias,
// written one at a time through cfg_*: cfg_is_bias selects bias (1) or threshold
// (0), cfg_k the kernel. Parameters reset to threshold 1 and bias 0. Keeping
// thresholds and biases per kernel (not per neuron) is this design's choice.
module local_buffer
  import bwsnn_pkg::*;
#(
  parameter int unsigned K     = 16,
  parameter int unsigned DEPTH = 144,
  parameter int unsigned VW    = V_W,
  localparam int unsigned A_W  = idx_width(DEPTH),
  localparam int unsigned K_W  = idx_width(K)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 rd_en,
  input  logic [A_W-1:0]       rd_addr,
  output logic signed [VW-1:0] rd_vmem   [K],
  input  logic                 wr_en,
  input  logic [A_W-1:0]       wr_addr,
  input  logic signed [VW-1:0] wr_vmem   [K],
  input  logic                 cfg_we,
  input  logic                 cfg_is_bias,
  input  logic [K_W-1:0]       cfg_k,
  input  logic signed [VW-1:0] cfg_data,
  output logic signed [VW-1:0] threshold [K],
  output logic signed [VW-1:0] bias      [K]
);

  logic [K*VW-1:0] mem [DEPTH];
  logic [K*VW-1:0] rd_q, wr_word;

  always_comb begin
    for (int k = 0; k < K; k++) wr_word[k*VW +: VW] = wr_vmem[k];
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_word;
    if (rd_en) rd_q <= mem[rd_addr];
  end

  always_comb begin
    for (int k = 0; k < K; k++) rd_vmem[k] = rd_q[k*VW +: VW];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < K; k++) begin
        threshold[k] <= VW'(1);
        bias[k]      <= '0;
      end
    end else if (cfg_we && int'(cfg_k) < K) begin
      if (cfg_is_bias) bias[cfg_k]      <= cfg_data;
      else             threshold[cfg_k] <= cfg_data;
    end
  end

  // A word is never read and written in the same cycle (no read-during-write).
  assert property (@(posedge clk) disable iff (!rst_n)
                   !(rd_en && wr_en && rd_addr == wr_addr));

endmodule
