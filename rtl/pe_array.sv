// pe_array: the PE array of one layer module, CJ rows by KI columns.
//
// The array is split into J x I crossbar sub-arrays of C x K PEs. Sub-array (i,j)
// holds the weights W[k][c][i][j] of all K kernels at kernel position (i,j) (the
// kernel of size I x J x C is reshaped to a JC x I matrix and each kernel takes
// the same column in every sub-array). Its input is the buffered spike vector
// window[i][j] = S[:, x+i, y+j]. The J sub-arrays of one kernel row i are chained,
// so their column sums add up; a row of adders then adds the I chain outputs,
// giving for every kernel k
//     wsum[k] = sum_{i,j,c} W[k][c][i][j] * S[c][x+i][y+j]
// i.e. one output position of the convolution. The adder path is combinational;
// the layer module registers wsum. No pipeline register is placed inside the array
// (the paper draws none in the sum path; that is this design's reading of it).
//
// DEPTHWISE (C == K) keeps only the diagonal PE of every crossbar column, the
// published mapping for depthwise convolution; average pooling is that mode with
// all weights +1, and a fully-connected layer is the case I = J = 1.
//
// Weight loading (this design's choice): a write with wt_addr = (i*J+j)*K+k stores
// the C bits of wt_data (bit c = channel c, 1 = +1, 0 = -1) into column k of
// sub-array (i,j).
module pe_array
  import bwsnn_pkg::*;
#(
  parameter int unsigned C      = 16,
  parameter int unsigned K      = 16,
  parameter int unsigned I      = 3,
  parameter int unsigned J      = 3,
  parameter int unsigned PSUM_W = psum_width(C * I * J),
  parameter bit          DEPTHWISE = 1'b0,
  localparam int unsigned WA_W  = idx_width(I * J * K)
) (
  input  logic                     clk,
  input  logic                     wt_we,
  input  logic [WA_W-1:0]          wt_addr,
  input  logic [C-1:0]             wt_data,
  input  logic [C-1:0]             window [I][J],
  output logic signed [PSUM_W-1:0] wsum   [K]
);

  for (genvar i = 0; i < I; i++) begin : g_i
    for (genvar j = 0; j < J; j++) begin : g_j
      // K partial sums entering and leaving sub-array (i,j); the chain of kernel
      // row i starts from zero.
      logic signed [PSUM_W-1:0] sum_in [K], sum_out [K];
      logic [K-1:0] load;
      for (genvar k = 0; k < K; k++) begin : g_k
        assign load[k] = wt_we && (wt_addr == WA_W'((i * J + j) * K + k));
        if (j == 0) begin : g_first
          assign sum_in[k] = '0;
        end else begin : g_next
          assign sum_in[k] = g_j[j-1].sum_out[k];
        end
      end
      pe_crossbar #(.C(C), .K(K), .PSUM_W(PSUM_W), .DEPTHWISE(DEPTHWISE)) u_xbar (
        .clk     (clk),
        .w_load  (load),
        .w_in    (wt_data),
        .spike   (window[i][j]),
        .psum_in (sum_in),
        .psum_out(sum_out)
      );
    end
  end

  // Adder row across the I kernel rows.
  logic signed [PSUM_W-1:0] row_sum [I][K];
  for (genvar i = 0; i < I; i++) begin : g_row_sum
    assign row_sum[i] = g_i[i].g_j[J-1].sum_out;
  end

  always_comb begin
    for (int k = 0; k < K; k++) begin
      wsum[k] = '0;
      for (int i = 0; i < I; i++) wsum[k] += row_sum[i][k];
    end
  end

endmodule
