// pe_crossbar: a C x K crossbar sub-array of binary-weight PEs.
//
// Row c receives spike[c], which is broadcast to the K PEs of that row. Column k
// is a chain of C PEs: the partial sum psum_in[k] enters PE (0,k), each PE adds its
// product, and psum_out[k] leaves PE (C-1,k). A column therefore adds
// sum_c W[k][c] * spike[c] to its input. Several crossbars are stacked by feeding
// one crossbar's psum_out into the next one's psum_in, as in the paper's PE array.
//
// With DEPTHWISE set (C must equal K) only the diagonal PEs c == k exist: column k
// then adds only spike[k] * W[k][k], which is the diagonal kernel mapping that
// turns the array into a depthwise convolution (and, with all weights +1, into
// average pooling). Off-diagonal positions pass the partial sum on unchanged.
//
// Interface: w_load[k] writes the C weight bits w_in[c] into column k (one column
// per clock edge); everything else is combinational. The crossbar itself is the
// published structure; the column-wise load port is this design's choice.
module pe_crossbar #(
  parameter int unsigned C      = 16,
  parameter int unsigned K      = 16,
  parameter int unsigned PSUM_W = 9,
  parameter bit          DEPTHWISE = 1'b0
) (
  input  logic                     clk,
  input  logic [K-1:0]             w_load,
  input  logic [C-1:0]             w_in,
  input  logic [C-1:0]             spike,
  input  logic signed [PSUM_W-1:0] psum_in  [K],
  output logic signed [PSUM_W-1:0] psum_out [K]
);

  for (genvar k = 0; k < K; k++) begin : g_col
    for (genvar c = 0; c < C; c++) begin : g_row
      logic signed [PSUM_W-1:0] sum_in, sum_out;   // partial sum into / out of PE (c,k)
      if (c == 0) begin : g_first
        assign sum_in = psum_in[k];
      end else begin : g_next
        assign sum_in = g_row[c-1].sum_out;
      end
      if (!DEPTHWISE || c == k) begin : g_pe
        pe #(.PSUM_W(PSUM_W)) u_pe (
          .clk     (clk),
          .w_load  (w_load[k]),
          .w_in    (w_in[c]),
          .spike   (spike[c]),
          .psum_in (sum_in),
          .psum_out(sum_out)
        );
      end else begin : g_no_pe
        assign sum_out = sum_in;
      end
    end
    assign psum_out[k] = g_row[C-1].sum_out;
  end

  initial begin
    assert (!DEPTHWISE || C == K) else $error("pe_crossbar: DEPTHWISE needs C == K");
  end

endmodule
