// flow_controller: position tracking and sequencing of one layer module.
//
// The input of a layer is a raster of H x W spike vectors per time step, one vector
// per in_valid. The controller counts the row h and column w of the arriving
// vector. With a stride of 1 and no zero padding, the buffer chain holds a complete
// I x J neighbourhood exactly when the newest vector has h >= I-1 and w >= J-1; that
// neighbourhood is output position (h-I+1, w-J+1) of the X x Y output raster,
// X = H-I+1, Y = W-J+1. For each such vector the controller issues, on the edge at
// which the chain shifts it in, a one-cycle win_valid pulse with the output
// address x*Y+y (a running counter, so outputs keep the raster order of the input).
// win_last marks the last output position of a time step.
//
// Time steps follow each other without gaps: the counters wrap at the end of a
// frame and the next frame's first vector is row 0, column 0. Windows that would
// straddle two frames are never valid. win_first is high during the first time
// step after start, which the neuron block uses instead of clearing its potential
// memory (this design's choice; the paper names this block without describing it).
//
// Timing: all outputs registered. start (synchronous) and rst_n (synchronous,
// active low) return the controller to row 0, column 0 of the first time step.
module flow_controller
  import bwsnn_pkg::*;
#(
  parameter int unsigned H = 14,
  parameter int unsigned W = 14,
  parameter int unsigned I = 3,
  parameter int unsigned J = 3,
  localparam int unsigned X   = H - I + 1,
  localparam int unsigned Y   = W - J + 1,
  localparam int unsigned A_W = idx_width(X * Y)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic           in_valid,
  output logic           win_valid,
  output logic [A_W-1:0] win_addr,
  output logic           win_first,
  output logic           win_last
);

  localparam int unsigned HW = idx_width(H);
  localparam int unsigned WW = idx_width(W);

  logic [HW-1:0]  row_q;
  logic [WW-1:0]  col_q;
  logic [A_W-1:0] addr_q;      // next output address in this frame
  logic           first_q;     // current frame is the first time step

  logic in_window, end_row, end_frame;

  always_comb begin
    in_window = (int'(row_q) >= int'(I) - 1) && (int'(col_q) >= int'(J) - 1);
    end_row   = (col_q == WW'(W - 1));
    end_frame = end_row && (row_q == HW'(H - 1));
  end

  always_ff @(posedge clk) begin
    if (!rst_n || start) begin
      row_q     <= '0;
      col_q     <= '0;
      addr_q    <= '0;
      first_q   <= 1'b1;
      win_valid <= 1'b0;
      win_addr  <= '0;
      win_first <= 1'b0;
      win_last  <= 1'b0;
    end else begin
      win_valid <= in_valid && in_window;
      win_last  <= in_valid && end_frame;
      if (in_valid) begin
        win_addr  <= addr_q;
        win_first <= first_q;
        if (in_window) addr_q <= end_frame ? '0 : addr_q + 1'b1;
        if (end_frame) begin
          row_q   <= '0;
          col_q   <= '0;
          first_q <= 1'b0;
        end else if (end_row) begin
          row_q <= row_q + 1'b1;
          col_q <= '0;
        end else begin
          col_q <= col_q + 1'b1;
        end
      end
    end
  end

  // The address counter never runs past the output raster.
  assert property (@(posedge clk) disable iff (!rst_n) int'(addr_q) < X * Y);

endmodule
