// window_shift_reg: line-buffer shift register of a streaming 3x3 convolution.
//
// Pixels of a W-wide feature map arrive in raster order, each a word of DW
// bits (all input channels of one pixel). The register keeps the last
// 2*W+3 pixels, which is exactly what a 3x3 window needs: for W=5 it holds
// x00..x04, x10..x14, x20..x22, the newest pixel at position 0. This
// structure, its length and its tap positions follow the design's figure of
// the streaming binarized convolution circuit.
//
// The window is output flattened: element (r, c) of the window (r = row
// from the top, c = column from the left, both 0..2) occupies
// win[((r*3 + c)*DW) +: DW] and is tap (2-r)*W + (2-c) of the register.
//
// Interface and timing: on a clock with shift_en high, in_data enters and
// the row/column counters advance. win_valid is high after a pixel whose
// row and column are both at least 2 was shifted in, i.e. when the window
// lies completely inside the map (no padding); it stays valid until the next
// shift. in_completes tells one clock earlier, combinationally, whether the
// pixel offered now would complete a window. The counters wrap after H rows, so frames follow back to back.
module window_shift_reg #(
  parameter int unsigned W  = 5,
  parameter int unsigned H  = 5,
  parameter int unsigned DW = 1,
  localparam int unsigned LEN = 2*W + 3,
  localparam int unsigned CW  = (W < 2) ? 1 : $clog2(W),
  localparam int unsigned RW  = (H < 2) ? 1 : $clog2(H)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              shift_en,
  input  logic [DW-1:0]     in_data,
  output logic [9*DW-1:0]   win,
  output logic              win_valid,
  output logic              frame_end,  // the pixel just shifted was the last of a frame
  output logic              in_completes // combinational: a pixel shifted now completes a window
);

  logic [DW-1:0] sr [LEN];
  logic [CW-1:0] col;
  logic [RW-1:0] row;

  always_ff @(posedge clk) begin
    if (shift_en) begin
      sr[0] <= in_data;
      for (int i = 1; i < LEN; i++) sr[i] <= sr[i-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col       <= '0;
      row       <= '0;
      win_valid <= 1'b0;
      frame_end <= 1'b0;
    end else if (shift_en) begin
      win_valid <= (int'(row) >= 2) && (int'(col) >= 2);
      frame_end <= (int'(row) == H-1) && (int'(col) == W-1);
      if (int'(col) == W-1) begin
        col <= '0;
        row <= (int'(row) == H-1) ? '0 : row + 1'b1;
      end else begin
        col <= col + 1'b1;
      end
    end
  end

  assign in_completes = (int'(row) >= 2) && (int'(col) >= 2);

  always_comb begin
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 3; c++)
        win[((r*3 + c)*DW) +: DW] = sr[(2-r)*W + (2-c)];
  end

endmodule
