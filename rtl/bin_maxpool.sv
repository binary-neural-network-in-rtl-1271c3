// bin_maxpool: streaming 2x2, stride-2 max pooling of a binary feature map.
//
// With activations in {-1,+1} coded as bits (1 = +1), the maximum of four
// values is their bitwise OR, taken for all C channels of a pixel at once.
// The map streams in raster order, one C-bit pixel per beat. On even rows
// the unit ORs horizontal pairs into a row buffer of W/2 entries; on odd
// rows it ORs the next pair with the buffered entry and emits the pooled
// pixel. A trailing odd row or column is dropped, so the output is
// floor(W/2) x floor(H/2). Max pooling between the convolutions, and the
// map sizes it yields, follow the design's network table; the 2x2 stride-2
// window is inferred from those sizes (see the documentation).
//
// Interface and timing: valid/ready streams. Every input beat is taken in
// one clock unless the output register holds a beat that is not taken;
// one output beat leaves per four pooled input pixels, one clock after the
// fourth arrives.
module bin_maxpool #(
  parameter int unsigned W = 6,
  parameter int unsigned H = 6,
  parameter int unsigned C = 4,
  localparam int unsigned PW = W / 2,
  localparam int unsigned CW = (W < 2) ? 1 : $clog2(W),
  localparam int unsigned BW = (PW < 2) ? 1 : $clog2(PW),
  localparam int unsigned RW = (H < 2) ? 1 : $clog2(H)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [C-1:0]  in_data,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [C-1:0]  out_data
);

  logic [C-1:0]  rowbuf [PW];
  logic [C-1:0]  h;              // left pixel of the current horizontal pair
  logic [CW-1:0] col;
  logic [RW-1:0] row;
  logic          accept, pooled, emit;

  assign in_ready = !out_valid || out_ready;
  assign accept   = in_valid && in_ready;
  assign pooled   = (int'(col) < 2*PW) && (int'(row) < 2*(H/2));
  assign emit     = accept && pooled && col[0] && row[0];

  always_ff @(posedge clk) begin
    if (accept && pooled) begin
      if (!col[0])     h <= in_data;
      else if (!row[0]) rowbuf[BW'(col >> 1)] <= h | in_data;
    end
    if (emit) out_data <= rowbuf[BW'(col >> 1)] | h | in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col       <= '0;
      row       <= '0;
      out_valid <= 1'b0;
    end else begin
      if (emit)           out_valid <= 1'b1;
      else if (out_ready) out_valid <= 1'b0;
      if (accept) begin
        if (int'(col) == W-1) begin
          col <= '0;
          row <= (int'(row) == H-1) ? '0 : row + 1'b1;
        end else begin
          col <= col + 1'b1;
        end
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
