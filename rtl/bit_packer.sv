// bit_packer: gathers a stream of single bits into words of W bits.
//
// FC1 produces its 1024 binary outputs one per beat; FC2 consumes them in
// chunks of W bits. The i-th bit received within a group lands at bit i of
// the word. This width conversion is this design's own choice.
//
// Interface and timing: valid/ready streams. A bit is taken in one clock
// while no full word waits; the word is offered the clock after its last
// bit arrives and is held until out_ready.
module bit_packer #(
  parameter int unsigned W = 8,
  localparam int unsigned IW = (W < 2) ? 1 : $clog2(W)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic         in_bit,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);

  logic [IW-1:0] idx;
  logic          accept;

  assign in_ready = !out_valid;
  assign accept   = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (accept) out_data[idx] <= in_bit;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx       <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (accept) begin
        if (int'(idx) == W-1) begin
          idx       <= '0;
          out_valid <= 1'b1;
        end else begin
          idx <= idx + 1'b1;
        end
      end
    end
  end

endmodule
