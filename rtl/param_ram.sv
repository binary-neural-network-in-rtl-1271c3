// param_ram: on-chip parameter memory (block RAM) of one layer.
//
// Holds either the binarized weights or the integer thresholds of one layer,
// one memory word per output neuron (convolution) or per (input chunk,
// output neuron) pair (fully connected). The design keeps every parameter on
// chip, which binarization makes possible; this RAM is that storage.
//
// Interface and timing:
//   * Read port: rd_addr selects a word; rd_data shows it one clock later
//     (synchronous read, as a block RAM does).
//   * Write port: words wider than 32 bits are written in 32-bit slices.
//     wr_addr = (word << SB) | slice, with SB = clog2(number of slices),
//     slice 0 holding bits [31:0]. Bits of the last slice above WIDTH are
//     stored but never read. This load port is this design's own choice;
//     the paper bakes the trained parameters into the FPGA image instead.
module param_ram
  import pbdcae_pkg::*;
#(
  parameter int unsigned DEPTH = 32,
  parameter int unsigned WIDTH = 27,
  localparam int unsigned NS   = n_slices(WIDTH),
  localparam int unsigned SB   = (NS > 1) ? $clog2(NS) : 0,
  localparam int unsigned RAW  = bits_for(DEPTH)
) (
  input  logic              clk,
  input  logic              wr_en,
  input  logic [PRM_AW-1:0] wr_addr,
  input  logic [PRM_DW-1:0] wr_data,
  input  logic [RAW-1:0]    rd_addr,
  output logic [WIDTH-1:0]  rd_data
);

  logic [NS*PRM_DW-1:0] mem [DEPTH];

  logic [PRM_AW-1:0] wr_word;
  logic [PRM_AW-1:0] wr_slice;

  always_comb begin
    wr_word  = wr_addr >> SB;
    wr_slice = (SB == 0) ? '0 : (wr_addr & PRM_AW'((1 << SB) - 1));
  end

  always_ff @(posedge clk) begin
    if (wr_en && (wr_word < PRM_AW'(DEPTH)) && (wr_slice < PRM_AW'(NS)))
      mem[wr_word[RAW-1:0]][wr_slice*PRM_DW +: PRM_DW] <= wr_data;
    rd_data <= mem[rd_addr][WIDTH-1:0];
  end

endmodule
