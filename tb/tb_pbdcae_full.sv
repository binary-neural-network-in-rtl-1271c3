// tb_pbdcae_full: the encoder at its default (full) size: a 142x142 RGB
// frame through Conv1 (32) .. Conv4 (256), FC1 (12544 -> 1024) and FC2
// (1024 -> 64). All parameter RAMs are loaded, one frame is streamed without
// gaps, and the 64 feature words are compared with the reference model.
// The clocks from the first pixel to the last feature word are reported.
module tb_pbdcae_full;
  import pbdcae_pkg::*;

  logic clk, rst_n, s_axis_tvalid, s_axis_tready, m_axis_tvalid, m_axis_tready, m_axis_tlast;
  logic [IMG_CH*PIX_BITS-1:0] s_axis_tdata;
  logic signed [FEAT_W-1:0] m_axis_tdata;
  logic prm_we;
  logic [3:0] prm_sel;
  logic [PRM_AW-1:0] prm_addr;
  logic [PRM_DW-1:0] prm_data;
  int checks, failures, cycle, frame_start_cycle;
  bit done;

  pbdcae_encoder dut (.*);
  encoder_harness #(.IMG(IMG_SIZE), .C1(CONV1_OUT), .C2(CONV2_OUT), .C3(CONV3_OUT),
                    .C4(CONV4_OUT), .F1(FC1_OUT), .F2(FC2_OUT), .PACK(FC2_CHUNK),
                    .NFRAMES(1), .GAPS(0), .R1(300), .RB(4), .RF(40)) h (.*);

  initial begin
    while (!done && cycle < 3000000) @(posedge clk);
    checks++;
    if (!done) begin failures++; $display("watchdog: no complete result"); end
    $display("clocks per frame: %0d", cycle - frame_start_cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
