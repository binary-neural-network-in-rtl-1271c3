// tb_pbdcae_encoder: end-to-end test of the encoder at reduced size
// (64x64 input, 4/8/8/16 channels, FC1 32 wide in 16-bit chunks to FC2,
// 8 features), two frames back to back, with random input gaps and output
// back-pressure. Besides the feature values it counts how often each
// mechanism of the design occurred and fails if one never did: input stalls
// while a layer computes, border pixels that complete no window, pooling
// that drops an odd row/column, FC1 accumulation over several chunks, both
// outcomes of the threshold, and output back-pressure.
module tb_pbdcae_encoder;
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

  pbdcae_encoder #(.IMG(64), .C1(4), .C2(8), .C3(8), .C4(16), .F1(32), .F2(8), .PACK(16)) dut (.*);
  encoder_harness #(.IMG(64), .C1(4), .C2(8), .C3(8), .C4(16), .F1(32), .F2(8), .PACK(16),
                    .NFRAMES(2), .GAPS(1)) h (.*);

  int n_stall = 0, n_border = 0, n_drop = 0, n_multichunk = 0, n_pos = 0, n_neg = 0, n_bp = 0;
  always @(posedge clk) if (rst_n) begin
    if (s_axis_tvalid && !s_axis_tready) n_stall++;
    if (dut.u_conv2.accept && !dut.u_conv2.in_completes) n_border++;
    if (dut.u_pool2.accept && !dut.u_pool2.pooled) n_drop++;
    if (dut.u_fc1.pend && dut.u_fc1.p != '0) n_multichunk++;
    if (dut.u_conv3.out_valid && dut.u_conv3.out_ready) begin
      n_pos += $countones(dut.u_conv3.out_data);
      n_neg += 8 - $countones(dut.u_conv3.out_data);
    end
    if (m_axis_tvalid && !m_axis_tready) n_bp++;
  end

  initial begin
    while (!done && cycle < 400000) @(posedge clk);
    if (!done) begin failures++; $display("watchdog: no complete result"); end
    $display("stalls %0d border %0d pool-drop %0d fc1-accumulate %0d +1 %0d -1 %0d out-backpressure %0d",
             n_stall, n_border, n_drop, n_multichunk, n_pos, n_neg, n_bp);
    checks += 7;
    if (n_stall == 0)      begin failures++; $display("no input stall"); end
    if (n_border == 0)     begin failures++; $display("no border pixel"); end
    if (n_drop == 0)       begin failures++; $display("no pooling drop"); end
    if (n_multichunk == 0) begin failures++; $display("no multi-chunk accumulation"); end
    if (n_pos == 0)        begin failures++; $display("no +1 activation"); end
    if (n_neg == 0)        begin failures++; $display("no -1 activation"); end
    if (n_bp == 0)         begin failures++; $display("no output back-pressure"); end
    $display("frame cycles (two frames incl. gaps): %0d", cycle - frame_start_cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
