// conv_check: test harness for one bin_conv configuration. It loads
// hash-generated weights and thresholds through the parameter port, streams
// NFRAMES random frames with random input gaps while randomly withholding
// out_ready, and compares every output beat with pbdcae_ref_pkg::conv. It
// also checks that each output appears COUT+2 clocks after the pixel that
// completes its window was accepted. Results are counted in checks/failures;
// done rises when all beats have been seen.
module conv_check
  import pbdcae_pkg::*;
  import pbdcae_ref_pkg::*;
#(
  parameter int unsigned W = 7, H = 6, CIN = 5, IN_BITS = 1, COUT = 6,
  parameter int unsigned LAYER = 2, parameter int R = 3, parameter int NFRAMES = 2
) (
  output int checks,
  output int failures,
  output bit done
);
  localparam int unsigned DW = CIN*IN_BITS, NW = 9*CIN;
  localparam int unsigned NS = n_slices(NW), SB = (NS > 1) ? $clog2(NS) : 0;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [DW-1:0]   in_data = '0;
  logic [COUT-1:0] out_data;
  logic prm_we_w = 0, prm_we_t = 0;
  logic [PRM_AW-1:0] prm_addr = '0;
  logic [PRM_DW-1:0] prm_data = '0;

  bin_conv #(.W(W), .H(H), .CIN(CIN), .IN_BITS(IN_BITS), .COUT(COUT)) dut (.*);

  always #5 clk = ~clk;

  int   cycle = 0;
  always @(posedge clk) cycle++;

  iarr_t frame [NFRAMES];
  iarr_t expv  [NFRAMES];
  int    acc_cycles[$];

  task automatic prm(bit t, int addr, logic [31:0] d);
    @(negedge clk);
    prm_we_w = !t; prm_we_t = t; prm_addr = PRM_AW'(addr); prm_data = d;
    @(negedge clk);
    prm_we_w = 0; prm_we_t = 0;
  endtask

  initial begin
    checks = 0; failures = 0; done = 0;
    for (int f = 0; f < NFRAMES; f++) begin
      frame[f] = new[H*W*CIN];
      foreach (frame[f][i]) frame[f][i] = (IN_BITS == 1) ? int'($urandom_range(1)) : int'($urandom_range(255));
      expv[f] = conv(frame[f], H, W, CIN, COUT, LAYER, R, IN_BITS > 1);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < COUT; w++) begin
      for (int s = 0; s < NS; s++) prm(0, (w << SB) | s, hash32(LAYER, w, s));
      prm(1, w, 32'(thr_of(LAYER, w, R)));
    end
    // stream the frames
    for (int f = 0; f < NFRAMES; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          @(negedge clk);
          while ($urandom_range(4) == 0) begin in_valid = 0; @(negedge clk); end
          in_valid = 1;
          for (int c = 0; c < CIN; c++)
            in_data[c*IN_BITS +: IN_BITS] = IN_BITS'(frame[f][(y*W + x)*CIN + c]);
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          if (y >= 2 && x >= 2) acc_cycles.push_back(cycle);
        end
    @(negedge clk) in_valid = 0;
  end

  // output monitor
  initial begin
    bit prev_v = 0;
    int n = 0, total = NFRAMES*(H-2)*(W-2);
    @(posedge rst_n);
    while (n < total) begin
      @(negedge clk);
      out_ready = ($urandom_range(2) != 0);
      @(posedge clk);
      if (out_valid && !prev_v) begin
        int a;
        a = acc_cycles.pop_front();
        checks++;
        if (cycle - a != COUT + 2) begin
          failures++;
          $display("latency %0d, expected %0d", cycle - a, COUT + 2);
        end
      end
      prev_v = out_valid && !out_ready;
      if (out_valid && out_ready) begin
        int f, k;
        f = n / ((H-2)*(W-2));
        k = n % ((H-2)*(W-2));
        for (int co = 0; co < COUT; co++) begin
          checks++;
          if (int'(out_data[co]) != expv[f][k*COUT + co]) begin
            failures++;
            $display("frame %0d pixel %0d channel %0d: got %0d", f, k, co, out_data[co]);
          end
        end
        n++;
      end
    end
    done = 1;
  end
endmodule
