// tb_bin_maxpool: streams three 7x5 maps of random 6-bit pixels (odd sizes,
// so a column and a row are dropped) with random input gaps and random
// output back-pressure, and compares the pooled beats with
// pbdcae_ref_pkg::pool. Also checks that a beat is offered one clock after
// the fourth pixel of its window is accepted.
module tb_bin_maxpool;
  import pbdcae_ref_pkg::*;

  localparam int unsigned W = 7, H = 5, C = 6, NF = 3;

  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [C-1:0] in_data = '0, out_data;
  int checks = 0, failures = 0, cycle = 0;
  iarr_t frame [NF], expv [NF];
  int acc_cycles[$];

  bin_maxpool #(.W(W), .H(H), .C(C)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int f = 0; f < NF; f++) begin
      frame[f] = new[H*W*C];
      foreach (frame[f][i]) frame[f][i] = ($urandom_range(3) == 0);
      expv[f] = pool(frame[f], H, W, C);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NF; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          @(negedge clk);
          while ($urandom_range(3) == 0) begin in_valid = 0; @(negedge clk); end
          in_valid = 1;
          for (int c = 0; c < C; c++) in_data[c] = frame[f][(y*W + x)*C + c][0];
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          if (x % 2 == 1 && y % 2 == 1 && x < 2*(W/2) && y < 2*(H/2)) acc_cycles.push_back(cycle);
        end
    @(negedge clk) in_valid = 0;
  end

  initial begin
    int n = 0, total = NF*(H/2)*(W/2);
    bit fresh = 1;
    @(posedge rst_n);
    while (n < total) begin
      @(negedge clk);
      out_ready = ($urandom_range(2) != 0);
      @(posedge clk);
      if (out_valid && fresh) begin
        int a;
        a = acc_cycles.pop_front();
        checks++;
        if (cycle - a != 1) begin failures++; $display("latency %0d", cycle - a); end
        fresh = 0;
      end
      if (out_valid && out_ready) begin
        int f, k;
        f = n / ((H/2)*(W/2));
        k = n % ((H/2)*(W/2));
        for (int c = 0; c < C; c++) begin
          checks++;
          if (int'(out_data[c]) != expv[f][k*C + c]) begin
            failures++; $display("frame %0d pixel %0d ch %0d wrong", f, k, c);
          end
        end
        n++;
        fresh = 1;
      end
    end
    repeat (5) @(posedge clk);
    checks++;
    if (out_valid) begin failures++; $display("extra output beat"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
