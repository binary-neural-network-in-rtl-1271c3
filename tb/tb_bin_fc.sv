// tb_bin_fc: loads a 3-chunk x 20-bit, 6-neuron fully connected layer with
// hash-generated weights and thresholds, sends three input vectors back to
// back (so the accumulators must restart for each), randomly withholds
// out_ready, and compares out_bit, out_value and out_last with
// pbdcae_ref_pkg::fc. It also checks that a chunk occupies the unit for
// N_OUT+1 clocks (in_ready low).
module tb_bin_fc;
  import pbdcae_pkg::*;
  import pbdcae_ref_pkg::*;

  localparam int unsigned IN_W = 20, NCH = 3, NOUT = 6, LAYER = 4, NV = 3;
  localparam int R = 6;

  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [IN_W-1:0] in_data = '0;
  logic out_bit, out_last;
  logic signed [ACC_W:0] out_value;
  logic prm_we_w = 0, prm_we_t = 0;
  logic [PRM_AW-1:0] prm_addr = '0;
  logic [PRM_DW-1:0] prm_data = '0;
  int checks = 0, failures = 0, cycle = 0;
  iarr_t vec [NV], expv [NV];
  int acc_cycles[$];

  bin_fc #(.IN_W(IN_W), .N_CHUNK(NCH), .N_OUT(NOUT)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic prm(bit t, int addr, logic [31:0] d);
    @(negedge clk);
    prm_we_w = !t; prm_we_t = t; prm_addr = PRM_AW'(addr); prm_data = d;
    @(negedge clk);
    prm_we_w = 0; prm_we_t = 0;
  endtask

  initial begin
    for (int v = 0; v < NV; v++) begin
      vec[v] = new[NCH*IN_W];
      foreach (vec[v][i]) vec[v][i] = $urandom_range(1);
      expv[v] = fc(vec[v], IN_W, NOUT, LAYER, R);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < NCH*NOUT; w++) prm(0, w, hash32(LAYER, w, 0));
    for (int w = 0; w < NOUT; w++)     prm(1, w, 32'(thr_of(LAYER, w, R)));
    for (int v = 0; v < NV; v++)
      for (int p = 0; p < NCH; p++) begin
        @(negedge clk);
        while ($urandom_range(2) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1;
        for (int i = 0; i < IN_W; i++) in_data[i] = vec[v][p*IN_W + i][0];
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        acc_cycles.push_back(cycle);
        @(negedge clk) in_valid = 0;
        // the unit must be busy for N_OUT+1 clocks after taking a chunk
        if (p != NCH-1) begin
          int t0;
          t0 = cycle;
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          checks++;
          if (cycle - t0 != NOUT + 1) begin failures++; $display("chunk took %0d", cycle - t0); end
        end
      end
  end

  initial begin
    int n = 0;
    @(posedge rst_n);
    while (n < NV*NOUT) begin
      @(negedge clk);
      out_ready = ($urandom_range(2) != 0);
      @(posedge clk);
      if (out_valid && out_ready) begin
        int v, k;
        v = n / NOUT;
        k = n % NOUT;
        checks += 3;
        if (int'(out_value) != expv[v][k]) begin
          failures++; $display("vector %0d neuron %0d: value %0d expected %0d", v, k, out_value, expv[v][k]);
        end
        if (out_bit != (expv[v][k] >= 0)) begin failures++; $display("bit wrong"); end
        if (out_last != (k == NOUT-1)) begin failures++; $display("last wrong"); end
        n++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
