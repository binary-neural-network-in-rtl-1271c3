// tb_xnor_popcount: checks the binary dot product (37 binary activations)
// and the signed pixel sum of the multi-bit first layer (27 eight-bit
// pixels) against sums worked out in the testbench.
module tb_xnor_popcount;
  import pbdcae_pkg::*;

  localparam int unsigned NB = 37, NM = 27;
  logic [NB-1:0]   act_b, wgt_b;
  logic [NM*8-1:0] act_m;
  logic [NM-1:0]   wgt_m;
  acc_t            dot_b, dot_m;
  int checks = 0, failures = 0;

  xnor_popcount #(.N(NB), .IN_BITS(1)) dut_b (.act(act_b), .wgt(wgt_b), .dot(dot_b));
  xnor_popcount #(.N(NM), .IN_BITS(8)) dut_m (.act(act_m), .wgt(wgt_m), .dot(dot_m));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      int eb, em;
      eb = 0; em = 0;
      for (int i = 0; i < NB; i++) begin act_b[i] = 1'($urandom); wgt_b[i] = 1'($urandom); end
      if (t == 0) begin act_b = '1; wgt_b = '1; end
      if (t == 1) begin act_b = '0; wgt_b = '1; end
      for (int i = 0; i < NM; i++) begin
        act_m[i*8 +: 8] = (t == 2) ? 8'hFF : 8'($urandom);
        wgt_m[i] = (t == 2) ? 1'b1 : 1'($urandom);
      end
      for (int i = 0; i < NB; i++) eb += (act_b[i] == wgt_b[i]) ? 1 : -1;
      for (int i = 0; i < NM; i++) em += wgt_m[i] ? int'(act_m[i*8 +: 8]) : -int'(act_m[i*8 +: 8]);
      #1;
      checks += 2;
      if (int'(dot_b) != eb) begin failures++; $display("binary: got %0d expected %0d", dot_b, eb); end
      if (int'(dot_m) != em) begin failures++; $display("pixel: got %0d expected %0d", dot_m, em); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
