// tb_threshold_unit: checks the folded batch-norm/sign comparison and the
// margin output for random and boundary values.
module tb_threshold_unit;
  import pbdcae_pkg::*;

  acc_t x;
  thr_t thr;
  logic act;
  logic signed [ACC_W:0] margin;
  int checks = 0, failures = 0;

  threshold_unit dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int xv, int tv);
    x = acc_t'(xv); thr = thr_t'(tv);
    #1;
    checks += 2;
    if (act !== (xv >= tv)) begin failures++; $display("x=%0d thr=%0d act=%b", xv, tv, act); end
    if (int'(margin) != xv - tv) begin failures++; $display("x=%0d thr=%0d margin=%0d", xv, tv, margin); end
  endtask

  initial begin
    check(0, 0); check(-1, 0); check(5, 5); check(4, 5); check(-12544, -12544);
    check(12544, -32768); check(-12544, 32767);
    for (int t = 0; t < 1000; t++)
      check($urandom_range(40000) - 20000, $urandom_range(65535) - 32768);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
