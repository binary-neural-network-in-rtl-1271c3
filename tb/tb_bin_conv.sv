// tb_bin_conv: runs the streaming convolution in two configurations, a
// binary-input layer (Conv2..Conv4 style, 7x6 map, 5 -> 6 channels) and an
// 8-bit pixel input layer (Conv1 style, 3 -> 4 channels), each over two
// frames, with output values and per-window latency checked (conv_check).
module tb_bin_conv;
  int c0, f0, c1, f1;
  bit d0, d1;
  int cyc = 0;

  conv_check #(.W(7), .H(6), .CIN(5), .IN_BITS(1), .COUT(6), .LAYER(2), .R(3))
    u_bin (.checks(c0), .failures(f0), .done(d0));
  conv_check #(.W(6), .H(6), .CIN(3), .IN_BITS(8), .COUT(4), .LAYER(0), .R(300))
    u_pix (.checks(c1), .failures(f1), .done(d1));

  initial begin
    while (!(d0 && d1)) begin
      #10 cyc++;
      if (cyc > 20000) begin
        $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1 + 1);
        $finish;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1);
    $finish;
  end
endmodule
