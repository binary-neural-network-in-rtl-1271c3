// tb_window_shift_reg: streams two 6x5 frames of random 4-bit pixels with
// random gaps through the shift register and compares, after every shift,
// the nine window taps, the window-valid flag, the early in_completes flag
// and the frame-end flag with the frame held in the testbench.
module tb_window_shift_reg;
  localparam int unsigned W = 6, H = 5, DW = 4;

  logic clk = 0, rst_n = 0, shift_en = 0;
  logic [DW-1:0]   in_data = '0;
  logic [9*DW-1:0] win;
  logic win_valid, frame_end, in_completes;
  logic [DW-1:0] img [H][W];
  int checks = 0, failures = 0;

  window_shift_reg #(.W(W), .H(H), .DW(DW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          @(negedge clk);
          while ($urandom_range(3) == 0) begin shift_en = 0; @(negedge clk); end
          img[y][x] = DW'($urandom);
          in_data   = img[y][x];
          shift_en  = 1;
          checks++;
          if (in_completes !== (y >= 2 && x >= 2)) begin
            failures++; $display("in_completes wrong at %0d,%0d", y, x);
          end
          @(negedge clk);
          shift_en = 0;
          checks += 2;
          if (win_valid !== (y >= 2 && x >= 2)) begin failures++; $display("valid wrong at %0d,%0d", y, x); end
          if (frame_end !== (y == H-1 && x == W-1)) begin failures++; $display("frame_end wrong"); end
          if (y >= 2 && x >= 2)
            for (int r = 0; r < 3; r++)
              for (int c = 0; c < 3; c++) begin
                checks++;
                if (win[(r*3 + c)*DW +: DW] !== img[y-2+r][x-2+c]) begin
                  failures++;
                  $display("tap r%0d c%0d at %0d,%0d wrong", r, c, y, x);
                end
              end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
