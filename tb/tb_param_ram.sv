// tb_param_ram: checks the parameter RAM. Words of 70 bits (three 32-bit
// slices) are written slice by slice in random order, then read back with
// the one-clock read latency and compared with a shadow copy. Writes to a
// slice number beyond the word and to a word beyond DEPTH must change
// nothing.
module tb_param_ram;
  import pbdcae_pkg::*;

  localparam int unsigned DEPTH = 10, WIDTH = 70, SB = 2;

  logic clk = 0, wr_en = 0;
  logic [PRM_AW-1:0] wr_addr = '0;
  logic [PRM_DW-1:0] wr_data = '0;
  logic [3:0]        rd_addr = '0;
  logic [WIDTH-1:0]  rd_data;
  logic [95:0]       shadow [DEPTH];
  int checks = 0, failures = 0;

  param_ram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int w, int s, logic [31:0] d);
    @(negedge clk);
    wr_en = 1; wr_addr = PRM_AW'((w << SB) | s); wr_data = d;
    @(negedge clk);
    wr_en = 0;
  endtask

  initial begin
    for (int w = 0; w < DEPTH; w++)
      for (int s = 0; s < 3; s++) begin
        logic [31:0] d;
        d = $urandom;
        wr(w, s, d);
        shadow[w][s*32 +: 32] = d;
      end
    // random rewrites
    for (int k = 0; k < 40; k++) begin
      int w, s;
      logic [31:0] d;
      w = $urandom_range(DEPTH-1); s = $urandom_range(2); d = $urandom;
      wr(w, s, d);
      shadow[w][s*32 +: 32] = d;
    end
    // writes that must be ignored: slice 3 does not exist, word 12 neither
    wr(2, 3, 32'hFFFF_FFFF);
    wr(12, 0, 32'hFFFF_FFFF);
    for (int k = 0; k < 3*DEPTH; k++) begin
      int w;
      w = k % DEPTH;
      @(negedge clk) rd_addr = 4'(w);
      @(posedge clk); #1;
      checks++;
      if (rd_data !== shadow[w][WIDTH-1:0]) begin
        failures++;
        $display("word %0d: got %h expected %h", w, rd_data, shadow[w][WIDTH-1:0]);
      end
    end
    // latency: the read data changes one clock after the address
    @(negedge clk) rd_addr = 4'd3;
    @(posedge clk); #1;
    @(negedge clk) rd_addr = 4'd4;
    #1 checks++;
    if (rd_data !== shadow[3][WIDTH-1:0]) begin failures++; $display("read not registered"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
