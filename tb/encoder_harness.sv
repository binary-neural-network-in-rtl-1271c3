// encoder_harness: stimulus and checking for the whole encoder, shared by the
// reduced-size and the full-size end-to-end testbenches. It does not hold
// the encoder itself; the testbench wires the encoder's ports to it.
//
// Sequence: reset, load every weight and threshold RAM through the
// parameter port (hash-generated values, see pbdcae_ref_pkg), then stream
// NFRAMES random RGB frames and compare each of the F2 feature words, and
// tlast, with the layer-by-layer reference model. GAPS inserts random idle
// clocks on the input stream and random back-pressure on the output
// stream. Checks, failures and the clock count are reported through ports;
// done rises after the last feature word of the last frame.
module encoder_harness
  import pbdcae_pkg::*;
  import pbdcae_ref_pkg::*;
#(
  parameter int unsigned IMG = 64, C1 = 4, C2 = 8, C3 = 8, C4 = 16,
  parameter int unsigned F1 = 32, F2 = 8, PACK = 16,
  parameter int NFRAMES = 2,
  parameter bit GAPS = 1,
  parameter int R1 = 300, parameter int RB = 2, parameter int RF = 4
) (
  output logic                       clk,
  output logic                       rst_n,
  output logic                       s_axis_tvalid,
  input  logic                       s_axis_tready,
  output logic [IMG_CH*PIX_BITS-1:0] s_axis_tdata,
  input  logic                       m_axis_tvalid,
  output logic                       m_axis_tready,
  input  logic signed [FEAT_W-1:0]   m_axis_tdata,
  input  logic                       m_axis_tlast,
  output logic                       prm_we,
  output logic [3:0]                 prm_sel,
  output logic [PRM_AW-1:0]          prm_addr,
  output logic [PRM_DW-1:0]          prm_data,
  output int                         checks,
  output int                         failures,
  output int                         cycle,
  output int                         frame_start_cycle,
  output bit                         done
);
  localparam int S1 = IMG-2, P1 = S1/2, S2 = P1-2, P2 = S2/2, S3 = P2-2, P3 = S3/2,
                 S4 = P3-2, P4 = S4/2;

  // Sizes as variables: the loops below take them at run time instead of
  // having them folded and unrolled at compile time.
  int img = IMG, c1 = C1, c2 = C2, c3 = C3, c4 = C4, f1 = F1, f2 = F2, pack = PACK;
  int s1 = S1, p1 = P1, s2 = S2, p2 = P2, s3 = S3, p3 = P3, s4 = S4, p4 = P4;
  int r1 = R1, rb = RB, rf = RF;

  iarr_t frame [NFRAMES];
  iarr_t expv  [NFRAMES];

  initial clk = 0;
  always #5 clk = ~clk;
  initial cycle = 0;
  always @(posedge clk) cycle++;

  function automatic iarr_t reference(iarr_t im);
    iarr_t a, b;
    a = conv(im, img, img, IMG_CH, c1, 0, r1, 1);
    a = pool(a, s1, s1, c1);
    a = conv(a, p1, p1, c1, c2, 1, rb, 0);
    a = pool(a, s2, s2, c2);
    a = conv(a, p2, p2, c2, c3, 2, rb, 0);
    a = pool(a, s3, s3, c3);
    a = conv(a, p3, p3, c3, c4, 3, rb, 0);
    a = pool(a, s4, s4, c4);
    a = fc(a, c4, f1, 4, rf);
    b = new[f1];
    foreach (a[i]) b[i] = (a[i] >= 0) ? 1 : 0;
    return fc(b, pack, f2, 5, rf);
  endfunction

  // one write per clock
  task automatic load_mem(int sel, int words, int width, int r, bit thr);
    int ns, sb;
    ns = (width + 31) / 32;
    sb = (ns > 1) ? $clog2(ns) : 0;
    for (int w = 0; w < words; w++)
      for (int s = 0; s < (thr ? 1 : ns); s++) begin
        @(negedge clk);
        prm_we   = 1;
        prm_sel  = 4'(thr ? sel + 8 : sel);
        prm_addr = PRM_AW'((w << sb) | s);
        prm_data = thr ? 32'(thr_of(sel, w, r)) : hash32(sel, w, s);
      end
    @(negedge clk) prm_we = 0;
  endtask

  initial begin
    checks = 0; failures = 0; done = 0; frame_start_cycle = 0;
    rst_n = 0; s_axis_tvalid = 0; s_axis_tdata = '0; m_axis_tready = 0;
    prm_we = 0; prm_sel = '0; prm_addr = '0; prm_data = '0;
    for (int f = 0; f < NFRAMES; f++) begin
      frame[f] = new[img*img*IMG_CH];
      foreach (frame[f][i]) frame[f][i] = $urandom_range(255);
      expv[f] = reference(frame[f]);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_mem(0, c1, 9*IMG_CH, r1, 0);  load_mem(0, c1, 0, r1, 1);
    load_mem(1, c2, 9*c1,     rb, 0);  load_mem(1, c2, 0, rb, 1);
    load_mem(2, c3, 9*c2,     rb, 0);  load_mem(2, c3, 0, rb, 1);
    load_mem(3, c4, 9*c3,     rb, 0);  load_mem(3, c4, 0, rb, 1);
    load_mem(4, p4*p4*f1, c4, rf, 0);  load_mem(4, f1, 0, rf, 1);
    load_mem(5, (f1/pack)*f2, pack, rf, 0);  load_mem(5, f2, 0, rf, 1);
    frame_start_cycle = cycle;
    for (int f = 0; f < NFRAMES; f++)
      for (int p = 0; p < img*img; p++) begin
        @(negedge clk);
        while (GAPS && $urandom_range(7) == 0) begin s_axis_tvalid = 0; @(negedge clk); end
        s_axis_tvalid = 1;
        for (int c = 0; c < IMG_CH; c++) s_axis_tdata[c*8 +: 8] = 8'(frame[f][p*IMG_CH + c]);
        @(posedge clk);
        while (!s_axis_tready) @(posedge clk);
      end
    @(negedge clk) s_axis_tvalid = 0;
  end

  initial begin
    int n = 0;
    @(posedge rst_n);
    while (n < NFRAMES*f2) begin
      @(negedge clk);
      m_axis_tready = !GAPS || ($urandom_range(3) != 0);
      @(posedge clk);
      if (m_axis_tvalid && m_axis_tready) begin
        int f, k, e;
        f = n / f2;
        k = n % f2;
        e = expv[f][k];
        if (e >  32767) e =  32767;
        if (e < -32767) e = -32767;
        checks += 2;
        if (int'(m_axis_tdata) != e) begin
          failures++;
          $display("frame %0d feature %0d: got %0d expected %0d", f, k, m_axis_tdata, e);
        end
        if (m_axis_tlast != (k == f2-1)) begin failures++; $display("tlast wrong at %0d", k); end
        n++;
      end
    end
    done = 1;
  end
endmodule
