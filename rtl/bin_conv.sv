// bin_conv: streaming binarized 3x3 convolution layer (Conv1..Conv4).
//
// One such unit is dedicated to each convolution layer, and the units are
// chained by valid/ready streams, so feature maps never leave the chip.
// Each stream beat is one pixel carrying all CIN input channels. The pixel
// enters a 2*W+3 shift register (window_shift_reg), which presents the 3x3
// window once the window lies fully inside the map (valid convolution, no
// padding). For that window the unit then walks over the COUT output
// channels, one per clock: it reads the channel's binarized weights and
// integer threshold from on-chip RAM (param_ram), forms the dot product by
// XNOR and popcount (xnor_popcount) and binarizes it by comparison with the
// threshold (threshold_unit). The COUT result bits leave as one beat.
// Shift register, XNOR/popcount, threshold and on-chip weights follow the
// design's figure; computing one output channel per clock, the valid/ready
// handshake and the memory layout are this design's own choices.
//
// Memory layout: weight word co (0..COUT-1) holds the 9*CIN weights of
// output channel co, the weight of window row r, column c, input channel ci
// at bit (r*3 + c)*CIN + ci. Threshold word co holds its signed threshold.
// Both are written through the 32-bit slice port of param_ram
// (prm_we_w / prm_we_t select the memory).
//
// Timing: a pixel that does not complete a window is accepted in one clock.
// A pixel that does takes COUT+2 clocks of computation, then its output
// beat is held until out_ready; in_ready is low meanwhile, which stalls the
// upstream layer. Output beats are the (H-2) x (W-2) results in raster order.
module bin_conv
  import pbdcae_pkg::*;
#(
  parameter int unsigned W       = 8,
  parameter int unsigned H       = 8,
  parameter int unsigned CIN     = 4,
  parameter int unsigned IN_BITS = 1,
  parameter int unsigned COUT    = 8,
  localparam int unsigned DW     = CIN*IN_BITS,
  localparam int unsigned NW     = 9*CIN,
  localparam int unsigned OW     = bits_for(COUT)
) (
  input  logic              clk,
  input  logic              rst_n,
  // input feature map stream
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [DW-1:0]     in_data,
  // output feature map stream
  output logic              out_valid,
  input  logic              out_ready,
  output logic [COUT-1:0]   out_data,
  // parameter load
  input  logic              prm_we_w,
  input  logic              prm_we_t,
  input  logic [PRM_AW-1:0] prm_addr,
  input  logic [PRM_DW-1:0] prm_data
);

  typedef enum logic [1:0] {S_IN, S_RUN, S_LAST, S_OUT} state_e;
  state_e state;

  logic [9*DW-1:0] win;
  logic            win_valid, frame_end, in_completes;
  logic            accept;
  logic [OW-1:0]   co, co_d;
  logic            rd_pend;
  logic [NW-1:0]   wgt;
  thr_t            thr;
  acc_t            dot;
  logic            bit_out;
  logic signed [ACC_W:0] margin;
  logic [COUT-1:0] bits;

  assign in_ready  = (state == S_IN);
  assign accept    = in_valid && in_ready;
  assign out_valid = (state == S_OUT);
  assign out_data  = bits;

  window_shift_reg #(.W(W), .H(H), .DW(DW)) u_win (
    .clk, .rst_n, .shift_en(accept), .in_data,
    .win, .win_valid, .frame_end, .in_completes
  );

  param_ram #(.DEPTH(COUT), .WIDTH(NW)) u_wram (
    .clk, .wr_en(prm_we_w), .wr_addr(prm_addr), .wr_data(prm_data),
    .rd_addr(co), .rd_data(wgt)
  );

  param_ram #(.DEPTH(COUT), .WIDTH(THR_W)) u_tram (
    .clk, .wr_en(prm_we_t), .wr_addr(prm_addr), .wr_data(prm_data),
    .rd_addr(co), .rd_data(thr)
  );

  xnor_popcount #(.N(NW), .IN_BITS(IN_BITS)) u_dot (.act(win), .wgt, .dot);

  threshold_unit u_thr (.x(dot), .thr, .act(bit_out), .margin);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IN;
      co      <= '0;
      co_d    <= '0;
      rd_pend <= 1'b0;
      bits    <= '0;
    end else begin
      rd_pend <= 1'b0;
      if (rd_pend) bits[co_d] <= bit_out;
      unique case (state)
        S_IN: if (accept && in_completes) begin
          state <= S_RUN;
          co    <= '0;
        end
        S_RUN: begin
          rd_pend <= 1'b1;
          co_d    <= co;
          if (int'(co) == COUT-1) state <= S_LAST;
          else                    co    <= co + 1'b1;
        end
        S_LAST: state <= S_OUT;
        S_OUT:  if (out_ready) state <= S_IN;
        default: state <= S_IN;
      endcase
    end
  end

  // Computation only ever starts on a window that lies inside the map.
  a_window_inside: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_RUN |-> win_valid);

  // AXI-Stream rule: a beat that is offered stays unchanged until taken.
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
