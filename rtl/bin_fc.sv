// bin_fc: binarized fully connected layer (FC1, FC2).
//
// The layer's input vector arrives as N_CHUNK beats of IN_W binary values
// (for FC1: the 7x7 pooled pixels of Conv4, 256 channels each). For each
// beat the unit walks over the N_OUT neurons, one per clock: it reads the
// neuron's IN_W weights for this chunk from on-chip RAM, forms the partial
// dot product by XNOR and popcount, and adds it to the neuron's running sum
// kept in an accumulator RAM. After the last chunk it emits the neurons in
// order: each result is compared with the neuron's integer threshold, which
// gives the binary activation (out_bit, used by FC1) and the signed margin
// sum - threshold (out_value, the image feature that FC2 hands on). That FC1
// and FC2 are binarized layers with on-chip weights follows the design;
// the chunked accumulation, the memory layout and the numeric output of the
// last layer are this design's own choices.
//
// Memory layout: weight word p*N_OUT + o holds the IN_W weights of neuron o
// for input chunk p (bit i for input element p*IN_W + i); threshold word o
// holds neuron o's signed threshold.
//
// Timing: a chunk is accepted in one clock and then takes N_OUT+1 clocks
// (in_ready low). After the last chunk each output beat takes two clocks
// plus any wait for out_ready; out_last marks neuron N_OUT-1.
module bin_fc
  import pbdcae_pkg::*;
#(
  parameter int unsigned IN_W    = 16,
  parameter int unsigned N_CHUNK = 4,
  parameter int unsigned N_OUT   = 8,
  localparam int unsigned OW     = bits_for(N_OUT),
  localparam int unsigned PW     = bits_for(N_CHUNK),
  localparam int unsigned WAW    = bits_for(N_CHUNK*N_OUT)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // input vector, chunk by chunk
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [IN_W-1:0]       in_data,
  // one beat per neuron
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic                  out_bit,
  output logic signed [ACC_W:0] out_value,
  output logic                  out_last,
  // parameter load
  input  logic                  prm_we_w,
  input  logic                  prm_we_t,
  input  logic [PRM_AW-1:0]     prm_addr,
  input  logic [PRM_DW-1:0]     prm_data
);

  typedef enum logic [2:0] {S_IN, S_RUN, S_WAIT, S_EMIT, S_SHOW} state_e;
  state_e state;

  logic [IN_W-1:0] chunk;
  logic [OW-1:0]   o, o_d;
  logic [PW-1:0]   p;
  logic [WAW-1:0]  wbase;
  logic            pend;
  logic [IN_W-1:0] wgt;
  thr_t            thr;
  acc_t            dot, acc_rd, sum;
  acc_t            acc [N_OUT];

  assign in_ready  = (state == S_IN);
  assign out_valid = (state == S_SHOW);
  assign out_last  = (int'(o) == N_OUT-1);

  param_ram #(.DEPTH(N_CHUNK*N_OUT), .WIDTH(IN_W)) u_wram (
    .clk, .wr_en(prm_we_w), .wr_addr(prm_addr), .wr_data(prm_data),
    .rd_addr(wbase + WAW'(o)), .rd_data(wgt)
  );

  param_ram #(.DEPTH(N_OUT), .WIDTH(THR_W)) u_tram (
    .clk, .wr_en(prm_we_t), .wr_addr(prm_addr), .wr_data(prm_data),
    .rd_addr(o), .rd_data(thr)
  );

  xnor_popcount #(.N(IN_W), .IN_BITS(1)) u_dot (.act(chunk), .wgt, .dot);

  threshold_unit u_thr (.x(acc_rd), .thr, .act(out_bit), .margin(out_value));

  // accumulator RAM: synchronous read at o, write of the previous neuron
  assign sum = ((p == '0) ? acc_t'(0) : acc_rd) + dot;
  always_ff @(posedge clk) begin
    acc_rd <= acc[o];
    if (pend) acc[o_d] <= sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IN;
      o     <= '0;
      o_d   <= '0;
      p     <= '0;
      wbase <= '0;
      pend  <= 1'b0;
    end else begin
      pend <= 1'b0;
      unique case (state)
        S_IN: if (in_valid) begin
          chunk <= in_data;
          o     <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          pend <= 1'b1;
          o_d  <= o;
          if (int'(o) == N_OUT-1) state <= S_WAIT;
          else                    o     <= o + 1'b1;
        end
        S_WAIT: begin
          o <= '0;
          if (int'(p) == N_CHUNK-1) begin
            state <= S_EMIT;
          end else begin
            p     <= p + 1'b1;
            wbase <= wbase + WAW'(N_OUT);
            state <= S_IN;
          end
        end
        S_EMIT: state <= S_SHOW;       // acc and threshold of neuron o are read
        S_SHOW: if (out_ready) begin
          if (int'(o) == N_OUT-1) begin
            o     <= '0;
            p     <= '0;
            wbase <= '0;
            state <= S_IN;
          end else begin
            o     <= o + 1'b1;
            state <= S_EMIT;
          end
        end
        default: state <= S_IN;
      endcase
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_value) && $stable(out_bit));

endmodule
