// pbdcae_encoder: binarized encoder of the partially binarized convolutional
// auto-encoder, as a chain of dedicated streaming layer units.
//
// A camera frame (IMG x IMG RGB pixels, 8 bits per colour) streams in one
// pixel per beat in raster order. It passes Conv1 -> MaxPool -> Conv2 ->
// MaxPool -> Conv3 -> MaxPool -> Conv4 -> MaxPool -> FC1 -> FC2, each layer a
// unit of its own joined to the next by a valid/ready (AXI-Stream style)
// handshake, so that no feature map leaves the chip. Convolutions are 3x3
// without padding, binarized by XNOR/popcount and an integer threshold; max
// pooling is 2x2 with stride 2. At the default sizes the maps are
// 142 -> 140 -> 70 -> 68 -> 34 -> 32 -> 16 -> 14 -> 7, so FC1 sees
// 7*7*256 = 12544 inputs and produces 1024 binary outputs, which are packed
// into 256-bit chunks for FC2. FC2's 64 outputs leave as signed integers
// (sum minus threshold, saturated to FEAT_W bits), one per output beat, the
// last with m_axis_tlast: this is the low-dimensional image feature handed
// to the motion generator running in software. The layer chain, the channel
// counts and the binarization follow the design; the stream widths, the
// first layer's multi-bit input, the numeric feature output and the
// parameter load port are this implementation's own choices.
//
// Parameter load: prm_sel (a pbdcae_pkg::prm_sel_e code) picks one layer's
// weight or threshold RAM, prm_addr/prm_data write 32 bits of it in the
// layout described in bin_conv, bin_fc and param_ram. Load all parameters
// before the first frame; loading while a frame runs is not supported.
//
// Timing: every layer works on its own, stalling the one before through
// in_ready when busy. Conv1, whose 140x140 outputs each take 34 clocks,
// sets the frame rate: about 0.69 million clocks per frame at default sizes.
module pbdcae_encoder
  import pbdcae_pkg::*;
#(
  parameter int unsigned IMG   = IMG_SIZE,
  parameter int unsigned C1    = CONV1_OUT,
  parameter int unsigned C2    = CONV2_OUT,
  parameter int unsigned C3    = CONV3_OUT,
  parameter int unsigned C4    = CONV4_OUT,
  parameter int unsigned F1    = FC1_OUT,
  parameter int unsigned F2    = FC2_OUT,
  parameter int unsigned PACK  = FC2_CHUNK,
  localparam int unsigned S1   = IMG - 2,          // Conv1 output size
  localparam int unsigned P1   = S1 / 2,           // MaxPool output sizes ...
  localparam int unsigned S2   = P1 - 2,
  localparam int unsigned P2   = S2 / 2,
  localparam int unsigned S3   = P2 - 2,
  localparam int unsigned P3   = S3 / 2,
  localparam int unsigned S4   = P3 - 2,
  localparam int unsigned P4   = S4 / 2,
  localparam int unsigned NCH1 = P4 * P4,          // FC1 input chunks of C4 bits
  localparam int unsigned NCH2 = F1 / PACK         // FC2 input chunks of PACK bits
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // camera pixels: colour ci at s_axis_tdata[ci*8 +: 8]
  input  logic                      s_axis_tvalid,
  output logic                      s_axis_tready,
  input  logic [IMG_CH*PIX_BITS-1:0] s_axis_tdata,
  // image features
  output logic                      m_axis_tvalid,
  input  logic                      m_axis_tready,
  output logic signed [FEAT_W-1:0]  m_axis_tdata,
  output logic                      m_axis_tlast,
  // parameter load
  input  logic                      prm_we,
  input  logic [3:0]                prm_sel,
  input  logic [PRM_AW-1:0]         prm_addr,
  input  logic [PRM_DW-1:0]         prm_data
);

  // ---- parameter write decode ----
  logic [15:0] we;
  always_comb begin
    we = '0;
    if (prm_we) we[prm_sel] = 1'b1;
  end

  // ---- stream wires between the layers ----
  logic          c1_v, c1_r;  logic [C1-1:0] c1_d;
  logic          p1_v, p1_r;  logic [C1-1:0] p1_d;
  logic          c2_v, c2_r;  logic [C2-1:0] c2_d;
  logic          p2_v, p2_r;  logic [C2-1:0] p2_d;
  logic          c3_v, c3_r;  logic [C3-1:0] c3_d;
  logic          p3_v, p3_r;  logic [C3-1:0] p3_d;
  logic          c4_v, c4_r;  logic [C4-1:0] c4_d;
  logic          p4_v, p4_r;  logic [C4-1:0] p4_d;
  logic          f1_v, f1_r, f1_bit, f1_last;
  logic signed [ACC_W:0] f1_val;
  logic          k_v, k_r;    logic [PACK-1:0] k_d;
  logic          f2_bit;
  logic signed [ACC_W:0] f2_val;

  bin_conv #(.W(IMG), .H(IMG), .CIN(IMG_CH), .IN_BITS(PIX_BITS), .COUT(C1)) u_conv1 (
    .clk, .rst_n,
    .in_valid(s_axis_tvalid), .in_ready(s_axis_tready), .in_data(s_axis_tdata),
    .out_valid(c1_v), .out_ready(c1_r), .out_data(c1_d),
    .prm_we_w(we[PRM_CONV1_W]), .prm_we_t(we[PRM_CONV1_T]), .prm_addr, .prm_data);

  bin_maxpool #(.W(S1), .H(S1), .C(C1)) u_pool1 (
    .clk, .rst_n, .in_valid(c1_v), .in_ready(c1_r), .in_data(c1_d),
    .out_valid(p1_v), .out_ready(p1_r), .out_data(p1_d));

  bin_conv #(.W(P1), .H(P1), .CIN(C1), .IN_BITS(1), .COUT(C2)) u_conv2 (
    .clk, .rst_n,
    .in_valid(p1_v), .in_ready(p1_r), .in_data(p1_d),
    .out_valid(c2_v), .out_ready(c2_r), .out_data(c2_d),
    .prm_we_w(we[PRM_CONV2_W]), .prm_we_t(we[PRM_CONV2_T]), .prm_addr, .prm_data);

  bin_maxpool #(.W(S2), .H(S2), .C(C2)) u_pool2 (
    .clk, .rst_n, .in_valid(c2_v), .in_ready(c2_r), .in_data(c2_d),
    .out_valid(p2_v), .out_ready(p2_r), .out_data(p2_d));

  bin_conv #(.W(P2), .H(P2), .CIN(C2), .IN_BITS(1), .COUT(C3)) u_conv3 (
    .clk, .rst_n,
    .in_valid(p2_v), .in_ready(p2_r), .in_data(p2_d),
    .out_valid(c3_v), .out_ready(c3_r), .out_data(c3_d),
    .prm_we_w(we[PRM_CONV3_W]), .prm_we_t(we[PRM_CONV3_T]), .prm_addr, .prm_data);

  bin_maxpool #(.W(S3), .H(S3), .C(C3)) u_pool3 (
    .clk, .rst_n, .in_valid(c3_v), .in_ready(c3_r), .in_data(c3_d),
    .out_valid(p3_v), .out_ready(p3_r), .out_data(p3_d));

  bin_conv #(.W(P3), .H(P3), .CIN(C3), .IN_BITS(1), .COUT(C4)) u_conv4 (
    .clk, .rst_n,
    .in_valid(p3_v), .in_ready(p3_r), .in_data(p3_d),
    .out_valid(c4_v), .out_ready(c4_r), .out_data(c4_d),
    .prm_we_w(we[PRM_CONV4_W]), .prm_we_t(we[PRM_CONV4_T]), .prm_addr, .prm_data);

  bin_maxpool #(.W(S4), .H(S4), .C(C4)) u_pool4 (
    .clk, .rst_n, .in_valid(c4_v), .in_ready(c4_r), .in_data(c4_d),
    .out_valid(p4_v), .out_ready(p4_r), .out_data(p4_d));

  bin_fc #(.IN_W(C4), .N_CHUNK(NCH1), .N_OUT(F1)) u_fc1 (
    .clk, .rst_n, .in_valid(p4_v), .in_ready(p4_r), .in_data(p4_d),
    .out_valid(f1_v), .out_ready(f1_r), .out_bit(f1_bit), .out_value(f1_val),
    .out_last(f1_last),
    .prm_we_w(we[PRM_FC1_W]), .prm_we_t(we[PRM_FC1_T]), .prm_addr, .prm_data);

  bit_packer #(.W(PACK)) u_pack (
    .clk, .rst_n, .in_valid(f1_v), .in_ready(f1_r), .in_bit(f1_bit),
    .out_valid(k_v), .out_ready(k_r), .out_data(k_d));

  bin_fc #(.IN_W(PACK), .N_CHUNK(NCH2), .N_OUT(F2)) u_fc2 (
    .clk, .rst_n, .in_valid(k_v), .in_ready(k_r), .in_data(k_d),
    .out_valid(m_axis_tvalid), .out_ready(m_axis_tready), .out_bit(f2_bit),
    .out_value(f2_val), .out_last(m_axis_tlast),
    .prm_we_w(we[PRM_FC2_W]), .prm_we_t(we[PRM_FC2_T]), .prm_addr, .prm_data);

  // feature word: FC2 margin saturated to FEAT_W bits
  localparam int signed FMAX = (1 <<< (FEAT_W-1)) - 1;
  always_comb begin
    if (f2_val > (ACC_W+1)'(FMAX))       m_axis_tdata = FEAT_W'(FMAX);
    else if (f2_val < -(ACC_W+1)'(FMAX)) m_axis_tdata = FEAT_W'(-FMAX);
    else                                 m_axis_tdata = f2_val[FEAT_W-1:0];
  end

  // Parameters of a valid build.
  initial begin
    assert (P4 >= 1)          else $error("image too small for four conv/pool stages");
    assert (F1 % PACK == 0)   else $error("FC1 width must be a multiple of PACK");
  end

endmodule
