// xnor_popcount: binarized multiply-accumulate of one neuron.
//
// With weights and activations in {-1,+1} stored as bits (1 = +1), the dot
// product of N pairs is 2*popcount(XNOR(act, wgt)) - N: an XNOR gate replaces
// each multiplication and a ones counter replaces the additions, as the
// design describes for its binarized layers.
//
// The first layer sees the camera image, whose pixels are not binary. For
// IN_BITS > 1 each activation is an unsigned IN_BITS-bit value and a weight
// bit selects +value or -value, so the same unit computes sum(+-pixel).
// That treatment of the first layer's input is this design's own choice.
//
// Interface and timing: purely combinational. act holds N activations of
// IN_BITS bits (activation i at act[i*IN_BITS +: IN_BITS]), wgt holds N
// weight bits, dot is the signed result.
module xnor_popcount
  import pbdcae_pkg::*;
#(
  parameter int unsigned N       = 9,
  parameter int unsigned IN_BITS = 1
) (
  input  logic [N*IN_BITS-1:0] act,
  input  logic [N-1:0]         wgt,
  output acc_t                 dot
);

  if (IN_BITS == 1) begin : g_bin
    logic [N-1:0] agree;
    acc_t         ones;
    always_comb begin
      agree = ~(act ^ wgt);               // XNOR: 1 where the signs agree
      ones  = '0;
      for (int i = 0; i < N; i++) ones += acc_t'(agree[i]);
      dot   = (ones <<< 1) - acc_t'(N);   // agreements minus disagreements
    end
  end else begin : g_multibit
    always_comb begin
      dot = '0;
      for (int i = 0; i < N; i++) begin
        if (wgt[i]) dot += acc_t'(act[i*IN_BITS +: IN_BITS]);
        else        dot -= acc_t'(act[i*IN_BITS +: IN_BITS]);
      end
    end
  end

endmodule
