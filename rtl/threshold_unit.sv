// threshold_unit: batch normalisation followed by the sign function.
//
// At inference, Sign(BN(x)) is +1 exactly when x >= floor(mu - sigma*beta/gamma),
// so the whole normalisation folds into one integer per neuron, the
// "integer bias" that is compared with the dot product. act is that sign as
// a bit (1 = +1). margin = x - thr is also output; the last layer, whose
// result leaves the encoder as a number rather than a sign, uses it. The
// comparison follows the design; folding a negative gamma (which would flip
// the comparison) is left to the offline conversion of the parameters.
//
// Interface and timing: purely combinational.
module threshold_unit
  import pbdcae_pkg::*;
(
  input  acc_t                   x,
  input  thr_t                   thr,
  output logic                   act,
  output logic signed [ACC_W:0]  margin
);

  always_comb begin
    margin = (ACC_W+1)'(x) - (ACC_W+1)'(thr);
    act    = (x >= acc_t'(thr));
  end

endmodule
