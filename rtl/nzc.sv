// Non-Zero Check (NZC).
//
// One NZC sits on every (feature, weight) pair of the window entering the
// sparse matrix-vector engine. It raises `nz` when the pair may give a
// non-zero product, which tells the sparse crossbar to route it to a MAC and
// the partial-sum logic that it still has to be computed.
//
// By default only the feature value is tested: the engine exploits
// post-activation sparsity, i.e. zeros produced by ReLU in the feature map.
// With CHECK_WEIGHT=1 a zero weight also clears the flag (an option of this
// design, not part of the evaluated configuration). Purely combinational.
module nzc
  import pass_pkg::*;
#(
  parameter bit CHECK_WEIGHT = 1'b0
) (
  input  data_t fmap,
  input  data_t weight,
  output logic  nz
);
  always_comb begin
    nz = (fmap != '0);
    if (CHECK_WEIGHT) nz = nz && (weight != '0);
  end
endmodule
