// pool_unit: non-CiM max-pooling step.
//
// Element-wise maximum of two cache words of LANES 8-bit activations, signed
// or unsigned. A 2x2 max pool is three such steps. The paper assigns pooling
// to non-CiM computing under the controller; max pooling and this
// pairwise form are this design's choices. Combinational.
module pool_unit
  import yoloc_pkg::*;
#(
  parameter int unsigned L = LANES
) (
  input  act_t [L-1:0] a,
  input  act_t [L-1:0] b,
  input  logic         is_signed,
  output act_t [L-1:0] y
);
  always_comb begin
    for (int i = 0; i < L; i++) begin
      logic a_gt_b;
      a_gt_b = is_signed ? ($signed(a[i]) > $signed(b[i])) : (a[i] > b[i]);
      y[i]   = a_gt_b ? a[i] : b[i];
    end
  end
endmodule
