// act_unit: non-CiM activation and requantisation of macro results.
//
// Turns LANES 32-bit dot products into 8-bit activations for the next layer:
// arithmetic right shift by `shift`, optional ReLU, then saturation to
// [-128,127] (out_signed) or [0,255]. The paper assigns the activation
// function to non-CiM computing under the controller but gives neither the
// function nor the requantisation; ReLU and power-of-two scaling are this
// design's choices. Combinational.
module act_unit
  import yoloc_pkg::*;
#(
  parameter int unsigned L = LANES
) (
  input  acc_t [L-1:0] psum,
  input  logic [4:0]   shift,
  input  logic         relu,
  input  logic         out_signed,
  output act_t [L-1:0] y
);
  always_comb begin
    for (int i = 0; i < L; i++) begin
      acc_t v;
      v = psum[i] >>> shift;
      if (relu && v < 0) v = '0;
      if (out_signed) begin
        if (v > 127)       y[i] = 8'sd127;
        else if (v < -128) y[i] = 8'h80;
        else               y[i] = act_t'(v);
      end else begin
        if (v > 255)       y[i] = 8'hFF;
        else if (v < 0)    y[i] = 8'h00;
        else               y[i] = act_t'(v);
      end
    end
  end
endmodule
