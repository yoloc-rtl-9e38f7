// out_buffer: output buffer of a CiM macro.
//
// Holds the NO results of the last completed macro operation so that the
// controller can read them while the macro (whose shift & add accumulators
// keep changing) runs its next operation. The paper draws an "Output Buffer"
// beside each CiM array; capturing on the macro's done pulse is this design's
// choice.
//
// Interface: capture loads d into q on the clock edge; q holds otherwise.
module out_buffer
  import yoloc_pkg::*;
#(
  parameter int unsigned NO = N_OUT,
  parameter int unsigned AW = ACC_W
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         capture,
  input  logic signed [NO-1:0][AW-1:0] d,
  output logic signed [NO-1:0][AW-1:0] q
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       q <= '0;
    else if (capture) q <= d;
  end
endmodule
