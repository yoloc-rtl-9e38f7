// rom_cim_cell: behavioural model of the 1T ROM computing-in-memory cell.
//
// The cell is one access transistor whose gate is either fused to the word
// line (stores '1') or tied to ground (stores '0'); its drain sits on the bit
// line and its source on ground. It therefore multiplies one input bit by one
// weight bit: only when the word line is high AND the gate is fused does the
// transistor conduct and pull charge off the pre-charged bit line; otherwise
// the bit line is left floating. This follows the paper. The analog discharge
// is reduced to one digital signal, bl_pd, meaning "this cell removes one unit
// of charge from its bit line in this cycle" (this model's own abstraction).
// The stored bit is a parameter, since it is fixed by the mask.
//
// Interface: wl (word line pulse) in, bl_pd out. Purely combinational.
module rom_cim_cell #(
  parameter bit FUSED = 1'b1   // 1: gate fused to WL ('1'), 0: gate grounded ('0')
) (
  input  logic wl,
  output logic bl_pd
);
  always_comb bl_pd = FUSED & wl;
endmodule
