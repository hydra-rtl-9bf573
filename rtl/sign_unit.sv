// sign_unit: binarizes an int16 accumulator HV for storage in the CAM banks.
//
// Element k of the result is 1 when a[k] > thr (signed compare) and 0
// otherwise. Because the accumulator counts the -1 votes (bit 1) of the N
// bundled HVs, thr = N/2 gives the sign of the bipolar sum, i.e. the majority
// bit; a tie gives 0 (+1). Combinational. The threshold port and the tie rule
// are this design's own; the published macro only names a sign() block.
module sign_unit #(
  parameter int DIM    = 2048,
  parameter int ELEM_W = 16
) (
  input  logic [ELEM_W-1:0]        a [DIM],
  input  logic signed [ELEM_W-1:0] thr,
  output logic [DIM-1:0]           hv
);

  always_comb
    for (int k = 0; k < DIM; k++)
      hv[k] = $signed(a[k]) > thr;

endmodule
