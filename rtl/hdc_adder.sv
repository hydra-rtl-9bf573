// hdc_adder: the bundling adder of the HyDra macro.
//
// Bundling adds a freshly encoded binary HV to an int16 accumulator HV. With
// the bipolar-to-bit mapping (+1 -> 0, -1 -> 1) the accumulator counts, per
// element, how many bundled HVs held -1, so each element only ever grows by 0
// or 1. Every element therefore needs an incrementer (a half-adder chain, see
// inc_half_adder) and a 2:1 mux: s[k] = b[k] ? a[k] + 1 : a[k]. All DIM
// elements are updated in parallel. Combinational. The half-adder-and-mux
// structure is the published one; wrap-around at 16 bits is this design's
// choice (the published adder has no overflow handling either).
module hdc_adder #(
  parameter int DIM    = 2048,
  parameter int ELEM_W = 16
) (
  input  logic [ELEM_W-1:0] a [DIM],
  input  logic [DIM-1:0]    b,
  output logic [ELEM_W-1:0] s [DIM]
);

  for (genvar k = 0; k < DIM; k++) begin : g_elem
    logic [ELEM_W-1:0] a_inc;
    inc_half_adder #(.W(ELEM_W)) u_inc (.a(a[k]), .s(a_inc));
    assign s[k] = b[k] ? a_inc : a[k];
  end

endmodule
