// inc_half_adder: adds one to a W-bit word with a ripple chain of half adders.
//
// Bit 0 is XORed with a constant 1 and every later bit with the carry of the
// bit below (s[i] = a[i] ^ c[i], c[i+1] = a[i] & c[i], c[0] = 1). No full
// adders are needed because the second operand is the constant 1. The final
// carry is dropped, so the all-ones word wraps to zero. Combinational.
module inc_half_adder #(
  parameter int W = 16
) (
  input  logic [W-1:0] a,
  output logic [W-1:0] s
);

  logic [W-1:0] c;   // carry into each bit; the carry out of the top bit is dropped

  assign c[0] = 1'b1;
  for (genvar i = 0; i < W; i++) begin : g_ha
    assign s[i]   = a[i] ^ c[i];
    if (i < W - 1) begin : g_c
      assign c[i+1] = a[i] & c[i];
    end
  end

endmodule
