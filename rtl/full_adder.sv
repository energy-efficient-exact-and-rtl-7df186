// full_adder: one-bit full adder, {co, s} = a + b + ci.
//
// Used on the left edge of the fused MAC PE, where the accumulator input
// bits above the partial-product array are added to the row carries and,
// in the signed PE, to the Baugh-Wooley correction constants. Combinational.
module full_adder (
  input  logic a,
  input  logic b,
  input  logic ci,
  output logic s,
  output logic co
);

  always_comb begin
    s  = a ^ b ^ ci;
    co = (a & b) | (a & ci) | (b & ci);
  end

endmodule
