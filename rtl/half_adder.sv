// half_adder: one-bit half adder, {c, s} = a + b.
//
// Used on the left edge of the fused MAC PE: in the unsigned PE it starts
// the edge carry chain, in the signed PE it adds the correction constant at
// column 2N-1. Combinational.
module half_adder (
  input  logic a,
  input  logic b,
  output logic s,
  output logic c
);

  always_comb begin
    s = a ^ b;
    c = a & b;
  end

endmodule
