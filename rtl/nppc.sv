// nppc: NAND-based partial product cell (NPPC) of the fused MAC PE.
//
// Used for the negatively weighted partial products of a signed
// (Baugh-Wooley style) multiplication: the cell adds the complemented
// partial product NOT(a_i & b_j) to the sum bit from above (s_in) and the
// carry from the right (c_in). Purely combinational.
//
//   APPROX = 0  exact:        {c_out, s_out} = NOT(a_i*b_j) + s_in + c_in
//   APPROX = 1  approximate:  s_out = NAND(s_in | c_in, NOT(a_i*b_j))
//                             c_out = (s_in | c_in) & NOT(a_i*b_j)
//
// Both functions follow the cell's truth table and Boolean expressions; the
// approximate cell errs in the same 5 of 16 cases as the approximate PPC.
// The exact cell is written as its arithmetic function.
module nppc #(
  parameter bit APPROX = 1'b0
) (
  input  logic a_i,
  input  logic b_j,
  input  logic s_in,
  input  logic c_in,
  output logic s_out,
  output logic c_out
);

  logic npp;
  logic any_in;

  always_comb begin
    npp    = ~(a_i & b_j);
    any_in = s_in | c_in;
    if (APPROX) begin
      s_out = ~(any_in & npp);
      c_out = any_in & npp;
    end else begin
      s_out = npp ^ s_in ^ c_in;
      c_out = (npp & s_in) | (npp & c_in) | (s_in & c_in);
    end
  end

endmodule
