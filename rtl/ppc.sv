// ppc: partial product cell (PPC) of the fused multiply-accumulate PE.
//
// The cell forms the partial product bit a_i & b_j and adds it to the sum
// bit arriving from the row above (s_in) and the carry arriving from the cell
// to its right (c_in). Purely combinational.
//
//   APPROX = 0  exact:        {c_out, s_out} = a_i*b_j + s_in + c_in
//   APPROX = 1  approximate:  s_out = NOR(NOR(s_in, c_in), a_i*b_j)
//                             c_out = a_i*b_j
//
// Both functions follow the cell's truth table and the Boolean expressions
// given for the approximate cell. The approximate cell is wrong in 5 of the
// 16 input cases (error distance -1 for s_in = c_in = 1 with a_i*b_j = 0 or 1,
// and +1 for a_i*b_j = 1 with s_in = c_in = 0). The exact cell is written as
// its arithmetic function; the particular gate netlist chosen for it is left
// to synthesis.
module ppc #(
  parameter bit APPROX = 1'b0
) (
  input  logic a_i,
  input  logic b_j,
  input  logic s_in,
  input  logic c_in,
  output logic s_out,
  output logic c_out
);

  logic pp;

  always_comb begin
    pp = a_i & b_j;
    if (APPROX) begin
      s_out = ~(~(s_in | c_in) | pp);
      c_out = pp;
    end else begin
      s_out = pp ^ s_in ^ c_in;
      c_out = (pp & s_in) | (pp & c_in) | (s_in & c_in);
    end
  end

endmodule
