// sa_pkg: constants and types shared by the systolic-array matrix multiplier.
//
// The defaults describe the main configuration: an 8 x 8 output-stationary
// systolic array of 8-bit signed fused multiply-accumulate processing elements,
// each using approximate partial-product cells in its k = N-1 = 7 least
// significant columns. APPROX_K = 0 gives the exact design.
//
// acc_bits() gives the width of the accumulator (R_in / R_out) of one PE:
// 2N+1 bits for the signed PE and 2N bits for the unsigned PE, as in the
// R_in/R_out numbering of the PE diagrams.
//
// beat_ctl_t is the control that travels with every A operand through the
// array: valid marks a real operand pair, first marks the first beat of a new
// matrix product (the accumulator restarts from zero). This control is a
// choice of this design; the array description shows data only.
package sa_pkg;

  parameter int unsigned OPERAND_BITS = 8;  // N, bit width of a and b
  parameter int unsigned SA_DIM       = 8;  // array is SA_DIM x SA_DIM
  parameter int unsigned APPROX_K     = 7;  // approximation factor k = N-1

  typedef struct packed {
    logic valid;
    logic first;
  } beat_ctl_t;

  function automatic int unsigned acc_bits(int unsigned n, bit is_signed);
    return is_signed ? 2 * n + 1 : 2 * n;
  endfunction

endpackage
