// sa_pe: one processing element of the output-stationary systolic array.
//
// Each cycle the cell passes its A operand (with its beat control) one
// column to the right and its B operand one row down through registers, and
// accumulates the product into its own result register p with the fused MAC
// array (mac_pe): p <= a*b + p. The result never moves; it is read straight
// from p, as the P_ij outputs of the array diagram.
//
// Beat control (own choice, the array description shows data only): the
// accumulator is updated only when ctl_in.valid is set, so idle cycles do not
// disturb it; when ctl_in.first is set the MAC adds the product to zero
// instead of p, which starts a new matrix product without a separate clear.
//
// Timing: operands arriving in cycle t reach the neighbours and update p at
// the end of cycle t. Asynchronous active-low reset clears all registers.
module sa_pe
  import sa_pkg::*;
#(
  parameter  int unsigned N_BITS = OPERAND_BITS,
  parameter  bit          SIGNED = 1'b1,
  parameter  int unsigned K      = APPROX_K,
  localparam int unsigned ACC_W  = acc_bits(N_BITS, SIGNED)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N_BITS-1:0] a_in,
  input  beat_ctl_t         ctl_in,
  input  logic [N_BITS-1:0] b_in,
  output logic [N_BITS-1:0] a_out,
  output beat_ctl_t         ctl_out,
  output logic [N_BITS-1:0] b_out,
  output logic [ACC_W-1:0]  p
);

  logic [ACC_W-1:0] r_in;
  logic [ACC_W-1:0] r_out;

  assign r_in = ctl_in.first ? '0 : p;

  mac_pe #(.N(N_BITS), .SIGNED(SIGNED), .K(K)) u_mac (
    .a(a_in), .b(b_in), .r_in(r_in), .r_out(r_out)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out   <= '0;
      b_out   <= '0;
      ctl_out <= '0;
      p       <= '0;
    end else begin
      a_out   <= a_in;
      b_out   <= b_in;
      ctl_out <= ctl_in;
      if (ctl_in.valid) p <= r_out;
    end
  end

endmodule
