// sa_top: matrix multiplier P = A x B on an N_DIM x N_DIM systolic array of
// fused multiply-accumulate PEs (exact, or approximate in the K lowest
// product columns).
//
// Interface. The caller streams the inner dimension one beat per cycle: in
// beat t it drives a_col[i] = A[i][t] for every row i and b_row[j] = B[t][j]
// for every column j, with in_valid high. in_first marks beat 0 of a product
// and in_last its final beat; a product may have any number of beats (the
// inner dimension is not limited to N_DIM) and in_valid may drop between
// beats. Operands are N_BITS wide, two's complement when SIGNED.
//
// Inside, row i of A (with its valid/first control) and column j of B pass
// through skew buffers of i and j cycles before entering the array, as in
// the classic systolic matrix multiplier; each PE then keeps its own P_ij.
// A delay line of 2*N_DIM-1 cycles on the last-beat flag raises done for one
// cycle once PE (N_DIM-1, N_DIM-1) has accumulated its last beat; at that
// point every p[i][j] holds the result. With N_DIM back-to-back beats done
// rises at the clock edge that ends cycle 3*N_DIM-2, counting the cycle that
// presents the first beat as cycle 1: the 3N-2 latency of the conventional
// systolic array. p[i][j] stays valid until the first beat of the next
// product reaches PE (i, j), so the caller may read p while done is high and
// present the next product's first beat in that same cycle.
//
// The skew buffers and array follow the classic design; the beat control,
// the done flag and the streaming interface are this design's own choices.
module sa_top
  import sa_pkg::*;
#(
  parameter  int unsigned N_DIM  = SA_DIM,
  parameter  int unsigned N_BITS = OPERAND_BITS,
  parameter  bit          SIGNED = 1'b1,
  parameter  int unsigned K      = APPROX_K,
  localparam int unsigned ACC_W  = acc_bits(N_BITS, SIGNED)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic              in_first,
  input  logic              in_last,
  input  logic [N_BITS-1:0] a_col [N_DIM],
  input  logic [N_BITS-1:0] b_row [N_DIM],
  output logic              done,
  output logic [ACC_W-1:0]  p     [N_DIM][N_DIM]
);

  localparam int unsigned ROW_W = N_BITS + $bits(beat_ctl_t);

  logic [N_BITS-1:0] a_west   [N_DIM];
  beat_ctl_t         ctl_west [N_DIM];
  logic [N_BITS-1:0] b_north  [N_DIM];
  beat_ctl_t         ctl_in;

  assign ctl_in.valid = in_valid;
  assign ctl_in.first = in_valid & in_first;

  for (genvar i = 0; i < N_DIM; i++) begin : g_skew
    logic [ROW_W-1:0] row_q;

    skew_buffer #(.WIDTH(ROW_W), .DEPTH(i)) u_skew_a (
      .clk(clk), .rst_n(rst_n), .d({ctl_in, a_col[i]}), .q(row_q)
    );
    assign {ctl_west[i], a_west[i]} = row_q;

    skew_buffer #(.WIDTH(N_BITS), .DEPTH(i)) u_skew_b (
      .clk(clk), .rst_n(rst_n), .d(b_row[i]), .q(b_north[i])
    );
  end

  systolic_array #(
    .N_DIM(N_DIM), .N_BITS(N_BITS), .SIGNED(SIGNED), .K(K)
  ) u_array (
    .clk(clk), .rst_n(rst_n),
    .a_west(a_west), .ctl_west(ctl_west), .b_north(b_north), .p(p)
  );

  skew_buffer #(.WIDTH(1), .DEPTH(2 * N_DIM - 1)) u_done_delay (
    .clk(clk), .rst_n(rst_n), .d(in_valid & in_last), .q(done)
  );

  // a first or last marker is only meaningful on a valid beat
  a_marker_on_valid : assert property (
    @(posedge clk) disable iff (!rst_n) (in_first || in_last) |-> in_valid
  ) else $error("in_first/in_last asserted without in_valid");

endmodule
