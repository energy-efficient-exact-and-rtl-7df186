// systolic_array: N_DIM x N_DIM output-stationary grid of sa_pe cells.
//
// A operands (with their beat control) enter row i from the west edge and
// move east one PE per cycle; B operands enter column j from the north edge
// and move south one PE per cycle. PE (i, j) accumulates P_ij = sum_t
// A[i][t]*B[t][j] in place. Inputs must already be skewed: row i and column
// j delayed by i and j cycles (see skew_buffer / sa_top). Operands leaving
// the east and south edges are dropped.
//
// p[i][j] is the accumulator of PE (i, j), ACC_W bits, two's complement when
// SIGNED. Every PE uses the same approximation factor K.
module systolic_array
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
  input  logic [N_BITS-1:0] a_west   [N_DIM],
  input  beat_ctl_t         ctl_west [N_DIM],
  input  logic [N_BITS-1:0] b_north  [N_DIM],
  output logic [ACC_W-1:0]  p        [N_DIM][N_DIM]
);

  for (genvar i = 0; i < N_DIM; i++) begin : g_r
    for (genvar j = 0; j < N_DIM; j++) begin : g_c
      logic [N_BITS-1:0] a_i, b_i, a_o, b_o;
      beat_ctl_t         ctl_i, ctl_o;

      if (j == 0) begin : g_west
        assign a_i   = a_west[i];
        assign ctl_i = ctl_west[i];
      end else begin : g_link_h
        assign a_i   = g_r[i].g_c[j-1].a_o;
        assign ctl_i = g_r[i].g_c[j-1].ctl_o;
      end

      if (i == 0) begin : g_north
        assign b_i = b_north[j];
      end else begin : g_link_v
        assign b_i = g_r[i-1].g_c[j].b_o;
      end

      sa_pe #(.N_BITS(N_BITS), .SIGNED(SIGNED), .K(K)) u_pe (
        .clk    (clk),
        .rst_n  (rst_n),
        .a_in   (a_i),
        .ctl_in (ctl_i),
        .b_in   (b_i),
        .a_out  (a_o),
        .ctl_out(ctl_o),
        .b_out  (b_o),
        .p      (p[i][j])
      );
    end
  end

endmodule
