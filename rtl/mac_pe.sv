// mac_pe: fused multiply-accumulate processing element, r_out = a*b + r_in.
//
// Multiplication and accumulation are merged into one carry-ripple array of
// N x N partial-product cells, so the accumulator input is reduced together
// with the partial products instead of in a separate adder.
//
// Geometry. Cell (i, j) handles partial product a_i*b_j and sits in column
// (bit weight) i+j of row j. Within a row carries ripple from cell i to cell
// i+1; sums go down to the cell of the same column in the next row; a_i moves
// diagonally and b_j horizontally (plain wires here). Row 0 takes its sum
// inputs from r_in[N-1:0]; the carry input of every row's right-most cell is 0.
// Each row ends on the left in an edge adder at column N+j that adds r_in[N+j],
// the carry of the row's left-most cell and the edge carry of the row above;
// its sum is the sum input of the next row's left-most cell.
// Outputs: r_out[j] = right-most sum of row j (j < N-1), r_out[N-1 .. 2N-2] =
// sums of the last row, r_out[2N-1] (and r_out[2N] when signed) from the edge.
//
// Unsigned (SIGNED = 0): all cells are PPCs, the row-0 edge cell is a half
// adder, the others full adders; r_in and r_out are 2N bits and
// r_out = (a*b + r_in) mod 2^(2N).
//
// Signed (SIGNED = 1, two's complement): cells with exactly one of i, j equal
// to N-1 are NPPCs (2N-2 of them, N^2-2N+2 PPCs); a constant 1 enters the
// row-0 edge full adder (column N) and a half adder at column 2N-1, which with
// two full adders at columns 2N-1 and 2N closes the last row. r_in and r_out
// are 2N+1 bits and r_out = (a*b + r_in) mod 2^(2N+1).
// With only those two constants the array computes a*b + r_in + 2^(2N); this
// design adds the third Baugh-Wooley constant (weight 2^(2N)) by inverting the
// column-2N sum so that bit 2N is the true sign-extended result. That
// inversion is this design's choice.
//
// Approximation: every cell in a column below K (i + j < K) uses the
// approximate PPC/NPPC; K = 0 gives the exact PE. Edge adders are always exact.
//
// Purely combinational; the systolic array registers around it (sa_pe).
module mac_pe
  import sa_pkg::*;
#(
  parameter  int unsigned N      = OPERAND_BITS,
  parameter  bit          SIGNED = 1'b1,
  parameter  int unsigned K      = APPROX_K,
  localparam int unsigned ACC_W  = acc_bits(N, SIGNED)
) (
  input  logic [N-1:0]     a,
  input  logic [N-1:0]     b,
  input  logic [ACC_W-1:0] r_in,
  output logic [ACC_W-1:0] r_out
);

  logic msb_sum;  // column-2N sum of the signed PE

  for (genvar j = 0; j < N; j++) begin : g_row
    logic e_s;  // edge adder sum (column N+j)
    logic e_c;  // edge adder carry (into column N+j+1)

    for (genvar i = 0; i < N; i++) begin : g_col
      localparam bit APX = ((i + j) < K);
      localparam bit NEG = SIGNED && ((i == N - 1) != (j == N - 1));
      logic s_in, c_in, s_out, c_out;

      if (j == 0) begin : g_sin_acc
        assign s_in = r_in[i];
      end else if (i < N - 1) begin : g_sin_up
        assign s_in = g_row[j-1].g_col[i+1].s_out;
      end else begin : g_sin_edge
        assign s_in = g_row[j-1].e_s;
      end

      if (i == 0) begin : g_cin_zero
        assign c_in = 1'b0;
      end else begin : g_cin_ripple
        assign c_in = g_row[j].g_col[i-1].c_out;
      end

      if (NEG) begin : g_nppc
        nppc #(.APPROX(APX)) u_cell (
          .a_i(a[i]), .b_j(b[j]), .s_in(s_in), .c_in(c_in),
          .s_out(s_out), .c_out(c_out)
        );
      end else begin : g_ppc
        ppc #(.APPROX(APX)) u_cell (
          .a_i(a[i]), .b_j(b[j]), .s_in(s_in), .c_in(c_in),
          .s_out(s_out), .c_out(c_out)
        );
      end
    end

    if (!SIGNED) begin : g_edge_u
      if (j == 0) begin : g_ha
        half_adder u_ha (
          .a(r_in[N]), .b(g_col[N-1].c_out), .s(e_s), .c(e_c)
        );
      end else begin : g_fa
        full_adder u_fa (
          .a(r_in[N+j]), .b(g_row[j-1].e_c), .ci(g_col[N-1].c_out),
          .s(e_s), .co(e_c)
        );
      end
    end else begin : g_edge_s
      if (j == 0) begin : g_fa_const
        full_adder u_fa (
          .a(r_in[N]), .b(1'b1), .ci(g_col[N-1].c_out), .s(e_s), .co(e_c)
        );
      end else if (j < N - 1) begin : g_fa
        full_adder u_fa (
          .a(r_in[N+j]), .b(g_row[j-1].e_c), .ci(g_col[N-1].c_out),
          .s(e_s), .co(e_c)
        );
      end else begin : g_last
        logic h_s, h_c, top_c;
        half_adder u_ha (
          .a(1'b1), .b(g_row[j-1].e_c), .s(h_s), .c(h_c)
        );
        full_adder u_fa_lo (
          .a(r_in[2*N-1]), .b(h_s), .ci(g_col[N-1].c_out), .s(e_s), .co(e_c)
        );
        // top_c has weight 2^(2N+1) and falls outside the accumulator
        full_adder u_fa_hi (
          .a(r_in[2*N]), .b(h_c), .ci(e_c), .s(msb_sum), .co(top_c)
        );
      end
    end
  end

  for (genvar j = 0; j < N - 1; j++) begin : g_out_low
    assign r_out[j] = g_row[j].g_col[0].s_out;
  end
  for (genvar i = 0; i < N; i++) begin : g_out_last
    assign r_out[N-1+i] = g_row[N-1].g_col[i].s_out;
  end
  assign r_out[2*N-1] = g_row[N-1].e_s;

  if (SIGNED) begin : g_msb
    assign r_out[2*N] = ~msb_sum;
  end else begin : g_no_msb
    assign msb_sum = 1'b0;
  end

endmodule
