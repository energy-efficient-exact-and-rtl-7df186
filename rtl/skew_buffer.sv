// skew_buffer: fixed delay line of DEPTH clock cycles on a WIDTH-bit bundle.
//
// Placed in front of the systolic array so that row i of A and column j of B
// enter i and j cycles late; together with the one-cycle hop between
// neighbouring PEs this makes A[i][t] and B[t][j] meet in PE (i, j) in the
// same cycle. The delay is DEPTH registers (DEPTH = 0 is a plain wire).
// Registers clear to zero on the asynchronous active-low reset, so valid
// flags carried through the buffer start inactive.
module skew_buffer #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);

  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_delay
    logic [WIDTH-1:0] stage [DEPTH];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int k = 0; k < DEPTH; k++) stage[k] <= '0;
      end else begin
        stage[0] <= d;
        for (int k = 1; k < DEPTH; k++) stage[k] <= stage[k-1];
      end
    end

    assign q = stage[DEPTH-1];
  end

endmodule
