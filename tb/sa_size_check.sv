// sa_size_check: testbench helper that builds one sa_top configuration,
// streams NPROD random products through it (inner length 1 .. 2*N_DIM, with
// occasional idle cycles) and compares every result with the cell-level
// model of mac_ref_pkg folded over the beats. For N_DIM back-to-back beats it
// also checks the 3N-2 latency. It reports through its output ports and
// raises finished when done.
module sa_size_check
  import mac_ref_pkg::*;
#(
  parameter int N_DIM  = 4,
  parameter int N_BITS = 8,
  parameter int K      = 0,
  parameter int NPROD  = 12
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic finished
);
  localparam int ACC_W = 2 * N_BITS + 1;
  localparam int MAXB = 2 * N_DIM;

  logic              in_valid, in_first, in_last, done;
  logic [N_BITS-1:0] a_col [N_DIM];
  logic [N_BITS-1:0] b_row [N_DIM];
  logic [ACC_W-1:0]  p [N_DIM][N_DIM];
  logic [N_BITS-1:0] ma [N_DIM][MAXB];
  logic [N_BITS-1:0] mb [MAXB][N_DIM];

  sa_top #(.N_DIM(N_DIM), .N_BITS(N_BITS), .SIGNED(1'b1), .K(K)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_first(in_first),
    .in_last(in_last), .a_col(a_col), .b_row(b_row), .done(done), .p(p)
  );

  int edges = 0;
  always @(posedge clk) edges++;

  initial begin
    checks = 0;
    failures = 0;
    finished = 1'b0;
    in_valid = 1'b0;
    in_first = 1'b0;
    in_last = 1'b0;
    for (int i = 0; i < N_DIM; i++) begin
      a_col[i] = '0;
      b_row[i] = '0;
    end
    @(posedge rst_n);
    @(negedge clk);
    for (int n = 0; n < NPROD; n++) begin
      int nb, first_edge;
      bit gap;
      nb = (n == 0) ? N_DIM : 1 + int'($urandom % MAXB);
      gap = 1'b0;
      for (int t = 0; t < nb; t++)
        for (int i = 0; i < N_DIM; i++) begin
          ma[i][t] = N_BITS'($urandom);
          mb[t][i] = N_BITS'($urandom);
        end
      for (int t = 0; t < nb; t++) begin
        if (n > 0 && t > 0 && ($urandom % 4) == 0) begin
          in_valid = 1'b0;
          in_first = 1'b0;
          in_last = 1'b0;
          gap = 1'b1;
          @(negedge clk);
        end
        in_valid = 1'b1;
        in_first = (t == 0);
        in_last = (t == nb - 1);
        for (int i = 0; i < N_DIM; i++) begin
          a_col[i] = ma[i][t];
          b_row[i] = mb[t][i];
        end
        if (t == 0) first_edge = edges + 1;
        @(negedge clk);
      end
      in_valid = 1'b0;
      in_first = 1'b0;
      in_last = 1'b0;
      while (!done) @(negedge clk);
      if (nb == N_DIM && !gap) begin
        checks++;
        if (edges - first_edge + 1 != 3 * N_DIM - 2) begin
          failures++;
          $display("FAIL %0dx%0d %0d-bit: latency %0d", N_DIM, N_DIM, N_BITS, edges - first_edge + 1);
        end
      end
      for (int i = 0; i < N_DIM; i++)
        for (int j = 0; j < N_DIM; j++) begin
          longint unsigned acc;
          acc = 0;
          for (int t = 0; t < nb; t++)
            acc = mac_ref(N_BITS, 1'b1, K, ma[i][t], mb[t][j], (t == 0) ? 0 : acc);
          checks++;
          if (p[i][j] !== ACC_W'(acc)) begin
            failures++;
            if (failures < 5)
              $display("FAIL %0dx%0d %0d-bit k=%0d p[%0d][%0d] got %h expected %h",
                       N_DIM, N_DIM, N_BITS, K, i, j, p[i][j], ACC_W'(acc));
          end
        end
      @(negedge clk);
    end
    finished = 1'b1;
  end
endmodule
