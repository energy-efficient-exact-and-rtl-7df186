// systolic_array_tb: drives the bare array with inputs skewed by the
// testbench itself (row i and column j delayed by i and j cycles) and checks
// every accumulator once all operands have passed.
//   dut   default parameters (8 x 8, 8-bit signed, k = 7): compared with a
//         per-PE fold of the cell-level MAC reference model
//   dut_x 4 x 4 exact signed array: compared with the integer product
// Several products of different inner length run one after another without
// reset; each restarts the accumulators with its first beat.
module systolic_array_tb;
  import sa_pkg::*;
  import mac_ref_pkg::*;

  localparam int N = 8;
  localparam int NX = 4;
  localparam int MAXB = 12;

  int checks = 0;
  int failures = 0;
  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic [7:0]  a_west  [N];
  beat_ctl_t   ctl_west[N];
  logic [7:0]  b_north [N];
  logic [16:0] p       [N][N];
  logic [7:0]  xa_west [NX];
  beat_ctl_t   xctl_west[NX];
  logic [7:0]  xb_north[NX];
  logic [16:0] xp      [NX][NX];

  logic [7:0] ma [N][MAXB];
  logic [7:0] mb [MAXB][N];

  systolic_array dut (
    .clk(clk), .rst_n(rst_n), .a_west(a_west), .ctl_west(ctl_west),
    .b_north(b_north), .p(p)
  );
  systolic_array #(.N_DIM(NX), .K(0)) dut_x (
    .clk(clk), .rst_n(rst_n), .a_west(xa_west), .ctl_west(xctl_west),
    .b_north(xb_north), .p(xp)
  );

  task automatic run_product(int nb);
    for (int i = 0; i < N; i++)
      for (int t = 0; t < nb; t++) begin
        ma[i][t] = 8'($urandom);
        mb[t][i] = 8'($urandom);
      end
    for (int c = 0; c < nb + 2 * N; c++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        int t;
        t = c - i;
        ctl_west[i].valid = (t >= 0 && t < nb);
        ctl_west[i].first = (t == 0);
        a_west[i]  = (t >= 0 && t < nb) ? ma[i][t] : 8'h00;
        b_north[i] = (t >= 0 && t < nb) ? mb[t][i] : 8'h00;
        if (i < NX) begin
          xctl_west[i] = ctl_west[i];
          xa_west[i]   = a_west[i];
          xb_north[i]  = b_north[i];
        end
      end
    end
    @(negedge clk);
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        longint unsigned acc;
        longint sx;
        acc = 0;
        sx = 0;
        for (int t = 0; t < nb; t++) begin
          acc = mac_ref(8, 1'b1, 7, ma[i][t], mb[t][j], (t == 0) ? 0 : acc);
          sx += longint'($signed(ma[i][t])) * longint'($signed(mb[t][j]));
        end
        checks++;
        if (p[i][j] !== 17'(acc)) begin
          failures++;
          if (failures < 10) $display("FAIL k=7 p[%0d][%0d] got %h expected %h", i, j, p[i][j], acc);
        end
        if (i < NX && j < NX) begin
          checks++;
          if (xp[i][j] !== 17'(sx)) begin
            failures++;
            if (failures < 10) $display("FAIL exact p[%0d][%0d] got %h expected %h", i, j, xp[i][j], 17'(sx));
          end
        end
      end
  endtask

  initial begin
    rst_n = 1'b0;
    for (int i = 0; i < N; i++) begin
      a_west[i] = '0;
      b_north[i] = '0;
      ctl_west[i] = '0;
    end
    for (int i = 0; i < NX; i++) begin
      xa_west[i] = '0;
      xb_north[i] = '0;
      xctl_west[i] = '0;
    end
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    run_product(8);
    run_product(3);
    run_product(12);
    run_product(1);
    for (int r = 0; r < 10; r++) run_product(8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
