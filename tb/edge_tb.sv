// edge_tb: Laplacian edge detection on the systolic array, approximation
// factor k = 4 against the exact array.
//
// A 10 x 10 synthetic image (a bright square with a soft edge and noise,
// pixel values halved to 0..127 so that they are non-negative signed 8-bit
// numbers) is filtered with two 3 x 3 Laplacian kernels. The convolution is
// mapped to matrix products in the usual way (im2col): for each of the 8
// output rows, A holds the 9 neighbourhood taps of the 8 output pixels
// (8 x 9), B holds the kernels as columns (9 x 8: 4-neighbour kernel, 8-
// neighbour kernel, zero elsewhere). The inner length is 9, longer than the
// array. Every result is checked, the exact array against integer
// arithmetic and the approximate array against a fold of the cell-level MAC
// model; the PSNR of the approximate edge map (|response| clipped to 255)
// against the exact one is printed.
module edge_tb;
  import sa_pkg::*;
  import mac_ref_pkg::*;

  localparam int N = 8;
  localparam int KAPX = 4;
  localparam int TAPS = 9;
  localparam int IMG = N + 2;
  localparam int LAP4 [TAPS] = '{0, 1, 0, 1, -4, 1, 0, 1, 0};
  localparam int LAP8 [TAPS] = '{1, 1, 1, 1, -8, 1, 1, 1, 1};

  int checks = 0;
  int failures = 0;
  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic        in_valid, in_first, in_last;
  logic [7:0]  a_col [N];
  logic [7:0]  b_row [N];
  logic        done_a, done_x;
  logic [16:0] p_a [N][N];
  logic [16:0] p_x [N][N];

  sa_top #(.K(KAPX)) dut_apx (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_first(in_first),
    .in_last(in_last), .a_col(a_col), .b_row(b_row), .done(done_a), .p(p_a)
  );
  sa_top #(.K(0)) dut_exact (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_first(in_first),
    .in_last(in_last), .a_col(a_col), .b_row(b_row), .done(done_x), .p(p_x)
  );

  int img [IMG][IMG];
  logic [7:0] ma [N][TAPS];
  logic [7:0] mb [TAPS][N];

  initial begin
    real se;
    se = 0.0;
    rst_n = 1'b0;
    in_valid = 1'b0;
    in_first = 1'b0;
    in_last = 1'b0;
    for (int i = 0; i < N; i++) begin
      a_col[i] = '0;
      b_row[i] = '0;
    end
    for (int y = 0; y < IMG; y++)
      for (int x = 0; x < IMG; x++) begin
        int v;
        v = (x >= 3 && x <= 7 && y >= 2 && y <= 6) ? 220 : 30;
        if (x == 3 || x == 7) v = (v + 30) / 2;
        v += int'($urandom % 21) - 10;
        img[y][x] = ((v < 0) ? 0 : (v > 255) ? 255 : v) / 2;
      end
    for (int t = 0; t < TAPS; t++)
      for (int j = 0; j < N; j++)
        mb[t][j] = (j == 0) ? 8'(LAP4[t]) : (j == 1) ? 8'(LAP8[t]) : 8'h00;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < N; r++) begin
      for (int i = 0; i < N; i++)
        for (int t = 0; t < TAPS; t++)
          ma[i][t] = 8'(img[r + t / 3][i + t % 3]);
      for (int t = 0; t < TAPS; t++) begin
        @(negedge clk);
        in_valid = 1'b1;
        in_first = (t == 0);
        in_last  = (t == TAPS - 1);
        for (int i = 0; i < N; i++) begin
          a_col[i] = ma[i][t];
          b_row[i] = mb[t][i];
        end
      end
      @(negedge clk);
      in_valid = 1'b0;
      in_first = 1'b0;
      in_last  = 1'b0;
      while (!done_a) @(negedge clk);
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          longint unsigned acc;
          longint ex;
          acc = 0;
          ex = 0;
          for (int t = 0; t < TAPS; t++) begin
            acc = mac_ref(8, 1'b1, KAPX, ma[i][t], mb[t][j], (t == 0) ? 0 : acc);
            ex += longint'($signed(ma[i][t])) * longint'($signed(mb[t][j]));
          end
          checks += 2;
          if (p_a[i][j] !== 17'(acc)) failures++;
          if (p_x[i][j] !== 17'(ex)) failures++;
          if (j < 2) begin
            int ea, exx;
            ea  = int'($signed(p_a[i][j]));
            exx = int'($signed(p_x[i][j]));
            ea  = (ea < 0) ? -ea : ea;
            exx = (exx < 0) ? -exx : exx;
            ea  = (ea > 255) ? 255 : ea;
            exx = (exx > 255) ? 255 : exx;
            se += real'((ea - exx) * (ea - exx));
          end
        end
      checks++;
      if (done_x !== 1'b1) failures++;
    end
    if (se > 0.0)
      $display("Laplacian k=%0d: PSNR of approximate vs exact edge map %.2f dB", KAPX,
               10.0 * $log10(255.0 * 255.0 * real'(2 * N * N) / se));
    else
      $display("Laplacian k=%0d: approximate edge map identical to exact", KAPX);
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
