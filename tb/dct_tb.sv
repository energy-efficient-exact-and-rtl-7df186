// dct_tb: 8 x 8 two-dimensional integer DCT of image blocks on the systolic
// array, with approximation factor k = 2 (the setting used for image
// compression) against the exact array.
//
// The transform matrix C is the 8-point integer DCT of HEVC (rows scaled by
// 64*sqrt(8), all entries fit signed 8 bits). Pixels are level-shifted to
// -128..127. Pass 1 computes Y1 = C * X (17-bit results); Y1 is shifted right
// by 9 and saturated to 8 bits; pass 2 computes Y = Y1' * C^T. Every result
// of both arrays is checked: the exact array against integer arithmetic, the
// approximate one against a fold of the cell-level MAC model. The testbench
// then reconstructs both pixel blocks with a floating-point inverse transform
// and prints the PSNR of the approximate reconstruction against the exact one.
module dct_tb;
  import sa_pkg::*;
  import mac_ref_pkg::*;

  localparam int N = 8;
  localparam int KAPX = 2;
  localparam int NBLK = 6;
  localparam int C [N][N] = '{
    '{64,  64,  64,  64,  64,  64,  64,  64},
    '{89,  75,  50,  18, -18, -50, -75, -89},
    '{83,  36, -36, -83, -83, -36,  36,  83},
    '{75, -18, -89, -50,  50,  89,  18, -75},
    '{64, -64, -64,  64,  64, -64, -64,  64},
    '{50, -89,  18,  75, -75, -18,  89, -50},
    '{36, -83,  83, -36, -36,  83, -83,  36},
    '{18, -50,  75, -89,  89, -75,  50, -18}};

  int checks = 0;
  int failures = 0;
  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic        in_valid, in_first, in_last;
  logic [7:0]  a_col [N];    // A operands of the approximate array
  logic [7:0]  a_col_x [N];  // A operands of the exact array (differ in pass 2)
  logic [7:0]  b_row [N];    // B operands, shared
  logic        done_a, done_x;
  logic [16:0] p_a [N][N];
  logic [16:0] p_x [N][N];

  sa_top #(.K(KAPX)) dut_apx (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_first(in_first),
    .in_last(in_last), .a_col(a_col), .b_row(b_row), .done(done_a), .p(p_a)
  );
  sa_top #(.K(0)) dut_exact (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_first(in_first),
    .in_last(in_last), .a_col(a_col_x), .b_row(b_row), .done(done_x), .p(p_x)
  );

  // operands of the two arrays differ in pass 2, so each gets its own copy
  logic [7:0] ma_a [N][N], mb_a [N][N], ma_x [N][N], mb_x [N][N];
  int res_a [N][N], res_x [N][N];


  task automatic multiply();
    for (int t = 0; t < N; t++) begin
      @(negedge clk);
      in_valid = 1'b1;
      in_first = (t == 0);
      in_last  = (t == N - 1);
      for (int i = 0; i < N; i++) begin
        a_col[i]   = ma_a[i][t];
        a_col_x[i] = ma_x[i][t];
        b_row[i]   = mb_a[t][i];
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
        for (int t = 0; t < N; t++) begin
          acc = mac_ref(8, 1'b1, KAPX, ma_a[i][t], mb_a[t][j], (t == 0) ? 0 : acc);
          ex += longint'($signed(ma_x[i][t])) * longint'($signed(mb_x[t][j]));
        end
        checks += 3;
        if (p_a[i][j] !== 17'(acc)) failures++;
        if (p_x[i][j] !== 17'(ex)) failures++;
        if (done_x !== 1'b1) failures++;
        res_a[i][j] = int'($signed(p_a[i][j]));
        res_x[i][j] = int'($signed(p_x[i][j]));
      end
  endtask

  function automatic logic [7:0] sat8(int v);
    return (v > 127) ? 8'd127 : (v < -128) ? 8'h80 : 8'(v);
  endfunction

  initial begin
    real se, se_orig;
    int pix [N][N];
    se = 0.0;
    se_orig = 0.0;
    rst_n = 1'b0;
    in_valid = 1'b0;
    in_first = 1'b0;
    in_last = 1'b0;
    for (int i = 0; i < N; i++) begin
      a_col[i] = '0;
      a_col_x[i] = '0;
      b_row[i] = '0;
    end
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int blk = 0; blk < NBLK; blk++) begin
      // image-like block: gradient plus noise, 0..255
      for (int y = 0; y < N; y++)
        for (int x = 0; x < N; x++) begin
          int v;
          v = 40 + blk * 30 + 9 * x + 5 * y + int'($urandom % 17) - 8;
          pix[y][x] = (v < 0) ? 0 : (v > 255) ? 255 : v;
        end
      // pass 1: Y1 = C * (X - 128)
      for (int i = 0; i < N; i++)
        for (int t = 0; t < N; t++) begin
          ma_a[i][t] = 8'(C[i][t]);
          ma_x[i][t] = 8'(C[i][t]);
          mb_a[i][t] = 8'(pix[i][t] - 128);
          mb_x[i][t] = 8'(pix[i][t] - 128);
        end
      multiply();
      // pass 2: Y = (Y1 >> 9) * C^T
      for (int i = 0; i < N; i++)
        for (int t = 0; t < N; t++) begin
          ma_a[i][t] = sat8(res_a[i][t] >>> 9);
          ma_x[i][t] = sat8(res_x[i][t] >>> 9);
          mb_a[t][i] = 8'(C[i][t]);
          mb_x[t][i] = 8'(C[i][t]);
        end
      multiply();
      // floating-point inverse: X = C^T * Y * C * 512 / 32768^2
      for (int y = 0; y < N; y++)
        for (int x = 0; x < N; x++) begin
          real ra, rx;
          ra = 0.0;
          rx = 0.0;
          for (int u = 0; u < N; u++)
            for (int v = 0; v < N; v++) begin
              ra += real'(C[u][y]) * real'(res_a[u][v]) * real'(C[v][x]);
              rx += real'(C[u][y]) * real'(res_x[u][v]) * real'(C[v][x]);
            end
          ra = ra * 512.0 / (32768.0 * 32768.0) + 128.0;
          rx = rx * 512.0 / (32768.0 * 32768.0) + 128.0;
          se += (ra - rx) * (ra - rx);
          se_orig += (rx - real'(pix[y][x])) * (rx - real'(pix[y][x]));
        end
    end
    begin
      real mse, mse_o;
      mse = se / real'(NBLK * N * N);
      mse_o = se_orig / real'(NBLK * N * N);
      if (mse > 0.0)
        $display("DCT k=%0d: PSNR of approximate vs exact reconstruction %.2f dB", KAPX,
                 10.0 * $log10(255.0 * 255.0 / mse));
      else
        $display("DCT k=%0d: approximate reconstruction identical to exact", KAPX);
      $display("DCT exact: PSNR of exact reconstruction vs original %.2f dB",
               10.0 * $log10(255.0 * 255.0 / mse_o));
    end
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
