// sa_sizes_tb: the small array sizes and both operand widths of the
// hardware comparison: 3 x 3 and 4 x 4 arrays of 4-bit and 8-bit signed PEs,
// each exact (k = 0) and approximate with k = N-1. (The 8 x 8 array is
// covered by sa_top_tb, dct_tb and edge_tb.) Every
// configuration runs in its own sa_size_check instance; results are checked
// against the cell-level model and the 3N-2 latency is checked for each size.
module sa_sizes_tb;
  localparam int NCFG = 8;

  int checks = 0;
  int failures = 0;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int   c_chk [NCFG];
  int   c_fail [NCFG];
  logic c_fin [NCFG];

  localparam int DIMS [2] = '{3, 4};

  for (genvar d = 0; d < 2; d++) begin : g_dim
    for (genvar w = 0; w < 2; w++) begin : g_bits
      localparam int NB = (w == 0) ? 4 : 8;
      for (genvar x = 0; x < 2; x++) begin : g_k
        localparam int IDX = d * 4 + w * 2 + x;
        sa_size_check #(
          .N_DIM(DIMS[d]), .N_BITS(NB), .K((x == 0) ? 0 : NB - 1)
        ) u_cfg (
          .clk(clk), .rst_n(rst_n), .checks(c_chk[IDX]),
          .failures(c_fail[IDX]), .finished(c_fin[IDX])
        );
      end
    end
  end

  initial begin
    bit all_done;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    all_done = 1'b0;
    while (!all_done) begin
      @(posedge clk);
      all_done = 1'b1;
      for (int c = 0; c < NCFG; c++) if (!c_fin[c]) all_done = 1'b0;
    end
    for (int c = 0; c < NCFG; c++) begin
      checks += c_chk[c];
      failures += c_fail[c];
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
