// sa_top_tb: end-to-end test of the matrix multiplier at its default size
// (8 x 8 array, 8-bit signed operands, approximation factor k = 7).
//
// The testbench streams random matrix pairs (A is 8 x T, B is T x 8) one beat
// per cycle and, when done rises, compares all 64 results with a reference
// built from the cell-level MAC model (mac_ref_pkg), folded over the T beats
// in order. It also measures:
//   latency   with N back-to-back beats, done must rise at the clock edge
//             that ends the (3N-2) = 22nd cycle, counting the cycle that
//             presents the first beat as the first
//   done      exactly one done pulse per product
// and counts that each mechanism occurred at least once: a product with
// idle cycles (in_valid low) between beats, a product started in the cycle
// done is high (hand-over without a gap), inner length above N, inner length
// below N, extreme operands (-128 / 127), and an approximate result that
// differs from the exact product.
module sa_top_tb;
  import sa_pkg::*;
  import mac_ref_pkg::*;

  localparam int N = SA_DIM;
  localparam int MAXB = 16;

  int checks = 0;
  int failures = 0;
  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic        in_valid, in_first, in_last;
  logic [7:0]  a_col [N];
  logic [7:0]  b_row [N];
  logic        done;
  logic [16:0] p [N][N];

  sa_top dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_first(in_first),
    .in_last(in_last), .a_col(a_col), .b_row(b_row), .done(done), .p(p)
  );

  int edges = 0;
  int done_pulses = 0;
  always @(posedge clk) begin
    edges++;
    if (done) done_pulses++;
  end

  // mechanism counters
  int n_bubbly = 0, n_handover = 0, n_long = 0, n_short = 0, n_extreme = 0;
  int n_approx_diff = 0, n_latency = 0, n_products = 0;

  logic [7:0] ma [N][MAXB];
  logic [7:0] mb [MAXB][N];

  task automatic check(string what, longint unsigned got, longint unsigned exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %h expected %h", what, got, exp);
    end
  endtask

  task automatic idle_inputs();
    in_valid = 1'b0;
    in_first = 1'b0;
    in_last  = 1'b0;
    for (int i = 0; i < N; i++) begin
      a_col[i] = 8'($urandom);  // ignored while in_valid is low
      b_row[i] = 8'($urandom);
    end
  endtask

  // Streams one product and waits for done. Called at a negedge; returns at
  // the negedge where done is high, after checking the results, so that the
  // next product may start in that same cycle.
  task automatic run_product(int nb, int bubble_pct, bit extreme);
    int first_edge;
    int waited;
    bit had_bubble;
    had_bubble = 1'b0;
    for (int t = 0; t < nb; t++)
      for (int i = 0; i < N; i++) begin
        if (extreme) begin
          ma[i][t] = ($urandom % 2) ? 8'h80 : 8'h7F;
          mb[t][i] = ($urandom % 2) ? 8'h80 : 8'h7F;
        end else begin
          ma[i][t] = 8'($urandom);
          mb[t][i] = 8'($urandom);
        end
      end
    for (int t = 0; t < nb; t++) begin
      if (t > 0 && bubble_pct > 0) begin
        while (($urandom % 100) < bubble_pct) begin
          idle_inputs();
          had_bubble = 1'b1;
          @(negedge clk);
        end
      end
      in_valid = 1'b1;
      in_first = (t == 0);
      in_last  = (t == nb - 1);
      for (int i = 0; i < N; i++) begin
        a_col[i] = ma[i][t];
        b_row[i] = mb[t][i];
      end
      if (t == 0) first_edge = edges + 1;
      @(negedge clk);
    end
    idle_inputs();
    waited = 0;
    while (!done && waited < 10 * N) begin
      @(negedge clk);
      waited++;
    end
    check("done rose", done, 1'b1);
    if (nb == N && !had_bubble) begin
      check("latency 3N-2", edges - first_edge + 1, 3 * N - 2);
      n_latency++;
    end
    // compare every accumulator
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        longint unsigned acc;
        longint ex;
        acc = 0;
        ex = 0;
        for (int t = 0; t < nb; t++) begin
          acc = mac_ref(8, 1'b1, APPROX_K, ma[i][t], mb[t][j], (t == 0) ? 0 : acc);
          ex += longint'($signed(ma[i][t])) * longint'($signed(mb[t][j]));
        end
        check("p", p[i][j], 17'(acc));
        if (17'(acc) != 17'(ex)) n_approx_diff++;
      end
    n_products++;
    if (had_bubble) n_bubbly++;
    if (nb > N) n_long++;
    if (nb < N) n_short++;
    if (extreme) n_extreme++;
  endtask

  task automatic require(string what, int count);
    checks++;
    if (count == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    rst_n = 1'b0;
    idle_inputs();
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    run_product(N, 0, 1'b0);            // plain product, latency check
    run_product(N, 0, 1'b0);            // starts in the done cycle
    n_handover++;
    run_product(N, 40, 1'b0);           // idle cycles between beats
    @(negedge clk);
    run_product(9, 0, 1'b0);            // 3x3 kernel length (9 taps)
    run_product(3, 20, 1'b0);
    run_product(N, 0, 1'b1);            // -128 / 127 only
    n_handover += 3;
    for (int r = 0; r < 30; r++) begin
      int nb;
      nb = 1 + ($urandom % MAXB);
      if ($urandom % 2) repeat (1 + $urandom % 4) @(negedge clk);
      else n_handover++;
      run_product(nb, ($urandom % 2) ? 30 : 0, ($urandom % 8) == 0);
    end
    repeat (3 * N) @(negedge clk);
    check("one done pulse per product", done_pulses, n_products);
    require("latency measured", n_latency);
    require("idle cycles between beats", n_bubbly);
    require("hand-over in the done cycle", n_handover);
    require("inner length above N", n_long);
    require("inner length below N", n_short);
    require("extreme operands", n_extreme);
    require("approximate result differing from exact", n_approx_diff);
    $display("products=%0d latency-checked=%0d bubbly=%0d handover=%0d long=%0d short=%0d extreme=%0d approx-differs=%0d",
             n_products, n_latency, n_bubbly, n_handover, n_long, n_short, n_extreme, n_approx_diff);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
