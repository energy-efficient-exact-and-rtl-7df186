// ppc_tb: exhaustive test of the exact and the approximate partial product
// cell. The exact cell is compared with a*b + c_in + s_in; the approximate
// cell with the cell truth table (mac_ref_pkg). The error pattern of the
// approximate cell (5 wrong cases out of 16) is counted as well.
module ppc_tb;
  import mac_ref_pkg::*;

  int checks = 0;
  int failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic a, b, s_in, c_in;
  logic s_ex, c_ex, s_ap, c_ap;

  ppc #(.APPROX(1'b0)) u_exact  (.a_i(a), .b_j(b), .s_in(s_in), .c_in(c_in), .s_out(s_ex), .c_out(c_ex));
  ppc #(.APPROX(1'b1)) u_approx (.a_i(a), .b_j(b), .s_in(s_in), .c_in(c_in), .s_out(s_ap), .c_out(c_ap));

  initial begin
    int wrong;
    int v;
    wrong = 0;
    for (int idx = 0; idx < 16; idx++) begin
      {a, b, c_in, s_in} = 4'(idx);
      #1;
      v = int'(a & b) + int'(c_in) + int'(s_in);
      checks++;
      if ({c_ex, s_ex} !== 2'(v)) begin
        failures++;
        $display("FAIL exact ppc idx=%0d got %b%b", idx, c_ex, s_ex);
      end
      checks++;
      if ({c_ap, s_ap} !== cell_ref(1'b0, 1'b1, a, b, c_in, s_in)) begin
        failures++;
        $display("FAIL approx ppc idx=%0d got %b%b", idx, c_ap, s_ap);
      end
      if (2 * int'(c_ap) + int'(s_ap) != v) wrong++;
      @(posedge clk);
    end
    checks++;
    if (wrong != 5) begin
      failures++;
      $display("FAIL approx ppc wrong in %0d cases, expected 5", wrong);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
