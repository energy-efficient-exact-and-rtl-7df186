// half_adder_tb: exhaustive test of the one-bit half adder against a + b.
module half_adder_tb;
  int checks = 0;
  int failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic a, b, s, c;
  half_adder dut (.a(a), .b(b), .s(s), .c(c));

  initial begin
    for (int v = 0; v < 4; v++) begin
      {a, b} = 2'(v);
      #1;
      checks++;
      if ({c, s} !== 2'(int'(a) + int'(b))) begin
        failures++;
        $display("FAIL a=%b b=%b got %b%b", a, b, c, s);
      end
      @(posedge clk);
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
