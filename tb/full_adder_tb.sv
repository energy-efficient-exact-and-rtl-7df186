// full_adder_tb: exhaustive test of the one-bit full adder against a + b + ci.
module full_adder_tb;
  int checks = 0;
  int failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic a, b, ci, s, co;
  full_adder dut (.a(a), .b(b), .ci(ci), .s(s), .co(co));

  initial begin
    for (int v = 0; v < 8; v++) begin
      {a, b, ci} = 3'(v);
      #1;
      checks++;
      if ({co, s} !== 2'(int'(a) + int'(b) + int'(ci))) begin
        failures++;
        $display("FAIL a=%b b=%b ci=%b got %b%b", a, b, ci, co, s);
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
