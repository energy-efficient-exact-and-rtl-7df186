// skew_buffer_tb: checks the delay lines used to skew the array inputs.
// Four buffers (depth 0, 1, 3 and 7) see the same random stream; each output
// must equal the input DEPTH cycles earlier, and zero while the history
// still reaches back into reset.
module skew_buffer_tb;
  int checks = 0;
  int failures = 0;
  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic [7:0] d;
  logic [7:0] q0, q1, q3, q7;
  logic [7:0] hist [$];  // hist[0] = value sampled at the latest edge

  skew_buffer #(.WIDTH(8), .DEPTH(0)) u0 (.clk(clk), .rst_n(rst_n), .d(d), .q(q0));
  skew_buffer #(.WIDTH(8), .DEPTH(1)) u1 (.clk(clk), .rst_n(rst_n), .d(d), .q(q1));
  skew_buffer #(.WIDTH(8), .DEPTH(3)) u3 (.clk(clk), .rst_n(rst_n), .d(d), .q(q3));
  skew_buffer #(.WIDTH(8), .DEPTH(7)) u7 (.clk(clk), .rst_n(rst_n), .d(d), .q(q7));

  function automatic logic [7:0] past(int depth);
    // value sampled depth edges ago (depth >= 1); zero before reset release
    return (depth - 1 < hist.size()) ? hist[depth-1] : 8'h00;
  endfunction

  task automatic check(string what, logic [7:0] got, logic [7:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    rst_n = 1'b0;
    d = 8'hA5;
    repeat (3) @(posedge clk);
    @(negedge clk);
    check("reset depth1", q1, 8'h00);
    check("reset depth7", q7, 8'h00);
    d = 8'h00;
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      check("depth1", q1, past(1));
      check("depth3", q3, past(3));
      check("depth7", q7, past(7));
      d = 8'($urandom);
      #1;
      check("depth0", q0, d);
      @(posedge clk);
      hist.push_front(d);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
