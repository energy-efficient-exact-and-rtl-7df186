// sa_pe_tb: checks one systolic-array cell (default parameters: 8-bit
// signed, k = 7) cycle by cycle against a model: a, b and the beat control
// are forwarded after one clock; the accumulator takes a*b + p on a valid
// beat, a*b + 0 on a first beat and holds otherwise. The MAC result is
// taken from the cell-level reference model (mac_ref_pkg).
module sa_pe_tb;
  import sa_pkg::*;
  import mac_ref_pkg::*;

  int checks = 0;
  int failures = 0;
  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic [7:0]  a_in, b_in, a_out, b_out;
  beat_ctl_t   ctl_in, ctl_out;
  logic [16:0] p;
  logic [16:0] p_exp;
  int holds, firsts, accums;

  sa_pe dut (
    .clk(clk), .rst_n(rst_n), .a_in(a_in), .ctl_in(ctl_in), .b_in(b_in),
    .a_out(a_out), .ctl_out(ctl_out), .b_out(b_out), .p(p)
  );

  task automatic check(string what, longint unsigned got, longint unsigned exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    holds = 0;
    firsts = 0;
    accums = 0;
    rst_n = 1'b0;
    a_in = '0;
    b_in = '0;
    ctl_in = '0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    check("reset p", p, 0);
    rst_n = 1'b1;
    p_exp = '0;
    for (int t = 0; t < 5000; t++) begin
      logic [7:0] a_q, b_q;
      beat_ctl_t  c_q;
      @(negedge clk);
      a_q = 8'($urandom);
      b_q = 8'($urandom);
      c_q.valid = ($urandom % 4) != 0;
      c_q.first = ($urandom % 8) == 0;
      a_in = a_q;
      b_in = b_q;
      ctl_in = c_q;
      if (c_q.valid) begin
        p_exp = 17'(mac_ref(8, 1'b1, 7, a_q, b_q, c_q.first ? 0 : p_exp));
        if (c_q.first) firsts++;
        else accums++;
      end else begin
        holds++;
      end
      @(negedge clk);
      check("a_out", a_out, a_q);
      check("b_out", b_out, b_q);
      check("ctl_out", ctl_out, c_q);
      check("p", p, p_exp);
      // put the next beat in the same cycle as this check
      a_in = 8'($urandom);
      ctl_in = '0;
    end
    checks++;
    if (holds == 0 || firsts == 0 || accums == 0) begin
      failures++;
      $display("FAIL a beat kind never occurred");
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
