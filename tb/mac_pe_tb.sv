// mac_pe_tb: self-checking test of the fused multiply-accumulate PE.
//
// Five configurations are instantiated side by side:
//   d8s7  8-bit signed,   k = 7 (default parameters)
//   d8s0  8-bit signed,   exact
//   d8u0  8-bit unsigned, exact
//   d4s3  4-bit signed,   k = 3
//   d4u3  4-bit unsigned, k = 3
// The exact PEs are compared with plain arithmetic (a*b + r_in modulo the
// accumulator width). The approximate PEs are compared with a cell-by-cell
// model built from the cell truth tables (mac_ref_pkg). The 4-bit PEs are
// tested exhaustively over a, b and r_in, the 8-bit PEs with random inputs
// plus corner values. The array is combinational; a clock only paces the test.
module mac_pe_tb;
  import mac_ref_pkg::*;

  int checks = 0;
  int failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [7:0]  a8, b8;
  logic [16:0] r8s, o8s7, o8s0;
  logic [15:0] r8u, o8u0;
  logic [3:0]  a4, b4;
  logic [8:0]  r4s, o4s3;
  logic [7:0]  r4u, o4u3;

  mac_pe                                   d8s7 (.a(a8), .b(b8), .r_in(r8s), .r_out(o8s7));
  mac_pe #(.N(8), .SIGNED(1'b1), .K(0))    d8s0 (.a(a8), .b(b8), .r_in(r8s), .r_out(o8s0));
  mac_pe #(.N(8), .SIGNED(1'b0), .K(0))    d8u0 (.a(a8), .b(b8), .r_in(r8u), .r_out(o8u0));
  mac_pe #(.N(4), .SIGNED(1'b1), .K(3))    d4s3 (.a(a4), .b(b4), .r_in(r4s), .r_out(o4s3));
  mac_pe #(.N(4), .SIGNED(1'b0), .K(3))    d4u3 (.a(a4), .b(b4), .r_in(r4u), .r_out(o4u3));

  task automatic check(string what, longint unsigned got, longint unsigned exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s: a=%h b=%h got %h expected %h", what, a8, b8, got, exp);
    end
  endtask

  task automatic check8();
    #1;
    check("8s exact", o8s0, exact_mac(8, 1'b1, a8, b8, r8s));
    check("8s k=7",   o8s7, mac_ref(8, 1'b1, 7, a8, b8, r8s));
    check("8u exact", o8u0, exact_mac(8, 1'b0, a8, b8, r8u));
  endtask

  initial begin
    int apx_differs;
    apx_differs = 0;
    // corner operands of the 8-bit PEs
    for (int ca = 0; ca < 6; ca++) begin
      for (int cb = 0; cb < 6; cb++) begin
        logic [7:0] corner [6];
        corner = '{8'h00, 8'h01, 8'h7F, 8'h80, 8'hFF, 8'h55};
        a8 = corner[ca];
        b8 = corner[cb];
        r8s = 17'h0;
        r8u = 16'h0;
        check8();
        r8s = 17'h1FFFF;
        r8u = 16'hFFFF;
        check8();
        r8s = 17'h10000;
        r8u = 16'h8000;
        check8();
      end
    end
    // random operands
    for (int t = 0; t < 20000; t++) begin
      a8  = 8'($urandom);
      b8  = 8'($urandom);
      r8s = 17'($urandom);
      r8u = 16'($urandom);
      check8();
      if (o8s7 != o8s0) apx_differs++;
    end
    // the approximate PE must actually differ from the exact one sometimes
    checks++;
    if (apx_differs == 0) begin
      failures++;
      $display("FAIL k=7 PE never differs from the exact PE");
    end
    // exhaustive 4-bit PEs
    for (int ia = 0; ia < 16; ia++) begin
      for (int ib = 0; ib < 16; ib++) begin
        for (int ir = 0; ir < 512; ir++) begin
          a4  = 4'(ia);
          b4  = 4'(ib);
          r4s = 9'(ir);
          r4u = 8'(ir);
          #1;
          check("4s k=3", o4s3, mac_ref(4, 1'b1, 3, a4, b4, r4s));
          if (ir < 256) check("4u k=3", o4u3, mac_ref(4, 1'b0, 3, a4, b4, r4u));
        end
      end
    end
    $display("approximate 8-bit signed PE (k=7) differed from exact in %0d of 20000 random cases",
             apx_differs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
