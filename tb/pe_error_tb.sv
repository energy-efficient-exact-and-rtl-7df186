// pe_error_tb: error statistics of the approximate 8-bit PE over all 65536
// operand pairs (a, b) with R_in = 0, for approximation factors k = 2, 4, 5,
// 6 and 8, signed and unsigned.
//
// For every pair the PE output is first checked against the cell-level
// reference model. The error distance ED = approx - exact then gives
//   NMED = mean(|ED|) / max(|exact product|)
//   MRED = mean(|ED| / |exact|) over the pairs with a non-zero product.
// The statistics are printed next to the values the original error
// analysis reports; the run checks only that they are zero for the exact
// PE and never shrink as k grows (the normalisation of the original
// analysis is not stated, so its numbers are not used as pass limits).
module pe_error_tb;
  import mac_ref_pkg::*;

  localparam int NK = 5;
  localparam int KS [NK] = '{2, 4, 5, 6, 8};
  localparam real PAPER_NMED_U [NK] = '{0.0001, 0.0004, 0.0006, 0.0018, 0.0077};
  localparam real PAPER_MRED_U [NK] = '{0.0011, 0.0033, 0.0075, 0.0108, 0.0328};
  localparam real PAPER_NMED_S [NK] = '{0.0001, 0.0004, 0.0006, 0.0022, 0.0081};
  localparam real PAPER_MRED_S [NK] = '{0.0037, 0.0130, 0.0286, 0.0481, 0.2418};

  int checks = 0;
  int failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [7:0] a, b;
  logic [16:0] os [NK];
  logic [15:0] ou [NK];
  logic [16:0] os0;

  for (genvar g = 0; g < NK; g++) begin : g_k
    mac_pe #(.N(8), .SIGNED(1'b1), .K(KS[g])) u_s (.a(a), .b(b), .r_in(17'd0), .r_out(os[g]));
    mac_pe #(.N(8), .SIGNED(1'b0), .K(KS[g])) u_u (.a(a), .b(b), .r_in(16'd0), .r_out(ou[g]));
  end
  mac_pe #(.N(8), .SIGNED(1'b1), .K(0)) u_exact (.a(a), .b(b), .r_in(17'd0), .r_out(os0));

  initial begin
    real sum_ed_s [NK], sum_red_s [NK], sum_ed_u [NK], sum_red_u [NK];
    real sum_ed_0, nmed_s [NK], nmed_u [NK];
    int nz_s, nz_u;
    for (int g = 0; g < NK; g++) begin
      sum_ed_s[g] = 0.0; sum_red_s[g] = 0.0; sum_ed_u[g] = 0.0; sum_red_u[g] = 0.0;
    end
    sum_ed_0 = 0.0;
    nz_s = 0;
    nz_u = 0;
    for (int ia = 0; ia < 256; ia++) begin
      for (int ib = 0; ib < 256; ib++) begin
        longint ex_s, ex_u;
        a = 8'(ia);
        b = 8'(ib);
        #1;
        ex_s = longint'($signed(a)) * longint'($signed(b));
        ex_u = longint'(ia) * longint'(ib);
        if (ex_s != 0) nz_s++;
        if (ex_u != 0) nz_u++;
        checks++;
        if (os0 !== 17'(ex_s)) failures++;
        sum_ed_0 += (os0 == 17'(ex_s)) ? 0.0 : 1.0;
        for (int g = 0; g < NK; g++) begin
          longint ap_s, ap_u, ed_s, ed_u;
          checks += 2;
          if (os[g] !== 17'(mac_ref(8, 1'b1, KS[g], a, b, 0))) failures++;
          if (ou[g] !== 16'(mac_ref(8, 1'b0, KS[g], a, b, 0))) failures++;
          ap_s = longint'($signed(os[g]));
          ap_u = longint'(ou[g]);
          ed_s = (ap_s > ex_s) ? ap_s - ex_s : ex_s - ap_s;
          ed_u = (ap_u > ex_u) ? ap_u - ex_u : ex_u - ap_u;
          sum_ed_s[g] += real'(ed_s);
          sum_ed_u[g] += real'(ed_u);
          if (ex_s != 0) sum_red_s[g] += real'(ed_s) / real'((ex_s < 0) ? -ex_s : ex_s);
          if (ex_u != 0) sum_red_u[g] += real'(ed_u) / real'(ex_u);
        end
      end
      @(posedge clk);
    end
    $display("k   unsigned NMED (orig)    MRED (orig)      signed NMED (orig)    MRED (orig)");
    for (int g = 0; g < NK; g++) begin
      nmed_s[g] = sum_ed_s[g] / 65536.0 / 16384.0;
      nmed_u[g] = sum_ed_u[g] / 65536.0 / 65025.0;
      $display("%0d   %8.5f (%6.4f)   %8.5f (%6.4f)   %8.5f (%6.4f)   %8.5f (%6.4f)", KS[g],
               nmed_u[g], PAPER_NMED_U[g], sum_red_u[g] / real'(nz_u), PAPER_MRED_U[g],
               nmed_s[g], PAPER_NMED_S[g], sum_red_s[g] / real'(nz_s), PAPER_MRED_S[g]);
    end
    checks++;
    if (sum_ed_0 != 0.0) failures++;
    for (int g = 1; g < NK; g++) begin
      checks += 2;
      if (nmed_s[g] < nmed_s[g-1]) begin
        failures++;
        $display("FAIL signed NMED shrinks from k=%0d to k=%0d", KS[g-1], KS[g]);
      end
      if (nmed_u[g] < nmed_u[g-1]) begin
        failures++;
        $display("FAIL unsigned NMED shrinks from k=%0d to k=%0d", KS[g-1], KS[g]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
