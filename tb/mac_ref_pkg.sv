// mac_ref_pkg: reference models used by the testbenches.
//
// cell_ref() gives the {carry, sum} of a partial-product cell. Exact cells
// are computed arithmetically; approximate cells are looked up in constant
// tables transcribed from the cell truth table (index = {a, b, c_in, s_in}).
//
// mac_ref() evaluates the fused MAC array cell by cell with those cell
// models (row-by-row loops over plain bit arrays), for any width up to 16
// bits, signed or unsigned, any approximation factor k.
//
// exact_mac() is the plain arithmetic result a*b + r reduced to the
// accumulator width.
package mac_ref_pkg;

  // approximate cell outputs per input index {a, b, c_in, s_in}
  localparam logic [15:0] PPC_APX_C  = 16'b1111_0000_0000_0000;
  localparam logic [15:0] PPC_APX_S  = 16'b0000_1110_1110_1110;
  localparam logic [15:0] NPPC_APX_C = 16'b0000_1110_1110_1110;
  localparam logic [15:0] NPPC_APX_S = 16'b1111_0001_0001_0001;

  function automatic logic [1:0] cell_ref(bit neg, bit apx, bit a, bit b,
                                          bit c_in, bit s_in);
    int unsigned idx;
    int unsigned v;
    idx = {28'd0, a, b, c_in, s_in};
    if (apx) begin
      if (neg) return {NPPC_APX_C[idx], NPPC_APX_S[idx]};
      else     return {PPC_APX_C[idx],  PPC_APX_S[idx]};
    end
    v = (neg ? int'(!(a && b)) : int'(a && b)) + int'(c_in) + int'(s_in);
    return v[1:0];
  endfunction

  function automatic longint unsigned acc_mask(int n, bit sgn);
    int w;
    w = sgn ? 2 * n + 1 : 2 * n;
    return (64'd1 << w) - 64'd1;
  endfunction

  function automatic longint unsigned exact_mac(int n, bit sgn,
                                                longint unsigned a,
                                                longint unsigned b,
                                                longint unsigned r);
    longint sa, sb;
    sa = longint'(a);
    sb = longint'(b);
    if (sgn) begin
      if (a[n-1]) sa = sa - (longint'(1) << n);
      if (b[n-1]) sb = sb - (longint'(1) << n);
    end
    return longint'(sa * sb + longint'(r)) & acc_mask(n, sgn);
  endfunction

  function automatic longint unsigned mac_ref(int n, bit sgn, int k,
                                              longint unsigned a,
                                              longint unsigned b,
                                              longint unsigned r);
    bit s[16][16];
    bit c[16][16];
    bit es[16];
    bit ec[16];
    bit sin, cin, neg, apx;
    logic [1:0] cs;
    int v;
    longint unsigned res;
    for (int j = 0; j < n; j++) begin
      for (int i = 0; i < n; i++) begin
        if (j == 0) sin = r[i];
        else if (i < n - 1) sin = s[j-1][i+1];
        else sin = es[j-1];
        cin = (i == 0) ? 1'b0 : c[j][i-1];
        neg = sgn && ((i == n - 1) != (j == n - 1));
        apx = (i + j) < k;
        cs = cell_ref(neg, apx, a[i], b[j], cin, sin);
        c[j][i] = cs[1];
        s[j][i] = cs[0];
      end
      // edge adder of row j at column n+j
      if (!sgn) begin
        v = int'(r[n+j]) + int'(c[j][n-1]) + ((j == 0) ? 0 : int'(ec[j-1]));
        es[j] = v[0];
        ec[j] = v[1];
      end else if (j < n - 1) begin
        v = int'(r[n+j]) + int'(c[j][n-1]) + ((j == 0) ? 1 : int'(ec[j-1]));
        es[j] = v[0];
        ec[j] = v[1];
      end
    end
    res = 0;
    for (int j = 0; j < n - 1; j++) res[j] = s[j][0];
    for (int i = 0; i < n; i++) res[n-1+i] = s[n-1][i];
    if (!sgn) begin
      res[2*n-1] = es[n-1];
    end else begin
      // columns 2n-1 and 2n: remaining bits plus constants 2^(2n-1), 2^(2n)
      v = int'(r[2*n-1]) + int'(c[n-1][n-1]) + int'(ec[n-2]) + 1
          + 2 * (int'(r[2*n]) + 1);
      res[2*n-1] = v[0];
      res[2*n]   = v[1];
    end
    return res & acc_mask(n, sgn);
  endfunction

endpackage
