// tb_fp_pkg -- reference fp32 conversions for the testbenches, computed
// through IEEE double precision ($realtobits/$bitstoreal), independent of
// the RTL datapath. r2f rounds to nearest even and flushes subnormals.
package tb_fp_pkg;
  function automatic real f2r(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'b0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(real r);
    logic [63:0] d;
    int          e;
    logic [52:0] m;
    logic [23:0] mr;
    logic        g, s;
    d = $realtobits(r);
    if (d[62:0] == 0) return 32'h0;
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b1, d[51:0]};
    mr = m[52:29];
    g  = m[28];
    s  = |m[27:0];
    if (g && (s || mr[0])) begin
      mr = mr + 1;
      if (mr == 0) begin mr = 24'h800000; e = e + 1; end
    end
    if (e <= 0)   return {d[63], 31'b0} & 32'h0;
    if (e >= 255) return {d[63], 8'hff, 23'b0};
    return {d[63], 8'(e), mr[22:0]};
  endfunction

  // a random fp32 with a few significand bits and a modest exponent, so
  // that short sums stay exact in double precision
  function automatic logic [31:0] rnd_f(int emin, int emax);
    logic [31:0] f;
    int e;
    e = emin + int'($urandom % (emax - emin + 1));
    f = {1'($urandom), 8'(e + 127), 5'($urandom), 18'b0};
    return f;
  endfunction
endpackage
