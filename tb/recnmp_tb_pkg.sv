// recnmp_tb_pkg -- reference helpers shared by the testbenches.
//
// fp2r / r2fp convert between FP32 bit patterns and real numbers without
// using the design's arithmetic, so that expected results are computed
// independently of the RTL. emb_word defines the contents of the simulated
// embedding tables: element i of the 64-byte line at line address a is a
// multiple of 1/8 between -12.5 and +12.4, so sums of a few hundred of them
// are exact in FP32 and results can be compared bit for bit.
package recnmp_tb_pkg;

  function automatic real fp2r(logic [31:0] b);
    real m;
    int  e;
    if (b[30:23] == 8'd0) return 0.0;
    m = 1.0 + real'(b[22:0]) / 8388608.0;
    e = int'(b[30:23]) - 127;
    m = m * (2.0 ** e);
    return b[31] ? -m : m;
  endfunction

  function automatic logic [31:0] r2fp(real x);
    logic s;
    real  a;
    int   e;
    int   m;
    if (x == 0.0) return 32'd0;
    s = (x < 0.0);
    a = s ? -x : x;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    m = $rtoi((a - 1.0) * 8388608.0 + 0.5);
    if (m >= 8388608) begin m = 0; e++; end
    return {s, 8'(e + 127), 23'(m)};
  endfunction

  // |got - exp| within rel relative error (plus a tiny absolute floor)
  function automatic bit close(logic [31:0] got, real exp, real rel);
    real g, d, lim;
    g   = fp2r(got);
    d   = (g > exp) ? g - exp : exp - g;
    lim = ((exp < 0.0) ? -exp : exp) * rel + 1.0e-30;
    return d <= lim;
  endfunction

  function automatic logic [31:0] emb_word(logic [28:0] line_addr, int i);
    int v;
    v = int'((line_addr * 29'd7 + 29'(i) * 29'd13) % 29'd200) - 100;
    return r2fp(real'(v) / 8.0);
  endfunction

  function automatic logic [511:0] emb_line(logic [28:0] line_addr);
    logic [511:0] l;
    for (int i = 0; i < 16; i++) l[i*32 +: 32] = emb_word(line_addr, i);
    return l;
  endfunction

endpackage
