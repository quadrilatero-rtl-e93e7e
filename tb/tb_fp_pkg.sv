// tb_fp_pkg: reference arithmetic for the testbenches, written independently
// of the RTL. fp32 values are converted to and from the simulator's double
// precision `real`; a fused multiply-add is computed as a*b (exact in double)
// plus c in double, then rounded to fp32 with round-to-nearest-even. Results
// that would be subnormal are flushed to zero, as the datapath does.
package tb_fp_pkg;

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    int          e;
    logic [24:0] m;
    logic        g, st;
    d = $realtobits(r);
    if (d[62:0] == '0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {2'b01, d[51:29]};
    g = d[28];
    st = (d[27:0] != '0);
    if (g && (st || m[0])) m = m + 1;
    if (m[24]) begin m = m >> 1; e = e + 1; end
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    if (e <= 0)   return {d[63], 31'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] fma_ref(input logic [31:0] a, w, c);
    real p;
    logic [31:0] r;
    p = f2r(a) * f2r(w);
    if (a[30:23] == 0 || w[30:23] == 0) return (c[30:23] == 0) ? {a[31]^w[31]&c[31], 31'd0} : c;
    r = r2f(p + f2r(c));
    return r;
  endfunction

  // mac reference for all data types: dt 0 fp32, 1 int32, 2 int16, 3 int8
  function automatic logic [31:0] mac_ref(input int dt, input logic [31:0] a, w, c);
    int s;
    s = int'(c);
    case (dt)
      0: return fma_ref(a, w, c);
      1: return 32'(s + int'(a) * int'(w));
      2: begin
        for (int l = 0; l < 2; l++)
          s += int'($signed(a[16*l +: 16])) * int'($signed(w[16*l +: 16]));
        return 32'(s);
      end
      default: begin
        for (int l = 0; l < 4; l++)
          s += int'($signed(a[8*l +: 8])) * int'($signed(w[8*l +: 8]));
        return 32'(s);
      end
    endcase
  endfunction

  // a random normal fp32 value with magnitude in [2^-4, 2^4)
  function automatic logic [31:0] rand_f32();
    logic [31:0] v;
    v = $urandom;
    v[30:23] = 8'(123 + ($urandom % 8));
    return v;
  endfunction

endpackage
