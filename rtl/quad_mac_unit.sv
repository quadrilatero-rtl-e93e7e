// quad_mac_unit: one processing element of the systolic array.
//
// Computes acc_o = acc_i + a_i * w_i in a single cycle of combinational logic
// (the paper's MAC units are single-cycle; the register that holds the result
// lives in the systolic array around it). Four data types are supported, as
// the paper lists them: fp32 -> fp32, and integer SIMD with a 32-bit
// accumulator over int32, 2 x int16 or 4 x int8 operands packed in a 32-bit
// word. In the SIMD modes the lane products are summed into the accumulator,
// so one 32-bit word pair contributes 1, 2 or 4 multiply-accumulates.
//
// This design's own choices, where the paper is silent:
//  * integer operands are signed and the accumulator wraps modulo 2^32;
//  * fp32 is a fused multiply-add with one round-to-nearest-even step;
//  * subnormal inputs are read as zero and subnormal results flush to zero
//    (sign kept); any NaN input, inf*0 or inf-inf yields the quiet NaN
//    0x7fc00000; no exception flags are produced.
module quad_mac_unit
  import quad_pkg::*;
(
  input  dtype_e      dtype_i,
  input  logic [31:0] a_i,     // streamed operand (element of ms1)
  input  logic [31:0] w_i,     // stationary weight (element of ms2)
  input  logic [31:0] acc_i,   // partial sum in
  output logic [31:0] acc_o    // partial sum out
);

  // ---------------- integer SIMD ----------------
  logic [31:0] int_res;
  always_comb begin
    logic [31:0] p32;
    logic signed [31:0] s16, s8;
    p32 = a_i * w_i;   // low word is the same signed or unsigned
    s16 = 32'($signed(a_i[15:0]) * $signed(w_i[15:0]))
        + 32'($signed(a_i[31:16]) * $signed(w_i[31:16]));
    s8  = 32'($signed(a_i[7:0])   * $signed(w_i[7:0]))
        + 32'($signed(a_i[15:8])  * $signed(w_i[15:8]))
        + 32'($signed(a_i[23:16]) * $signed(w_i[23:16]))
        + 32'($signed(a_i[31:24]) * $signed(w_i[31:24]));
    unique case (dtype_i)
      DT_INT32: int_res = acc_i + p32;
      DT_INT16: int_res = acc_i + s16;
      default:  int_res = acc_i + s8;
    endcase
  end

  // ---------------- fp32 fused multiply-add ----------------
  // The operand with the larger exponent is kept in place; if it turns out
  // to be the smaller magnitude the difference is negated (bit 74 is free
  // and acts as the sign of the difference).
  // Product P = ma*mb (48 bits, >= 2^46 for normal inputs) and addend
  // C = mc << 23 share the scale 2^(x - 127 - 46), with x = ea+eb-127 for P
  // and x = ec for C. Both are placed 26 bits up in a 75-bit window; the one
  // with the smaller x is shifted right by the exponent difference, the bits
  // that fall out are kept as a sticky bit. Below a difference of 27 nothing
  // is lost, so cancellation is exact; above it the sum keeps at least 71
  // significant bits, enough for guard and sticky after normalisation.
  localparam int W = 75;
  localparam logic [31:0] QNAN = 32'h7fc00000;

  logic [31:0] fp_res;
  always_comb begin
    logic        sa, sb, sc, sp, sr;
    logic [7:0]  ea, eb, ec;
    logic        za, zb, zc, ia, ib, ic, na, nb, nc;
    logic [23:0] ma, mb, mc;
    logic [47:0] pm;
    logic signed [11:0] xp, xc, xbig, er;
    logic [W-1:0] pw, cw, hi_op, lo_op, sum;
    logic [11:0]  d;
    logic         p_big, sticky_sh;
    int           lz;
    logic [W-1:0] norm;
    logic [24:0]  mr;
    logic         g, st, rnd;

    sa = a_i[31]; ea = a_i[30:23];
    sb = w_i[31]; eb = w_i[30:23];
    sc = acc_i[31]; ec = acc_i[30:23];
    za = (ea == 8'd0); zb = (eb == 8'd0); zc = (ec == 8'd0);
    ia = (ea == 8'hff) && (a_i[22:0] == '0);
    ib = (eb == 8'hff) && (w_i[22:0] == '0);
    ic = (ec == 8'hff) && (acc_i[22:0] == '0);
    na = (ea == 8'hff) && (a_i[22:0] != '0);
    nb = (eb == 8'hff) && (w_i[22:0] != '0);
    nc = (ec == 8'hff) && (acc_i[22:0] != '0);
    ma = {1'b1, a_i[22:0]};
    mb = {1'b1, w_i[22:0]};
    mc = {1'b1, acc_i[22:0]};
    sp = sa ^ sb;

    pm = ma * mb;
    xp = 12'(signed'({4'd0, ea})) + 12'(signed'({4'd0, eb})) - 12'sd127;
    xc = 12'(signed'({4'd0, ec}));
    pw = {1'b0, pm, 26'd0};
    cw = {2'b0, mc, 23'd0, 26'd0};

    // operand with the larger scale, or the product if the addend is zero
    p_big = zc || (xp >= xc);
    xbig  = p_big ? xp : xc;
    hi_op   = p_big ? pw : cw;
    lo_op = p_big ? (zc ? '0 : cw) : pw;
    d     = p_big ? 12'(xp - xc) : 12'(xc - xp);
    if (zc && p_big) d = '0;
    if (d >= 12'(W)) begin
      sticky_sh = (lo_op != '0);
      lo_op     = '0;
    end else begin
      sticky_sh = ((lo_op & ((W'(1) << d) - W'(1))) != '0);
      lo_op     = lo_op >> d;
    end
    lo_op[0] = lo_op[0] | sticky_sh;

    if (sp == sc || zc) begin
      sum = hi_op + lo_op;
      sr  = p_big ? sp : sc;
    end else begin
      sum = hi_op - lo_op;
      sr  = p_big ? sp : sc;
      if (sum[W-1]) begin      // the aligned operand was the larger one
        sum = -sum;
        sr  = ~sr;
      end
    end

    // leading-one position
    lz = 0;
    for (int i = 0; i < W; i++) if (sum[i]) lz = i;
    norm = sum << (W - 1 - lz);
    mr   = {1'b0, norm[W-1 -: 24]};
    g    = norm[W-25];
    st   = (norm[W-26:0] != '0);
    rnd  = g && (st || mr[0]);
    mr   = mr + 25'(rnd);
    er   = xbig + 12'(lz) - 12'sd72;
    if (mr[24]) begin
      er = er + 12'sd1;
      mr = mr >> 1;
    end

    if (na || nb || nc || (ia && zb) || (ib && za)
        || ((ia || ib) && ic && (sp != sc)))
      fp_res = QNAN;
    else if (ia || ib)
      fp_res = {sp, 8'hff, 23'd0};
    else if (ic)
      fp_res = acc_i;
    else if (za || zb)
      fp_res = zc ? {sp & sc, 31'd0} : acc_i;
    else if (sum == '0)
      fp_res = 32'd0;                       // exact cancellation: +0 (RNE)
    else if (er >= 12'sd255)
      fp_res = {sr, 8'hff, 23'd0};
    else if (er <= 12'sd0)
      fp_res = {sr, 31'd0};                 // flush to zero
    else
      fp_res = {sr, er[7:0], mr[22:0]};
  end

  assign acc_o = (dtype_i == DT_FP32) ? fp_res : int_res;

endmodule
