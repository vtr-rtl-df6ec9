// ecu_func: element-wise non-linear function of the element-wise compute unit.
//
// Purely combinational; input and output are Q8.8 elements.
//   F_NONE   y = x
//   F_GELU   y = x * Phi(x), Phi = standard normal CDF, linear interpolation
//            of PHI_LUT on [-4, 4) (quarter-unit segments); y = x for x >= 4
//            and y = 0 for x < -4.
//   F_EXP    y = e^x = 2^(x*log2 e): the integer part of x*log2 e is a shift,
//            the fraction is interpolated in EXP2_LUT (16 segments).
//            Saturates to the largest element for x > ~4.85; underflows to 0.
//   F_RECIP  y = 1/x: normalise |x| to 1.f * 2^p, interpolate 1/(1.f) in
//            RECIP_LUT, shift back, restore the sign. 1/0 saturates.
//   F_RSQRT  y = 1/sqrt(x): as F_RECIP with RSQRT_E_LUT (even p) or
//            RSQRT_O_LUT (odd p). x <= 0 gives the largest element.
// Accuracy is a few LSBs (Q8.8 LSB = 1/256) or better than 1 %.
//
// GELU and exp are the functions the publication names for the unit;
// reciprocal and inverse square root are this design's addition for the
// softmax normalisation and the layer-norm 1/sigma the publication assigns to
// the unit. All approximations are this design's own.
module ecu_func
  import vtr_pkg::*;
(
  input  func_e func,
  input  elem_t x,
  output elem_t y
);

  // lo + (hi-lo)*fr/2^10, table values and result unsigned 17 bit
  function automatic logic [16:0] interp(input logic [16:0] lo, input logic [16:0] hi,
                                         input logic [9:0] fr);
    logic signed [18:0] d;
    logic signed [29:0] p;
    d = $signed({2'b00, hi}) - $signed({2'b00, lo});
    p = d * $signed({1'b0, fr});
    return 17'($signed({2'b00, lo}) + 19'(p >>> 10));
  endfunction

  // position of the leading one of a nonzero 16-bit value
  function automatic logic [3:0] lead_one(input logic [15:0] v);
    logic [3:0] p;
    p = '0;
    for (int i = 0; i < 16; i++) if (v[i]) p = 4'(i);
    return p;
  endfunction

  // ---------------- exp ----------------
  elem_t y_exp;
  always_comb begin
    logic signed [31:0] t;
    logic signed [9:0]  n;
    logic [16:0]        m;
    logic [3:0]         k;
    t = 32'(x) * 32'sd23637;           // x * log2(e), Q.22
    n = 10'(t >>> 22);                  // floor
    k = t[21:18];
    m = interp(EXP2_LUT[5'(k)], EXP2_LUT[5'(k) + 5'd1], t[17:8]);  // 2^frac, Q.14
    if (n >= 10'sd7)       y_exp = ELEM_MAX;
    else if (n < -10'sd9) y_exp = '0;
    else                   y_exp = elem_t'(m >> (4'(6 - n)));
  end

  // ---------------- GELU ----------------
  elem_t y_gelu;
  always_comb begin
    logic [10:0]        u;
    logic [16:0]        phi;
    logic signed [34:0] pr;
    u   = 11'(x + 16'sd1024);
    phi = interp(PHI_LUT[6'(u[10:6])], PHI_LUT[6'(u[10:6]) + 6'd1], {u[5:0], 4'b0});
    pr  = 35'(x) * $signed({18'b0, phi});
    if (x >= 16'sd1024)      y_gelu = x;
    else if (x < -16'sd1024) y_gelu = '0;
    else                     y_gelu = elem_t'(pr >>> 15);
  end

  // ---------------- reciprocal ----------------
  elem_t y_rec;
  always_comb begin
    logic [15:0] mag, mn;
    logic [3:0]  p;
    logic [16:0] r;
    logic [15:0] q;
    mag = x[DW-1] ? 16'(-x) : 16'(x);
    p   = lead_one(mag);
    mn  = mag << (4'd15 - p);
    r   = interp(RECIP_LUT[5'(mn[14:11])], RECIP_LUT[5'(mn[14:11]) + 5'd1], mn[10:1]);
    if (mag == '0 || p == 4'd0)  q = 16'h7FFF;
    else if (p == 4'd1)          q = (r > 17'h7FFF) ? 16'h7FFF : 16'(r);
    else                         q = 16'(r >> (p - 4'd1));
    y_rec = x[DW-1] ? elem_t'(-$signed(q)) : elem_t'(q);
  end

  // ---------------- 1/sqrt ----------------
  elem_t y_rsq;
  always_comb begin
    logic [15:0] mn;
    logic [3:0]  p;
    logic [16:0] r;
    p  = lead_one(16'(x));
    mn = 16'(x) << (4'd15 - p);
    if (p[0]) r = interp(RSQRT_O_LUT[5'(mn[14:11])], RSQRT_O_LUT[5'(mn[14:11]) + 5'd1], mn[10:1]);
    else      r = interp(RSQRT_E_LUT[5'(mn[14:11])], RSQRT_E_LUT[5'(mn[14:11]) + 5'd1], mn[10:1]);
    if (x <= 16'sd0) y_rsq = ELEM_MAX;
    else             y_rsq = elem_t'(r >> (4'd3 + 4'(p[3:1])));
  end

  always_comb begin
    unique case (func)
      F_GELU:  y = y_gelu;
      F_EXP:   y = y_exp;
      F_RECIP: y = y_rec;
      F_RSQRT: y = y_rsq;
      default: y = x;
    endcase
  end

endmodule
