// razer_ref_pkg -- reference model of the RaZeR number formats for the
// testbenches. Everything is computed in real arithmetic straight from the
// format definitions, independently of the RTL's integer encodings:
//   FP4-E2M1 : (-1)^S * 2^(E-1) * (1 + M/2), E != 0;  (-1)^S * M/2, E = 0
//   E4M3     : 2^(E-7) * (1 + M/8), E != 0;  2^-6 * M/8, E = 0
//   E3M3     : 2^(E-3) * (1 + M/8), E != 0;  2^-2 * M/8, E = 0
//   offset   : sign-magnitude {S, I1, I0, F}, value = (-1)^S * {I1,I0,F} / 2
//   special  : (-1)^sign * (6 + offset)
package razer_ref_pkg;

  function automatic real pow2(input int e);
    real v = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) v = v * 2.0;
    else        for (int i = 0; i < -e; i++) v = v / 2.0;
    return v;
  endfunction

  function automatic real fp4_value(input logic [3:0] c);
    real lut [8] = '{0.0, 0.5, 1.0, 1.5, 2.0, 3.0, 4.0, 6.0};
    real v;
    v = lut[c[2:0]];
    return c[3] ? -v : v;
  endfunction

  function automatic real of_value(input logic [3:0] o);
    real v;
    v = real'(o[2:0]) / 2.0;
    return o[3] ? -v : v;
  endfunction

  function automatic real special_value(input logic [3:0] o, input logic sign);
    real v;
    v = 6.0 + of_value(o);
    return sign ? -v : v;
  endfunction

  // RaZeR element value: code 0000 becomes the special value.
  function automatic real rzr_value(input logic [3:0] c, input logic [3:0] o,
                                    input logic sign);
    if (c == 4'b0000) return special_value(o, sign);
    return fp4_value(c);
  endfunction

  function automatic real e4m3_value(input logic [6:0] s);
    int e, m;
    e = int'(s[6:3]);
    m = int'(s[2:0]);
    if (e == 0) return pow2(-6) * real'(m) / 8.0;
    return pow2(e - 7) * (1.0 + real'(m) / 8.0);
  endfunction

  function automatic real e3m3_value(input logic [5:0] s);
    int e, m;
    e = int'(s[5:3]);
    m = int'(s[2:0]);
    if (e == 0) return pow2(-2) * real'(m) / 8.0;
    return pow2(e - 3) * (1.0 + real'(m) / 8.0);
  endfunction

  // Value of a decoded sign-magnitude RaZeR output (units of 0.5).
  function automatic real half_units(input logic sign, input logic [4:0] mag);
    real v;
    v = real'(mag) / 2.0;
    return sign ? -v : v;
  endfunction

endpackage
