// razer_pkg -- shared types and constants of the RaZeR tensor core.
//
// RaZeR extends NVFP4: the FP4-E2M1 code 0000 (+0, redundant next to -0 = 1000)
// is remapped per 16-element block to a "special value" +/-(6.0 + OF), where OF
// is a programmable offset register (sign-magnitude, 1 sign, 2 integer and
// 1 fraction bit). Weights carry an E3M3 block scale plus 2 metadata bits
// (special-value sign and offset select); activations carry an E4M3 block scale
// plus 1 metadata bit (sign). Both fit in the 8-bit scale byte of NVFP4.
//
// Internal number formats (this design's choice, the paper fixes none):
//   rzr_t   : decoded element, sign-magnitude, magnitude in units of 0.5.
//             FP4 values map to 0..12, special values to 5..19.
//   wscale_t: decoded E3M3 scale, value = sig * 2^(shexp-5).
//   ascale_t: decoded E4M3 scale, value = sig * 2^(shexp-9).
// Scale-byte layout (this design's choice): bit 7 = special-value sign,
// weights bit 6 = offset select and bits 5:0 = E3M3; activations bits 6:0 = E4M3.
package razer_pkg;

  localparam int unsigned BLOCK    = 16;  // NVFP4 block size (elements per scale)
  localparam int unsigned MAG_W    = 5;   // magnitude bits of a decoded element
  localparam int unsigned PROD_W   = 2 * MAG_W;  // magnitude of a product (<= 361)
  localparam int unsigned PSUM_W   = 15;  // signed block sum: |sum| <= 16*361 = 5776
  localparam int unsigned OF_W     = 4;   // offset register width
  localparam logic [MAG_W-1:0] SIX_HALVES = MAG_W'(12);  // 6.0 in units of 0.5

  typedef logic [3:0] fp4_t;   // {S, E1, E0, M}

  typedef struct packed {
    logic             sign;
    logic [MAG_W-1:0] mag;    // units of 0.5
  } rzr_t;

  typedef struct packed {
    logic [3:0] sig;   // 8+M (normal) or M (subnormal)
    logic [3:0] shexp;    // E-1 (normal) or 0 (subnormal); value = sig * 2^(shexp-5)
  } wscale_t;

  typedef struct packed {
    logic [3:0] sig;
    logic [4:0] shexp;    // value = sig * 2^(shexp-9)
  } ascale_t;

  // FP4-E2M1 code to magnitude in units of 0.5 (Eq. 5 of the format: 0,0.5,1,1.5,2,3,4,6).
  function automatic logic [MAG_W-1:0] fp4_mag_halves(input logic [2:0] em);
    logic [1:0] e;
    logic       m;
    e = em[2:1];
    m = em[0];
    if (e == 2'd0) return MAG_W'(m);                       // 0 or 0.5
    else           return MAG_W'({1'b1, m}) << (e - 2'd1); // (2+m) * 2^(e-1) halves
  endfunction

  // E3M3 weight block scale (bias 3, subnormals at E=0).
  function automatic wscale_t decode_e3m3(input logic [5:0] s);
    wscale_t r;
    if (s[5:3] == 3'd0) begin
      r.sig = {1'b0, s[2:0]};
      r.shexp  = 4'd0;
    end else begin
      r.sig = {1'b1, s[2:0]};
      r.shexp  = {1'b0, s[5:3]} - 4'd1;
    end
    return r;
  endfunction

  // E4M3 activation block scale (bias 7, subnormals at E=0).
  function automatic ascale_t decode_e4m3(input logic [6:0] s);
    ascale_t r;
    if (s[6:3] == 4'd0) begin
      r.sig = {1'b0, s[2:0]};
      r.shexp  = 5'd0;
    end else begin
      r.sig = {1'b1, s[2:0]};
      r.shexp  = {1'b0, s[6:3]} - 5'd1;
    end
    return r;
  endfunction

endpackage
