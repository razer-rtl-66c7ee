// razer_fp4_decoder -- one FP4-RaZeR element decoder (combinational).
//
// Converts a 4-bit FP4-E2M1 code {S,E,E,M} into its RaZeR value. Every code
// except binary zero 0000 decodes to its ordinary FP4 value (negative zero 1000
// stays zero). Code 0000 -- the redundant positive zero -- decodes to the
// block's special value: the offset register chosen by the metadata select bit
// is added to 6.0 (the largest FP4 magnitude) and the metadata sign bit is
// attached. Offsets are sign-magnitude {sign, 2 integer bits, 1 fraction bit},
// covering -3.5..+3.5 in steps of 0.5, so special magnitudes span 2.5..9.5.
// Example from the format definition: OF = 1010 (-1.0) gives 5.0; with sign 1
// the decoder outputs -5.0.
//
// NUM_OF = 2 is the weight variant (OF0/OF1, 1-bit select); NUM_OF = 1 is the
// activation variant (a single OF, select ignored).
//
// Interface: code_i, of_i[NUM_OF], sel_i, sign_i -> val_o (razer_pkg::rzr_t,
// sign-magnitude in units of 0.5). Purely combinational, no clock.
// The compare/add/mux structure follows the published decoder; the output
// number format is this design's choice.
module razer_fp4_decoder
  import razer_pkg::*;
#(
  parameter int unsigned NUM_OF = 2
) (
  input  fp4_t                 code_i,
  input  logic [NUM_OF-1:0][OF_W-1:0] of_i,
  input  logic                 sel_i,
  input  logic                 sign_i,
  output rzr_t                 val_o
);

  logic [OF_W-1:0]  of_sel;
  logic [MAG_W-1:0] sv_mag;
  rzr_t             fp4_val;
  rzr_t             sv_val;

  // Offset select (a 2:1 mux in the weight variant).
  if (NUM_OF > 1) begin : g_sel
    assign of_sel = sel_i ? of_i[1] : of_i[0];
  end else begin : g_nosel
    assign of_sel = of_i[0];
  end

  // 6.0 + offset; the offset is sign-magnitude in half units.
  always_comb begin
    if (of_sel[3]) sv_mag = SIX_HALVES - MAG_W'(of_sel[2:0]);
    else           sv_mag = SIX_HALVES + MAG_W'(of_sel[2:0]);
  end

  assign sv_val  = '{sign: sign_i, mag: sv_mag};
  assign fp4_val = '{sign: code_i[3], mag: fp4_mag_halves(code_i[2:0])};

  // Compare with binary zero and select.
  assign val_o = (code_i == 4'b0000) ? sv_val : fp4_val;

endmodule
