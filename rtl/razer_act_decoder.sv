// razer_act_decoder -- activation decoder of the RaZeR tensor core.
//
// Feeds the ROWS rows of the MAC array. Like the weight decoder, but with a
// single offset register OF and no select bit: activations have only two
// special values, +/-(6.0 + OF). The per-row scale byte packs an E4M3 block
// scale in bits 6:0 (NVFP4's scale without its always-zero sign bit) and the
// special-value sign in bit 7. Each cycle the ROWS FP4 activation codes of one
// K step are decoded to RaZeR values; the latched E4M3 scale is presented in
// significand/shift form.
//
// Timing: of_we_i and scale_ld_i write on the rising clock edge; code_i ->
// val_o is combinational. Reset clears the offset and the scales.
// The single offset and missing select follow the paper; bit positions and the
// register interface are this design's choices.
module razer_act_decoder
  import razer_pkg::*;
#(
  parameter int unsigned ROWS = 16
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       of_we_i,
  input  logic [OF_W-1:0]            of_wdata_i,
  input  logic                       scale_ld_i,
  input  logic [ROWS-1:0][7:0]       scale_i,
  input  fp4_t [ROWS-1:0]            code_i,
  output rzr_t [ROWS-1:0]            val_o,
  output ascale_t [ROWS-1:0]         scale_o,
  output logic [OF_W-1:0]            of_o
);

  logic [0:0][OF_W-1:0] of_q;
  logic [ROWS-1:0][7:0] scale_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)      of_q <= '0;
    else if (of_we_i) of_q[0] <= of_wdata_i;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)         scale_q <= '0;
    else if (scale_ld_i) scale_q <= scale_i;
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    razer_fp4_decoder #(.NUM_OF(1)) u_dec (
      .code_i (code_i[r]),
      .of_i   (of_q),
      .sel_i  (1'b0),
      .sign_i (scale_q[r][7]),
      .val_o  (val_o[r])
    );
    assign scale_o[r] = decode_e4m3(scale_q[r][6:0]);
  end

  assign of_o = of_q[0];

endmodule
