// razer_weight_decoder -- weight decoder of the RaZeR tensor core.
//
// Feeds the COLS columns of the MAC array. It holds the two offset registers
// OF0/OF1 shared by all columns (one special-value set per model) and, per
// column, the current block's scale byte. The byte packs an E3M3 block scale
// in bits 5:0 and two metadata bits in the two bits NVFP4's E4M3 scale leaves
// unused: bit 7 = special-value sign, bit 6 = offset select. Each cycle the
// COLS FP4 weight codes of one K step are decoded by razer_fp4_decoder into
// RaZeR values; the latched E3M3 scale is presented, decoded to
// significand/shift form, for the MACs to apply at the end of the block.
//
// Timing: of_we_i and scale_ld_i write on the rising clock edge; code_i ->
// val_o is combinational. Reset clears offsets and scales.
// Offset encoding and the special-value construction follow the paper; the
// scale-byte bit positions, E3M3 bias (3) and register interface are this
// design's choices.
module razer_weight_decoder
  import razer_pkg::*;
#(
  parameter int unsigned COLS = 16
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic [1:0]                 of_we_i,     // bit n writes OFn
  input  logic [OF_W-1:0]            of_wdata_i,
  input  logic                       scale_ld_i,
  input  logic [COLS-1:0][7:0]       scale_i,
  input  fp4_t [COLS-1:0]            code_i,
  output rzr_t [COLS-1:0]            val_o,
  output wscale_t [COLS-1:0]         scale_o,
  output logic [1:0][OF_W-1:0]       of_o         // register read-back
);

  logic [1:0][OF_W-1:0] of_q;
  logic [COLS-1:0][7:0] scale_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      of_q <= '0;
    end else begin
      if (of_we_i[0]) of_q[0] <= of_wdata_i;
      if (of_we_i[1]) of_q[1] <= of_wdata_i;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)         scale_q <= '0;
    else if (scale_ld_i) scale_q <= scale_i;
  end

  for (genvar c = 0; c < COLS; c++) begin : g_col
    razer_fp4_decoder #(.NUM_OF(2)) u_dec (
      .code_i (code_i[c]),
      .of_i   (of_q),
      .sel_i  (scale_q[c][6]),
      .sign_i (scale_q[c][7]),
      .val_o  (val_o[c])
    );
    assign scale_o[c] = decode_e3m3(scale_q[c][5:0]);
  end

  assign of_o = of_q;

endmodule
