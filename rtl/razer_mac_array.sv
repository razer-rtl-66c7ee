// razer_mac_array -- the ROWS x COLS MAC array of the RaZeR tensor core.
//
// MAC(i,j) accumulates output element C[i][j] of a ROWS x COLS output tile
// (output stationary). In every K step the activation decoder provides one
// decoded activation per row and the weight decoder one decoded weight per
// column; row i's activation is broadcast to all MACs of row i and column j's
// weight to all MACs of column j. All MACs share one set of strobes (SIMD), so
// after the 16 K steps of a block every MAC folds its block sum, scaled by its
// row's activation scale and its column's weight scale, into its accumulator.
//
// Interface: the control strobes of razer_mac, per-row a_i/as_i, per-column
// w_i/ws_i, and the full accumulator tile acc_o[row][col].
// Timing: one cycle, as razer_mac.
// The 16 x 16 size and SIMD organisation follow the paper; broadcast operand
// wiring (the published figure draws neighbour-to-neighbour arrows) and the
// output-stationary dataflow are this design's choices.
module razer_mac_array
  import razer_pkg::*;
#(
  parameter int unsigned ROWS  = 16,
  parameter int unsigned COLS  = 16,
  parameter int unsigned ACC_W = 56
) (
  input  logic                                      clk_i,
  input  logic                                      rst_ni,
  input  logic                                      clr_i,
  input  logic                                      en_i,
  input  logic                                      first_i,
  input  logic                                      last_i,
  input  rzr_t    [ROWS-1:0]                        a_i,
  input  ascale_t [ROWS-1:0]                        as_i,
  input  rzr_t    [COLS-1:0]                        w_i,
  input  wscale_t [COLS-1:0]                        ws_i,
  output logic    [ROWS-1:0][COLS-1:0][ACC_W-1:0]   acc_o
);

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      logic signed [ACC_W-1:0] acc;
      razer_mac #(.ACC_W(ACC_W)) u_mac (
        .clk_i   (clk_i),
        .rst_ni  (rst_ni),
        .clr_i   (clr_i),
        .en_i    (en_i),
        .first_i (first_i),
        .last_i  (last_i),
        .a_i     (a_i[r]),
        .w_i     (w_i[c]),
        .as_i    (as_i[r]),
        .ws_i    (ws_i[c]),
        .acc_o   (acc)
      );
      assign acc_o[r][c] = acc;
    end
  end

endmodule
