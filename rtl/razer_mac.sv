// razer_mac -- one block-scaled MAC unit of the RaZeR tensor core.
//
// Each enabled cycle multiplies a decoded RaZeR activation by a decoded RaZeR
// weight. Both are sign-magnitude in units of 0.5, so the product is an exact
// integer in units of 0.25 (|p| <= 19*19). The 16 products of one NVFP4 block
// are summed exactly in a 15-bit signed block sum. On the block's last element
// the block sum is multiplied by the two block-scale significands and shifted
// by the sum of the two scale exponents, then added to the output accumulator.
// The accumulator is fixed point: acc_o * 2^-16 is the real value (0.25 from
// the elements, 2^-5 from the E3M3 weight scale, 2^-9 from the E4M3 activation
// scale), so the result is exact for any K up to 2^(ACC_W-44) blocks.
//
// Interface: en_i marks a valid K step, first_i/last_i its position in the
// block, clr_i zeroes the accumulator (the same cycle's block result, if any,
// is then the new value). Scales must be stable in the cycle last_i is high.
// Timing: one cycle; acc_o is registered.
// The paper asks only for "low-precision MAC operations"; exact integer
// arithmetic and a fixed-point accumulator are this design's choices.
module razer_mac
  import razer_pkg::*;
#(
  parameter int unsigned ACC_W = 56
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  logic                    clr_i,
  input  logic                    en_i,
  input  logic                    first_i,
  input  logic                    last_i,
  input  rzr_t                    a_i,
  input  rzr_t                    w_i,
  input  ascale_t                 as_i,
  input  wscale_t                 ws_i,
  output logic signed [ACC_W-1:0] acc_o
);

  localparam int unsigned TERM_W = PSUM_W + 8 + 21;  // block sum x sig x sig << 20

  logic [PROD_W-1:0]        prod_mag;
  logic signed [PSUM_W-1:0] prod;
  logic signed [PSUM_W-1:0] psum_q;
  logic signed [PSUM_W-1:0] sum;
  logic        [7:0]        sig_prod;
  logic        [4:0]        shift;
  logic signed [TERM_W-1:0] term;
  logic signed [ACC_W-1:0]  acc_q;
  logic signed [ACC_W-1:0]  acc_base;

  assign prod_mag = a_i.mag * w_i.mag;
  assign prod     = (a_i.sign ^ w_i.sign) ? -PSUM_W'(prod_mag) : PSUM_W'(prod_mag);
  assign sum      = (first_i ? '0 : psum_q) + prod;

  assign sig_prod = ws_i.sig * as_i.sig;
  assign shift    = 5'(ws_i.shexp) + as_i.shexp;
  assign term     = (TERM_W'(sum) * $signed({1'b0, sig_prod})) <<< shift;

  assign acc_base = clr_i ? '0 : acc_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      psum_q <= '0;
      acc_q  <= '0;
    end else begin
      if (en_i) psum_q <= last_i ? '0 : sum;
      if (en_i && last_i) acc_q <= acc_base + ACC_W'(term);
      else                acc_q <= acc_base;
    end
  end

  assign acc_o = acc_q;

endmodule
