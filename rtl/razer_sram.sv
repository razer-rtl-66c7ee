// razer_sram -- on-chip operand buffer of the RaZeR tensor core.
//
// A simple dual-port memory: one write port (host side) and one read port
// feeding the weight and activation decoders. Reads are synchronous: the word
// at raddr_i appears on rdata_o one cycle after re_i. A write and a read of
// the same address in one cycle return the old word. Written as an array; in
// silicon a compiled SRAM macro with the same ports would take its place.
// Nothing is reset: read data is undefined until the first read.
//
// Word layout used by the controller, per K block of 16 elements:
//   word 0      : 16 weight scale bytes (byte j = column j)
//   word 1      : 16 activation scale bytes (byte i = row i)
//   word 2 + k  : bits 4j+3:4j = weight code of column j at K step k,
//                 bits 64+4i+3:64+4i = activation code of row i at K step k.
// The paper names the SRAM only; depth, width, ports and layout are this
// design's choices.
module razer_sram #(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned WIDTH = 128,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk_i,
  input  logic             we_i,
  input  logic [AW-1:0]    waddr_i,
  input  logic [WIDTH-1:0] wdata_i,
  input  logic             re_i,
  input  logic [AW-1:0]    raddr_i,
  output logic [WIDTH-1:0] rdata_o
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [WIDTH-1:0] rdata_q;

  always_ff @(posedge clk_i) begin
    if (we_i) mem[waddr_i] <= wdata_i;
  end

  always_ff @(posedge clk_i) begin
    if (re_i) rdata_q <= mem[raddr_i];
  end

  assign rdata_o = rdata_q;

endmodule
