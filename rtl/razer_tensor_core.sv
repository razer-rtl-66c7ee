// razer_tensor_core -- RaZeR tensor core (top level).
//
// Computes a ROWS x COLS output tile C += A x W, where the activations A and
// the weights W are stored in the RaZeR format: NVFP4 blocks of 16 FP4-E2M1
// codes whose redundant +0 code is remapped to a per-block special value.
// Data path: the host writes packed operands and block scales into the SRAM
// and programs the offset registers (weight OF0/OF1, activation OF); a job
// (start_i, base_i, nblk_i) makes the controller stream the blocks out of the
// SRAM, the two decoders turn FP4 codes into RaZeR values and decoded block
// scales, and the 16 x 16 MAC array accumulates the block-scaled dot products.
// Results are read one element at a time through res_row_i/res_col_i.
//
// Interface:
//   mem_we_i/mem_waddr_i/mem_wdata_i  write one 128-bit SRAM word
//   of_we_i[0]/[1]/[2], of_wdata_i    write weight OF0, weight OF1, activation OF
//   start_i, clear_i, base_i, nblk_i  start a job; clear_i zeroes C first
//   busy_o, done_o                    job status (done_o: one-cycle pulse)
//   res_row_i, res_col_i -> res_o     C[row][col], signed, units of 2^-16
// Timing: a job of N blocks takes 18*N + 2 cycles from start_i to done_o
// (16 MAC cycles per block plus two scale-word reads). res_o is combinational
// from the accumulator registers.
// The per-tensor FP32 scales of NVFP4 are not applied here.
// The decoders and array follow the paper; SRAM organisation, controller,
// host ports and the fixed-point accumulator are this design's choices.
module razer_tensor_core
  import razer_pkg::*;
#(
  parameter int unsigned ROWS   = 16,
  parameter int unsigned COLS   = 16,
  parameter int unsigned ACC_W  = 56,
  parameter int unsigned DEPTH  = 4096,
  parameter int unsigned NBLK_W = 8,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned WIDTH = 128
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  // host write port into the SRAM
  input  logic                     mem_we_i,
  input  logic [AW-1:0]            mem_waddr_i,
  input  logic [WIDTH-1:0]         mem_wdata_i,
  // offset registers
  input  logic [2:0]               of_we_i,
  input  logic [OF_W-1:0]          of_wdata_i,
  // job control
  input  logic                     start_i,
  input  logic                     clear_i,
  input  logic [AW-1:0]            base_i,
  input  logic [NBLK_W-1:0]        nblk_i,
  output logic                     busy_o,
  output logic                     done_o,
  // result read-out
  input  logic [$clog2(ROWS)-1:0]  res_row_i,
  input  logic [$clog2(COLS)-1:0]  res_col_i,
  output logic signed [ACC_W-1:0]  res_o
);

  // The SRAM word carries 16 scale bytes or 16 + 16 FP4 codes.
  if (ROWS != 16 || COLS != 16) begin : g_bad_size
    $error("razer_tensor_core: the 128-bit SRAM word layout needs ROWS = COLS = 16");
  end

  logic             re;
  logic [AW-1:0]    raddr;
  logic [WIDTH-1:0] rdata;
  logic wld, ald, en, first, last, clr;

  razer_sram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) u_sram (
    .clk_i   (clk_i),
    .we_i    (mem_we_i),
    .waddr_i (mem_waddr_i),
    .wdata_i (mem_wdata_i),
    .re_i    (re),
    .raddr_i (raddr),
    .rdata_o (rdata)
  );

  razer_ctrl #(.BLOCK(BLOCK), .AW(AW), .NBLK_W(NBLK_W)) u_ctrl (
    .clk_i   (clk_i),
    .rst_ni  (rst_ni),
    .start_i (start_i),
    .clear_i (clear_i),
    .base_i  (base_i),
    .nblk_i  (nblk_i),
    .re_o    (re),
    .raddr_o (raddr),
    .wld_o   (wld),
    .ald_o   (ald),
    .en_o    (en),
    .first_o (first),
    .last_o  (last),
    .clr_o   (clr),
    .busy_o  (busy_o),
    .done_o  (done_o)
  );

  rzr_t    [COLS-1:0] w_val;
  wscale_t [COLS-1:0] w_scale;
  rzr_t    [ROWS-1:0] a_val;
  ascale_t [ROWS-1:0] a_scale;
  logic [1:0][OF_W-1:0] w_of;
  logic [OF_W-1:0]      a_of;

  razer_weight_decoder #(.COLS(COLS)) u_wdec (
    .clk_i      (clk_i),
    .rst_ni     (rst_ni),
    .of_we_i    (of_we_i[1:0]),
    .of_wdata_i (of_wdata_i),
    .scale_ld_i (wld),
    .scale_i    (rdata[8*COLS-1:0]),
    .code_i     (rdata[4*COLS-1:0]),
    .val_o      (w_val),
    .scale_o    (w_scale),
    .of_o       (w_of)
  );

  razer_act_decoder #(.ROWS(ROWS)) u_adec (
    .clk_i      (clk_i),
    .rst_ni     (rst_ni),
    .of_we_i    (of_we_i[2]),
    .of_wdata_i (of_wdata_i),
    .scale_ld_i (ald),
    .scale_i    (rdata[8*ROWS-1:0]),
    .code_i     (rdata[64 +: 4*ROWS]),
    .val_o      (a_val),
    .scale_o    (a_scale),
    .of_o       (a_of)
  );

  logic [ROWS-1:0][COLS-1:0][ACC_W-1:0] acc;

  razer_mac_array #(.ROWS(ROWS), .COLS(COLS), .ACC_W(ACC_W)) u_array (
    .clk_i   (clk_i),
    .rst_ni  (rst_ni),
    .clr_i   (clr),
    .en_i    (en),
    .first_i (first),
    .last_i  (last),
    .a_i     (a_val),
    .as_i    (a_scale),
    .w_i     (w_val),
    .ws_i    (w_scale),
    .acc_o   (acc)
  );

  assign res_o = acc[res_row_i][res_col_i];

  // Offsets are only read back for debug; keep them observable in simulation.
  logic unused_of;
  assign unused_of = ^{w_of, a_of};

  a_no_start_when_busy: assert property (@(posedge clk_i) disable iff (!rst_ni)
      busy_o |-> !start_i)
    else $error("start_i while busy is ignored");

endmodule
