// tb_razer_weight_decoder -- random test of the weight decoder.
// Programs OF0/OF1, loads random scale bytes (bit 7 sign, bit 6 select,
// bits 5:0 E3M3) for all 16 columns and drives random FP4 codes with many
// zeros. Checks each column's decoded value and decoded scale
// (sig * 2^(sh-5)) against the real-valued reference, and that scales and
// metadata are held while scale_ld_i is low.
`timescale 1ns/1ps
module tb_razer_weight_decoder;
  import razer_pkg::*;
  import razer_ref_pkg::*;

  localparam int COLS = 16;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [1:0]            of_we;
  logic [OF_W-1:0]       of_wdata;
  logic                  scale_ld;
  logic [COLS-1:0][7:0]  scale_in, scale_ref;
  fp4_t [COLS-1:0]       code;
  rzr_t [COLS-1:0]       val;
  wscale_t [COLS-1:0]    scale_out;
  logic [1:0][OF_W-1:0]  of_rb;
  logic [3:0]            of0, of1;

  razer_weight_decoder #(.COLS(COLS)) dut (
    .clk_i(clk), .rst_ni(rst_n), .of_we_i(of_we), .of_wdata_i(of_wdata),
    .scale_ld_i(scale_ld), .scale_i(scale_in), .code_i(code), .val_o(val),
    .scale_o(scale_out), .of_o(of_rb));

  task automatic check(input real got, input real exp, input string what, input int c);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s col %0d got %f exp %f", what, c, got, exp);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    of_we = '0; of_wdata = '0; scale_ld = 0; scale_in = '0; code = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int iter = 0; iter < 40; iter++) begin
      of0 = 4'($urandom); of1 = 4'($urandom);
      if (iter == 0) begin of0 = 4'b1010; of1 = 4'b0100; end  // +/-5, +/-8
      @(negedge clk); of_we = 2'b01; of_wdata = of0;
      @(negedge clk); of_we = 2'b10; of_wdata = of1;
      @(negedge clk); of_we = 2'b00;
      checks++;
      if (of_rb[0] != of0 || of_rb[1] != of1) failures++;
      for (int c = 0; c < COLS; c++) scale_ref[c] = 8'($urandom);
      scale_in = scale_ref; scale_ld = 1;
      @(negedge clk); scale_ld = 0; scale_in = ~scale_ref;  // must be ignored now
      for (int k = 0; k < 16; k++) begin
        for (int c = 0; c < COLS; c++) code[c] = ($urandom_range(0, 2) == 0) ? 4'h0 : 4'($urandom);
        #1;
        for (int c = 0; c < COLS; c++) begin
          check(half_units(val[c].sign, val[c].mag),
                rzr_value(code[c], scale_ref[c][6] ? of1 : of0, scale_ref[c][7]), "value", c);
          check(real'(scale_out[c].sig) * pow2(int'(scale_out[c].shexp) - 5),
                e3m3_value(scale_ref[c][5:0]), "scale", c);
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
