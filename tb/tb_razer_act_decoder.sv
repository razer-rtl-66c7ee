// tb_razer_act_decoder -- random test of the activation decoder.
// Programs the single OF register, loads random scale bytes (bit 7 sign,
// bits 6:0 E4M3) for all 16 rows and drives random FP4 codes with many zeros.
// Checks each row's decoded value and decoded scale (sig * 2^(sh-9)) against
// the real-valued reference and that the scales are held between loads.
`timescale 1ns/1ps
module tb_razer_act_decoder;
  import razer_pkg::*;
  import razer_ref_pkg::*;

  localparam int ROWS = 16;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                  of_we;
  logic [OF_W-1:0]       of_wdata;
  logic                  scale_ld;
  logic [ROWS-1:0][7:0]  scale_in, scale_ref;
  fp4_t [ROWS-1:0]       code;
  rzr_t [ROWS-1:0]       val;
  ascale_t [ROWS-1:0]    scale_out;
  logic [OF_W-1:0]       of_rb;
  logic [3:0]            of0;

  razer_act_decoder #(.ROWS(ROWS)) dut (
    .clk_i(clk), .rst_ni(rst_n), .of_we_i(of_we), .of_wdata_i(of_wdata),
    .scale_ld_i(scale_ld), .scale_i(scale_in), .code_i(code), .val_o(val),
    .scale_o(scale_out), .of_o(of_rb));

  task automatic check(input real got, input real exp, input string what, input int r);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s row %0d got %f exp %f", what, r, got, exp);
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
    of_we = 0; of_wdata = '0; scale_ld = 0; scale_in = '0; code = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int iter = 0; iter < 40; iter++) begin
      of0 = (iter == 0) ? 4'b1010 : 4'($urandom);   // first pass: +/-5
      @(negedge clk); of_we = 1; of_wdata = of0;
      @(negedge clk); of_we = 0;
      checks++;
      if (of_rb != of0) failures++;
      for (int r = 0; r < ROWS; r++) scale_ref[r] = 8'($urandom);
      scale_in = scale_ref; scale_ld = 1;
      @(negedge clk); scale_ld = 0; scale_in = ~scale_ref;
      for (int k = 0; k < 16; k++) begin
        for (int r = 0; r < ROWS; r++) code[r] = ($urandom_range(0, 2) == 0) ? 4'h0 : 4'($urandom);
        #1;
        for (int r = 0; r < ROWS; r++) begin
          check(half_units(val[r].sign, val[r].mag),
                rzr_value(code[r], of0, scale_ref[r][7]), "value", r);
          check(real'(scale_out[r].sig) * pow2(int'(scale_out[r].shexp) - 9),
                e4m3_value(scale_ref[r][6:0]), "scale", r);
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
