// tb_razer_mac_array -- random test of the 16 x 16 MAC array.
// Each K step drives random decoded activations (one per row) and weights
// (one per column); each block uses random per-row and per-column decoded
// scales. After every block all 256 accumulators are compared with a real
// reference C[i][j] += sum_k a[i][k] w[k][j] * sa[i] * sw[j]. One mid-run
// clear checks the shared clear strobe.
`timescale 1ns/1ps
module tb_razer_mac_array;
  import razer_pkg::*;
  import razer_ref_pkg::*;

  localparam int ROWS = 16, COLS = 16, ACC_W = 56;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clr, en, first, last;
  rzr_t    [ROWS-1:0] a;
  ascale_t [ROWS-1:0] as_;
  rzr_t    [COLS-1:0] w;
  wscale_t [COLS-1:0] ws;
  logic [ROWS-1:0][COLS-1:0][ACC_W-1:0] acc;
  real ref_c [ROWS][COLS];
  real blk   [ROWS][COLS];

  razer_mac_array #(.ROWS(ROWS), .COLS(COLS), .ACC_W(ACC_W)) dut (
    .clk_i(clk), .rst_ni(rst_n), .clr_i(clr), .en_i(en), .first_i(first), .last_i(last),
    .a_i(a), .as_i(as_), .w_i(w), .ws_i(ws), .acc_o(acc));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all(input string what);
    for (int i = 0; i < ROWS; i++)
      for (int j = 0; j < COLS; j++) begin
        real got;
        got = real'($signed(acc[i][j])) * pow2(-16);
        checks++;
        if (got != ref_c[i][j]) begin
          failures++;
          if (failures < 10) $display("FAIL %s C[%0d][%0d] got %f exp %f", what, i, j, got, ref_c[i][j]);
        end
      end
  endtask

  initial begin
    clr = 0; en = 0; first = 0; last = 0; a = '0; w = '0; as_ = '0; ws = '0;
    foreach (ref_c[i, j]) ref_c[i][j] = 0.0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 12; b++) begin
      for (int i = 0; i < ROWS; i++) as_[i] = '{sig: 4'($urandom), shexp: 5'($urandom_range(0, 14))};
      for (int j = 0; j < COLS; j++) ws[j]  = '{sig: 4'($urandom), shexp: 4'($urandom_range(0, 6))};
      foreach (blk[i, j]) blk[i][j] = 0.0;
      for (int k = 0; k < 16; k++) begin
        @(negedge clk);
        for (int i = 0; i < ROWS; i++) a[i] = '{sign: 1'($urandom), mag: 5'($urandom_range(0, 19))};
        for (int j = 0; j < COLS; j++) w[j] = '{sign: 1'($urandom), mag: 5'($urandom_range(0, 19))};
        en = 1; first = (k == 0); last = (k == 15);
        clr = (b == 6 && k == 0);
        if (clr) foreach (ref_c[i, j]) ref_c[i][j] = 0.0;
        foreach (blk[i, j]) blk[i][j] += half_units(a[i].sign, a[i].mag) * half_units(w[j].sign, w[j].mag);
      end
      @(negedge clk);
      en = 0; first = 0; last = 0; clr = 0;
      foreach (ref_c[i, j])
        ref_c[i][j] += blk[i][j] * real'(as_[i].sig) * pow2(int'(as_[i].shexp) - 9)
                                 * real'(ws[j].sig)  * pow2(int'(ws[j].shexp) - 5);
      check_all("block");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
