// tb_razer_mac -- random test of one block-scaled MAC unit.
// Feeds blocks of 16 random RaZeR operand pairs (magnitudes 0..19 half units,
// random signs) with random decoded block scales, with idle cycles between
// K steps, and checks after every block that acc_o * 2^-16 equals the real
// reference sum of a*w*scale_a*scale_w. Also checks clear, clear together with
// a block result, and the largest possible block term.
`timescale 1ns/1ps
module tb_razer_mac;
  import razer_pkg::*;
  import razer_ref_pkg::*;

  localparam int ACC_W = 56;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clr, en, first, last;
  rzr_t a, w;
  ascale_t as_;
  wscale_t ws;
  logic signed [ACC_W-1:0] acc;
  real ref_acc, blk;

  razer_mac #(.ACC_W(ACC_W)) dut (.clk_i(clk), .rst_ni(rst_n), .clr_i(clr), .en_i(en),
    .first_i(first), .last_i(last), .a_i(a), .w_i(w), .as_i(as_), .ws_i(ws), .acc_o(acc));

  function automatic real rv(input rzr_t x);
    return half_units(x.sign, x.mag);
  endfunction

  task automatic check_acc(input string what);
    real got;
    got = real'(acc) * pow2(-16);
    checks++;
    if (got != ref_acc) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %f exp %f", what, got, ref_acc);
    end
  endtask

  // One block; max_ops forces every operand and scale to its maximum.
  task automatic run_block(input bit do_clr, input bit max_ops);
    as_.sig = max_ops ? 4'd15 : 4'($urandom); as_.shexp = max_ops ? 5'd14 : 5'($urandom_range(0, 14));
    ws.sig  = max_ops ? 4'd15 : 4'($urandom); ws.shexp  = max_ops ? 4'd6  : 4'($urandom_range(0, 6));
    blk = 0.0;
    for (int k = 0; k < 16; k++) begin
      @(negedge clk);
      clr = 0;
      a.mag = max_ops ? 5'd19 : 5'($urandom_range(0, 19)); a.sign = max_ops ? 1'b1 : 1'($urandom);
      w.mag = max_ops ? 5'd19 : 5'($urandom_range(0, 19)); w.sign = max_ops ? 1'b1 : 1'($urandom);
      en = 1; first = (k == 0); last = (k == 15);
      if (k == 15 && do_clr) clr = 1;
      blk += rv(a) * rv(w);
      @(negedge clk);
      en = 0; first = 0; last = 0; clr = 0;
      a = '{sign: 1'($urandom), mag: 5'($urandom)};   // junk while idle
      w = '{sign: 1'($urandom), mag: 5'($urandom)};
    end
    if (do_clr) ref_acc = 0.0;
    ref_acc += blk * real'(as_.sig) * pow2(int'(as_.shexp) - 9) * real'(ws.sig) * pow2(int'(ws.shexp) - 5);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clr = 0; en = 0; first = 0; last = 0; a = '0; w = '0; as_ = '0; ws = '0;
    ref_acc = 0.0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); check_acc("reset");
    for (int b = 0; b < 200; b++) begin
      run_block(b % 37 == 20, 1'b0);
      check_acc("block");
    end
    // Clear alone.
    @(negedge clk); clr = 1; ref_acc = 0.0;
    @(negedge clk); clr = 0; check_acc("clear");
    // Largest block term: 16 * 19 * 19 * 15 * 15 * 2^20 quarter-units.
    run_block(1'b0, 1'b1);
    check_acc("max block");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
