// tb_razer_ctrl -- cycle-exact test of the job sequencer.
// Runs jobs of several lengths from several base addresses. A cycle model
// predicts, for every cycle after start, the SRAM read enable and address and
// the one-cycle-delayed strobes (weight scale load, activation scale load,
// element valid, first, last); all are compared every cycle. Also checks the
// clear pulse, busy, that done pulses exactly 18*N + 2 cycles after start,
// and that a zero-block job does nothing.
`timescale 1ns/1ps
module tb_razer_ctrl;
  localparam int BLOCK = 16, AW = 12, NBLK_W = 8, WPB = BLOCK + 2;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, clear;
  logic [AW-1:0] base;
  logic [NBLK_W-1:0] nblk;
  logic re, wld, ald, en, first, last, clr, busy, done;
  logic [AW-1:0] raddr;

  razer_ctrl #(.BLOCK(BLOCK), .AW(AW), .NBLK_W(NBLK_W)) dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .clear_i(clear), .base_i(base),
    .nblk_i(nblk), .re_o(re), .raddr_o(raddr), .wld_o(wld), .ald_o(ald), .en_o(en),
    .first_o(first), .last_o(last), .clr_o(clr), .busy_o(busy), .done_o(done));

  task automatic expect1(input logic got, input logic exp, input string what, input int t);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 12) $display("FAIL %s at cycle %0d: got %0d exp %0d", what, t, got, exp);
    end
  endtask

  task automatic run_job(input int n, input int b, input bit clr_req);
    int total;
    total = WPB * n + 2;
    @(negedge clk);
    start = 1; clear = clr_req; base = AW'(b); nblk = NBLK_W'(n);
    #1 expect1(clr, clr_req && n != 0, "clear pulse", 0);
    @(negedge clk);
    start = 1;   // held high: must be ignored while busy
    nblk = 8'd99;
    for (int t = 1; t <= total + 1; t++) begin
      int r, s, d;
      logic exp_re, exp_wld, exp_ald, exp_en, exp_first, exp_last;
      r = t - 1;                     // read index issued in cycle t
      exp_re = (n != 0) && (t >= 1) && (t <= WPB * n);
      d = t - 2;                     // read index whose data is present in cycle t
      s = (d >= 0) ? d % WPB : -1;
      exp_wld   = (n != 0) && d >= 0 && d < WPB * n && s == 0;
      exp_ald   = (n != 0) && d >= 0 && d < WPB * n && s == 1;
      exp_en    = (n != 0) && d >= 0 && d < WPB * n && s >= 2;
      exp_first = exp_en && s == 2;
      exp_last  = exp_en && s == WPB - 1;
      expect1(re, exp_re, "re", t);
      if (exp_re) begin
        checks++;
        if (raddr != AW'(b + r)) begin
          failures++;
          if (failures < 12) $display("FAIL raddr cycle %0d got %0d exp %0d", t, raddr, b + r);
        end
      end
      expect1(wld, exp_wld, "wld", t);
      expect1(ald, exp_ald, "ald", t);
      expect1(en, exp_en, "en", t);
      expect1(first, exp_first, "first", t);
      expect1(last, exp_last, "last", t);
      expect1(done, (n != 0) && t == total, "done", t);
      expect1(busy, (n != 0) && t < total, "busy", t);
      expect1(clr, 1'b0, "no clear while busy", t);
      if (t == total - 1) start = 0;
      @(negedge clk);
    end
    start = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; clear = 0; base = '0; nblk = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_job(1, 0, 1'b1);
    run_job(3, 100, 1'b0);
    run_job(0, 5, 1'b1);
    run_job(7, 4000 - 7 * WPB, 1'b1);
    run_job(2, 17, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
