// tb_razer_sram -- test of the operand SRAM.
// Writes random words to random addresses while keeping a shadow copy, then
// reads random addresses (and every written one) and checks that the data
// arrives exactly one cycle after the read request, that a cycle without a
// read keeps the previous output, and that a read of the address being
// written returns the old word.
`timescale 1ns/1ps
module tb_razer_sram;
  localparam int DEPTH = 4096, WIDTH = 128, AW = 12;
  int checks = 0, failures = 0;

  logic clk = 0;
  always #5 clk = ~clk;

  logic we, re;
  logic [AW-1:0] waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata, last_rd;
  logic [WIDTH-1:0] shadow [int];

  razer_sram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.clk_i(clk), .we_i(we), .waddr_i(waddr),
    .wdata_i(wdata), .re_i(re), .raddr_i(raddr), .rdata_o(rdata));

  function automatic logic [WIDTH-1:0] rnd_word();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  task automatic check(input logic [WIDTH-1:0] exp, input string what);
    checks++;
    if (rdata !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %h exp %h", what, rdata, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      we = 1; waddr = AW'($urandom); wdata = rnd_word();
      if (n < 4) waddr = AW'(n * 1365);          // include both ends of the range
      if (n == 4) waddr = AW'(DEPTH - 1);
      shadow[int'(waddr)] = wdata;
    end
    @(negedge clk); we = 0;
    foreach (shadow[addr]) begin
      @(negedge clk); re = 1; raddr = AW'(addr);
      @(negedge clk); re = 0; raddr = AW'($urandom);
      check(shadow[addr], "read");
      last_rd = rdata;
      @(negedge clk);
      check(last_rd, "hold");
    end
    // Read during a write of the same address returns the old word.
    begin
      int a;
      a = 77;
      @(negedge clk); we = 1; waddr = AW'(a); wdata = rnd_word(); re = 1; raddr = AW'(a);
      last_rd = shadow.exists(a) ? shadow[a] : '0;
      if (!shadow.exists(a)) begin
        we = 1; // first make it known
        @(negedge clk); wdata = rnd_word(); last_rd = '0;
      end
      @(negedge clk); we = 0; re = 0;
      if (shadow.exists(a)) check(last_rd, "read-during-write old data");
      shadow[a] = wdata;
      @(negedge clk); re = 1; raddr = AW'(a);
      @(negedge clk); re = 0;
      check(shadow[a], "read after write");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
