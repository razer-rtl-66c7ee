// tb_razer_workload_gemm -- long-K reductions of evaluated LLM layers on the
// RaZeR tensor core at its default size.
//
// One 16 x 16 output tile of the widest down-projection of three evaluated
// models is computed, each with the special-value set used for that model:
//   Llama-3.1-8B  K = 14336 (896 blocks), weights {+/-5, +/-8}
//   Qwen3-8B      K = 12288 (768 blocks), weights {+/-5, +/-7}
//   Qwen3-32B     K = 25600 (1600 blocks), weights {+/-5, +/-9}
// activations {+/-5} throughout (layer sizes are the models' published
// intermediate sizes). The SRAM holds 227 blocks, so each reduction is loaded
// and run as jobs of up to 200 blocks, accumulated without clear. Operands are
// random RaZeR codes and scales; all 256 results are compared exactly with a
// real-valued reference. A final worst-case run (every element the largest
// special value 9.5, largest scales, 1600 blocks) checks that the
// accumulator does not overflow at the deepest evaluated K.
`timescale 1ns/1ps
module tb_razer_workload_gemm;
  import razer_pkg::*;
  import razer_ref_pkg::*;

  localparam int ROWS = 16, COLS = 16, ACC_W = 56, AW = 12, WPB = 18, JOB = 200;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             mem_we;
  logic [AW-1:0]    mem_waddr;
  logic [127:0]     mem_wdata;
  logic [2:0]       of_we;
  logic [3:0]       of_wdata;
  logic             start, clear, busy, done;
  logic [AW-1:0]    base;
  logic [7:0]       nblk;
  logic [3:0]       res_row, res_col;
  logic signed [ACC_W-1:0] res;

  razer_tensor_core dut (
    .clk_i(clk), .rst_ni(rst_n),
    .mem_we_i(mem_we), .mem_waddr_i(mem_waddr), .mem_wdata_i(mem_wdata),
    .of_we_i(of_we), .of_wdata_i(of_wdata),
    .start_i(start), .clear_i(clear), .base_i(base), .nblk_i(nblk),
    .busy_o(busy), .done_o(done),
    .res_row_i(res_row), .res_col_i(res_col), .res_o(res));

  logic [3:0] of_w0, of_w1, of_a;
  real ref_c [ROWS][COLS];
  longint total_cycles;

  task automatic program_offsets(input logic [3:0] w0, input logic [3:0] w1, input logic [3:0] a);
    of_w0 = w0; of_w1 = w1; of_a = a;
    @(negedge clk); of_we = 3'b001; of_wdata = w0;
    @(negedge clk); of_we = 3'b010; of_wdata = w1;
    @(negedge clk); of_we = 3'b100; of_wdata = a;
    @(negedge clk); of_we = 3'b000;
  endtask

  // Write nb blocks from SRAM address 0 and add them to the reference.
  task automatic load_blocks(input int nb, input bit worst);
    logic [7:0] wsb [COLS];
    logic [7:0] asb [ROWS];
    logic [3:0] wc  [COLS];
    logic [3:0] ac  [ROWS];
    logic [127:0] word;
    real blk [ROWS][COLS];
    for (int b = 0; b < nb; b++) begin
      foreach (wsb[j]) wsb[j] = worst ? 8'hBF : 8'($urandom);        // sign 1, sel 0, E3M3 max
      foreach (asb[i]) asb[i] = worst ? 8'h7E : {1'($urandom), 3'($urandom), 4'($urandom)};
      for (int j = 0; j < COLS; j++) word[8*j +: 8] = wsb[j];
      @(negedge clk); mem_we = 1; mem_waddr = AW'(b * WPB); mem_wdata = word;
      for (int i = 0; i < ROWS; i++) word[8*i +: 8] = asb[i];
      @(negedge clk); mem_waddr = AW'(b * WPB + 1); mem_wdata = word;
      foreach (blk[i, j]) blk[i][j] = 0.0;
      for (int k = 0; k < 16; k++) begin
        foreach (wc[j]) wc[j] = worst ? 4'h0 : (($urandom_range(0, 3) == 0) ? 4'h0 : 4'($urandom));
        foreach (ac[i]) ac[i] = worst ? 4'h0 : (($urandom_range(0, 3) == 0) ? 4'h0 : 4'($urandom));
        for (int j = 0; j < COLS; j++) word[4*j +: 4] = wc[j];
        for (int i = 0; i < ROWS; i++) word[64 + 4*i +: 4] = ac[i];
        @(negedge clk); mem_waddr = AW'(b * WPB + 2 + k); mem_wdata = word;
        for (int i = 0; i < ROWS; i++)
          for (int j = 0; j < COLS; j++)
            blk[i][j] += rzr_value(ac[i], of_a, asb[i][7])
                       * rzr_value(wc[j], wsb[j][6] ? of_w1 : of_w0, wsb[j][7]);
      end
      for (int i = 0; i < ROWS; i++)
        for (int j = 0; j < COLS; j++)
          ref_c[i][j] += blk[i][j] * e4m3_value(asb[i][6:0]) * e3m3_value(wsb[j][5:0]);
    end
    @(negedge clk); mem_we = 0;
  endtask

  task automatic run_job(input int nb, input bit do_clear);
    int cycles;
    @(negedge clk);
    start = 1; clear = do_clear; base = '0; nblk = 8'(nb);
    @(negedge clk);
    start = 0; clear = 0;
    cycles = 1;
    while (!done) begin
      @(negedge clk);
      cycles++;
    end
    total_cycles += cycles;
    checks++;
    if (cycles != WPB * nb + 2) begin
      failures++;
      $display("FAIL latency: %0d cycles for %0d blocks", cycles, nb);
    end
  endtask

  task automatic check_results(input string what);
    int bad;
    bad = 0;
    for (int i = 0; i < ROWS; i++)
      for (int j = 0; j < COLS; j++) begin
        real got;
        res_row = 4'(i); res_col = 4'(j);
        #1;
        got = real'(res) * pow2(-16);
        checks++;
        if (got != ref_c[i][j]) begin
          failures++; bad++;
          if (bad < 4) $display("FAIL %s C[%0d][%0d] got %f exp %f", what, i, j, got, ref_c[i][j]);
        end
      end
    $display("  %-40s 256 outputs checked, %0d wrong", what, bad);
  endtask

  // A reduction of K = 16 * nblocks, split into jobs of at most JOB blocks.
  task automatic reduction(input string name, input int nblocks, input logic [3:0] w1, input bit worst);
    int left, first;
    program_offsets(4'b1010, w1, worst ? 4'b0111 : 4'b1010);
    if (worst) program_offsets(4'b0111, 4'b0111, 4'b0111);  // 6 + 3.5 = 9.5 everywhere
    foreach (ref_c[i, j]) ref_c[i][j] = 0.0;
    total_cycles = 0;
    left = nblocks; first = 1;
    while (left > 0) begin
      int nb;
      nb = (left > JOB) ? JOB : left;
      load_blocks(nb, worst);
      run_job(nb, first[0]);
      first = 0;
      left -= nb;
    end
    checks++;
    if (total_cycles != longint'(WPB * nblocks + 2 * ((nblocks + JOB - 1) / JOB))) begin
      failures++;
      $display("FAIL %s: %0d compute cycles", name, total_cycles);
    end
    $display("%s: K = %0d, %0d compute cycles", name, 16 * nblocks, total_cycles);
    check_results(name);
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mem_we = 0; mem_waddr = '0; mem_wdata = '0; of_we = '0; of_wdata = '0;
    start = 0; clear = 0; base = '0; nblk = '0; res_row = '0; res_col = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    reduction("Llama-3.1-8B down_proj, sv 5/8", 14336 / 16, 4'b0100, 1'b0);
    reduction("Qwen3-8B down_proj, sv 5/7",     12288 / 16, 4'b0010, 1'b0);
    reduction("Qwen3-32B down_proj, sv 5/9",    25600 / 16, 4'b0110, 1'b0);
    reduction("worst case, K = 25600",          25600 / 16, 4'b0111, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
