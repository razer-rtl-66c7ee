// tb_razer_tensor_core -- end-to-end test of the RaZeR tensor core at its
// default size (16 x 16 MAC array, 4096-word SRAM).
//
// The testbench generates random RaZeR operands: a 16-row activation tile and
// a 16-column weight tile of K = 16 * nblk elements, FP4 codes with many +0
// (remapped) and -0 (not remapped) codes, and random scale bytes carrying
// E3M3 / E4M3 scales (subnormal ones included) and the metadata bits. It
// writes them into the SRAM through the host port in the documented layout,
// programs the offset registers, runs a job and compares all 256 results with
// a real-valued reference computed straight from the codes. The job latency
// (18 * nblk + 2 cycles from start to done) is checked too.
//
// Jobs use the special-value sets evaluated for the weights (+/-5 with +/-8,
// +/-7 or +/-9; activations +/-5) and random offsets, and include a K = 4096
// dot product split over two jobs (the hidden size of Llama-3.1-8B), the
// second one accumulating onto the first without clear. Each mechanism --
// the four weight special values, the two activation special values,
// negative zero, subnormal scales, multi-block jobs, accumulation across
// jobs, clear -- is counted; one that never happened counts as a failure.
`timescale 1ns/1ps
module tb_razer_tensor_core;
  import razer_pkg::*;
  import razer_ref_pkg::*;

  localparam int ROWS = 16, COLS = 16, ACC_W = 56, AW = 12, WPB = 18;
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

  // Mechanism counters.
  int n_wsv [4];      // weight special value, index {sign, sel}
  int n_asv [2];      // activation special value, index sign
  int n_negzero, n_wsub, n_asub, n_multiblk, n_accum, n_clear;

  function automatic logic [3:0] rnd_code();
    int r;
    r = $urandom_range(0, 7);
    if (r < 2) return 4'b0000;       // remapped zero
    if (r == 2) return 4'b1000;      // negative zero stays zero
    return 4'($urandom);
  endfunction

  task automatic program_offsets(input logic [3:0] w0, input logic [3:0] w1, input logic [3:0] a);
    of_w0 = w0; of_w1 = w1; of_a = a;
    @(negedge clk); of_we = 3'b001; of_wdata = w0;
    @(negedge clk); of_we = 3'b010; of_wdata = w1;
    @(negedge clk); of_we = 3'b100; of_wdata = a;
    @(negedge clk); of_we = 3'b000;
  endtask

  // Generate nblk blocks at base, write them to the SRAM, update the reference.
  task automatic load_blocks(input int b0, input int nb, input bit clr_ref);
    logic [7:0] wsb [COLS];
    logic [7:0] asb [ROWS];
    logic [3:0] wc  [COLS];
    logic [3:0] ac  [ROWS];
    logic [127:0] word;
    real blk [ROWS][COLS];
    if (clr_ref) foreach (ref_c[i, j]) ref_c[i][j] = 0.0;
    for (int b = 0; b < nb; b++) begin
      int addr;
      addr = b0 + b * WPB;
      foreach (wsb[j]) begin
        wsb[j] = 8'($urandom);
        if ($urandom_range(0, 9) == 0) wsb[j][5:3] = 3'd0;   // subnormal E3M3
      end
      foreach (asb[i]) begin
        asb[i] = 8'($urandom);
        if (asb[i][6:3] == 4'hf && asb[i][2:0] == 3'h7) asb[i][0] = 1'b0;  // avoid the E4M3 NaN code
        if ($urandom_range(0, 9) == 0) asb[i][6:3] = 4'd0;   // subnormal E4M3
      end
      for (int j = 0; j < COLS; j++) word[8*j +: 8] = wsb[j];
      @(negedge clk); mem_we = 1; mem_waddr = AW'(addr); mem_wdata = word;
      for (int i = 0; i < ROWS; i++) word[8*i +: 8] = asb[i];
      @(negedge clk); mem_waddr = AW'(addr + 1); mem_wdata = word;
      foreach (blk[i, j]) blk[i][j] = 0.0;
      for (int k = 0; k < 16; k++) begin
        foreach (wc[j]) wc[j] = rnd_code();
        foreach (ac[i]) ac[i] = rnd_code();
        for (int j = 0; j < COLS; j++) word[4*j +: 4] = wc[j];
        for (int i = 0; i < ROWS; i++) word[64 + 4*i +: 4] = ac[i];
        @(negedge clk); mem_waddr = AW'(addr + 2 + k); mem_wdata = word;
        for (int i = 0; i < ROWS; i++)
          for (int j = 0; j < COLS; j++)
            blk[i][j] += rzr_value(ac[i], of_a, asb[i][7])
                       * rzr_value(wc[j], wsb[j][6] ? of_w1 : of_w0, wsb[j][7]);
        foreach (wc[j]) begin
          if (wc[j] == 4'b0000) n_wsv[{wsb[j][7], wsb[j][6]}]++;
          if (wc[j] == 4'b1000) n_negzero++;
        end
        foreach (ac[i]) begin
          if (ac[i] == 4'b0000) n_asv[asb[i][7]]++;
          if (ac[i] == 4'b1000) n_negzero++;
        end
      end
      foreach (wsb[j]) if (wsb[j][5:3] == 3'd0) n_wsub++;
      foreach (asb[i]) if (asb[i][6:3] == 4'd0) n_asub++;
      for (int i = 0; i < ROWS; i++)
        for (int j = 0; j < COLS; j++)
          ref_c[i][j] += blk[i][j] * e4m3_value(asb[i][6:0]) * e3m3_value(wsb[j][5:0]);
    end
    @(negedge clk); mem_we = 0;
  endtask

  task automatic run_job(input int b0, input int nb, input bit do_clear);
    int cycles;
    @(negedge clk);
    start = 1; clear = do_clear; base = AW'(b0); nblk = 8'(nb);
    @(negedge clk);
    start = 0; clear = 0;
    cycles = 1;
    while (!done) begin
      @(negedge clk);
      cycles++;
    end
    checks++;
    if (cycles != WPB * nb + 2) begin
      failures++;
      $display("FAIL latency: %0d cycles for %0d blocks, expected %0d", cycles, nb, WPB * nb + 2);
    end
    if (nb > 1) n_multiblk++;
    if (do_clear) n_clear++; else n_accum++;
  endtask

  task automatic check_results(input string what);
    for (int i = 0; i < ROWS; i++)
      for (int j = 0; j < COLS; j++) begin
        real got;
        res_row = 4'(i); res_col = 4'(j);
        #1;
        got = real'(res) * pow2(-16);
        checks++;
        if (got != ref_c[i][j]) begin
          failures++;
          if (failures < 10) $display("FAIL %s C[%0d][%0d] got %f exp %f", what, i, j, got, ref_c[i][j]);
        end
      end
  endtask

  task automatic need(input int n, input string what);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end else $display("  %-34s %0d", what, n);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mem_we = 0; mem_waddr = '0; mem_wdata = '0; of_we = '0; of_wdata = '0;
    start = 0; clear = 0; base = '0; nblk = '0; res_row = '0; res_col = '0;
    n_negzero = 0; n_wsub = 0; n_asub = 0; n_multiblk = 0; n_accum = 0; n_clear = 0;
    n_wsv = '{default: 0}; n_asv = '{default: 0};
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. Single block, weights {+/-5, +/-8}, activations {+/-5}.
    program_offsets(4'b1010, 4'b0100, 4'b1010);
    load_blocks(0, 1, 1'b1);
    run_job(0, 1, 1'b1);
    check_results("1 block, sv 5/8");

    // 2. Four blocks accumulated onto job 1's result (no clear).
    load_blocks(100, 4, 1'b0);
    run_job(100, 4, 1'b0);
    check_results("accumulate 4 blocks");

    // 3. Weights {+/-5, +/-7}, {+/-5, +/-9}, then random offsets.
    program_offsets(4'b1010, 4'b0010, 4'b1010);
    load_blocks(0, 3, 1'b1);
    run_job(0, 3, 1'b1);
    check_results("sv 5/7");
    program_offsets(4'b1010, 4'b0110, 4'b1010);
    load_blocks(500, 5, 1'b1);
    run_job(500, 5, 1'b1);
    check_results("sv 5/9");
    for (int r = 0; r < 3; r++) begin
      program_offsets(4'($urandom), 4'($urandom), 4'($urandom));
      load_blocks(60 * r, 2, 1'b1);
      run_job(60 * r, 2, 1'b1);
      check_results("random offsets");
    end

    // 4. K = 4096: 256 blocks split into two jobs of 128 blocks.
    program_offsets(4'b1010, 4'b0100, 4'b1010);
    load_blocks(0, 128, 1'b1);
    run_job(0, 128, 1'b1);
    load_blocks(0, 128, 1'b0);
    run_job(0, 128, 1'b0);
    check_results("K=4096");

    $display("mechanisms exercised:");
    need(n_wsv[0], "weight special value +(6+OF0)");
    need(n_wsv[1], "weight special value +(6+OF1)");
    need(n_wsv[2], "weight special value -(6+OF0)");
    need(n_wsv[3], "weight special value -(6+OF1)");
    need(n_asv[0], "activation special value +(6+OF)");
    need(n_asv[1], "activation special value -(6+OF)");
    need(n_negzero, "negative zero kept as zero");
    need(n_wsub, "subnormal E3M3 weight scale");
    need(n_asub, "subnormal E4M3 activation scale");
    need(n_multiblk, "multi-block job");
    need(n_accum, "accumulation across jobs");
    need(n_clear, "accumulator clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
