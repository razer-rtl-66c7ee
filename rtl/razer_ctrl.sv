// razer_ctrl -- job sequencer of the RaZeR tensor core.
//
// A job computes C += A x W over nblk_i K blocks for one 16 x 16 output tile.
// After start_i the controller reads, for every block, WPB = BLOCK + 2 SRAM
// words from consecutive addresses beginning at base_i: the weight scale word,
// the activation scale word and BLOCK element words (layout in razer_sram).
// The SRAM answers one cycle later, so every strobe is delayed by one cycle to
// line up with the read data:
//   wld_o   - latch the weight scale/metadata bytes (word 0 of a block)
//   ald_o   - latch the activation scale/metadata bytes (word 1)
//   en_o    - element word valid (words 2..BLOCK+1), with first_o / last_o
//             marking the first and last K step of the block.
// clr_o pulses in the start cycle when clear_i is set, zeroing the output
// accumulators before the first block result arrives; without clear_i a job
// adds to the previous result, so long K dimensions can be split into jobs.
//
// Timing: a job of N blocks takes (BLOCK+2)*N read cycles; done_o pulses
// (BLOCK+2)*N + 2 cycles after the start cycle, the first cycle in which the
// accumulators hold the final result. busy_o is high from the cycle after
// start until done_o. start_i is ignored while busy.
// The paper does not describe a controller; this one is this design's own.
module razer_ctrl #(
  parameter int unsigned BLOCK  = 16,
  parameter int unsigned AW     = 12,
  parameter int unsigned NBLK_W = 8
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              start_i,
  input  logic              clear_i,
  input  logic [AW-1:0]     base_i,
  input  logic [NBLK_W-1:0] nblk_i,
  output logic              re_o,
  output logic [AW-1:0]     raddr_o,
  output logic              wld_o,
  output logic              ald_o,
  output logic              en_o,
  output logic              first_o,
  output logic              last_o,
  output logic              clr_o,
  output logic              busy_o,
  output logic              done_o
);

  localparam int unsigned WPB  = BLOCK + 2;      // SRAM words per K block
  localparam int unsigned SW   = $clog2(WPB);

  typedef enum logic [1:0] {S_IDLE, S_READ, S_DRAIN} state_e;

  state_e            state_q;
  logic [AW-1:0]     addr_q;
  logic [SW-1:0]     step_q;
  logic [NBLK_W-1:0] blk_q;
  logic [NBLK_W-1:0] nblk_q;

  // Strobes for the word being read this cycle, registered to meet the data.
  logic wld_d, ald_d, en_d, first_d, last_d;
  logic final_d;

  assign re_o    = (state_q == S_READ);
  assign raddr_o = addr_q;

  always_comb begin
    wld_d   = re_o && (step_q == SW'(0));
    ald_d   = re_o && (step_q == SW'(1));
    en_d    = re_o && (step_q >= SW'(2));
    first_d = re_o && (step_q == SW'(2));
    last_d  = re_o && (step_q == SW'(WPB - 1));
    final_d = last_d && (blk_q == nblk_q - NBLK_W'(1));
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      addr_q  <= '0;
      step_q  <= '0;
      blk_q   <= '0;
      nblk_q  <= '0;
      wld_o   <= 1'b0;
      ald_o   <= 1'b0;
      en_o    <= 1'b0;
      first_o <= 1'b0;
      last_o  <= 1'b0;
      done_o  <= 1'b0;
    end else begin
      wld_o   <= wld_d;
      ald_o   <= ald_d;
      en_o    <= en_d;
      first_o <= first_d;
      last_o  <= last_d;
      done_o  <= 1'b0;
      unique case (state_q)
        S_IDLE: begin
          if (start_i && nblk_i != '0) begin
            state_q <= S_READ;
            addr_q  <= base_i;
            step_q  <= '0;
            blk_q   <= '0;
            nblk_q  <= nblk_i;
          end
        end
        S_READ: begin
          addr_q <= addr_q + AW'(1);
          if (step_q == SW'(WPB - 1)) begin
            step_q <= '0;
            blk_q  <= blk_q + NBLK_W'(1);
          end else begin
            step_q <= step_q + SW'(1);
          end
          if (final_d) state_q <= S_DRAIN;
        end
        S_DRAIN: begin
          // The final block's last strobe is applied by the MACs this cycle.
          state_q <= S_IDLE;
          done_o  <= 1'b1;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign clr_o  = (state_q == S_IDLE) && start_i && clear_i && (nblk_i != '0);
  assign busy_o = (state_q != S_IDLE);

  // A job must not run past the end of the SRAM address space.
  property p_no_wrap;
    @(posedge clk_i) disable iff (!rst_ni) re_o |-> !(addr_q == '1 && !final_d);
  endproperty
  a_no_wrap: assert property (p_no_wrap);

endmodule
