// drange_ctrl: D-RaNGe true random number generation controller.
//
// D-RaNGe takes its entropy from DRAM cells that fail with about 50 %
// probability when read with a violated (reduced) activation latency tRCD.
// This controller samples four such cells, all in one 64-byte cache block
// of one bank.  Every TRNG period, and only while the random number buffer
// is not full, it asks the command scheduler for one reduced-tRCD read of
// that block (trng_req until trng_ack).  When the block returns
// (trng_rvalid) it picks the four bits at the configured bit offsets and
// shifts them into a 32-bit word, first sample in the most significant
// nibble; after eight samples the word is pushed into the buffer.
//
// Configuration comes from the CRF: enable, period in nanoseconds and the
// four bit offsets (0..511 within the block); the block's bank, row and
// column go from the CRF straight to the scheduler.  The
// period is measured from one accepted request to the next, in steps of
// the controller clock period CLK_NS, so the sample rate is one 4-bit
// sample per max(period, access time).  The nibble order and the
// measure-from-acceptance rule are this design's choices.
module drange_ctrl
  import pidram_pkg::*;
#(
  parameter int unsigned CLK_NS = CLK_PS / 1000
) (
  input  logic       clk,
  input  logic       rst_n,
  // configuration
  input  logic       enable,
  input  crf_word_t  period_ns,
  input  logic [8:0] cfg_bit [TRNG_CELLS],
  // to / from the command scheduler
  output logic       trng_req,
  input  logic       trng_ack,
  input  logic       trng_rvalid,
  input  blk_t       trng_rdata,
  // to the random number buffer
  input  logic       buf_full,
  output logic       push,
  output logic [RNG_WORD_W-1:0] push_word
);
  localparam int unsigned NIBBLES = RNG_WORD_W / TRNG_CELLS;

  crf_word_t                    elapsed_ns;
  logic                         pending;
  logic [RNG_WORD_W-1:0]        acc;
  logic [$clog2(NIBBLES)-1:0]   nib_cnt;
  logic [TRNG_CELLS-1:0]        sample;

  assign trng_req  = enable && !buf_full && !pending && (elapsed_ns >= period_ns);

  always_comb begin
    for (int i = 0; i < TRNG_CELLS; i++) sample[TRNG_CELLS-1-i] = trng_rdata[cfg_bit[i]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      elapsed_ns <= '0;
      pending    <= 1'b0;
      acc        <= '0;
      nib_cnt    <= '0;
      push       <= 1'b0;
      push_word  <= '0;
    end else begin
      push <= 1'b0;
      if (trng_req && trng_ack) begin
        elapsed_ns <= crf_word_t'(CLK_NS);
        pending    <= 1'b1;
      end else if (elapsed_ns < period_ns) begin
        elapsed_ns <= elapsed_ns + crf_word_t'(CLK_NS);
      end
      if (trng_rvalid && pending) begin
        pending <= 1'b0;
        acc     <= {acc[RNG_WORD_W-TRNG_CELLS-1:0], sample};
        nib_cnt <= nib_cnt + 1'b1;
        if (nib_cnt == ($clog2(NIBBLES))'(NIBBLES - 1)) begin
          push      <= 1'b1;
          push_word <= {acc[RNG_WORD_W-TRNG_CELLS-1:0], sample};
        end
      end
    end
  end

  // Only one sample is in flight at a time.
  a_one_pending: assert property (@(posedge clk) disable iff (!rst_n)
                                  trng_ack |-> !pending);
endmodule
