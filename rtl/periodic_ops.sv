// periodic_ops: Periodic Operations Module of the PiDRAM memory controller.
//
// Issues the DRAM work that is driven by time rather than by requests:
//   * refresh: ref_req rises every tREFI and stays up until the scheduler
//     reports the REF command (ref_ack); the interval counter keeps running
//     meanwhile, so refreshes average one per tREFI;
//   * interface maintenance: a ZQ short calibration request every
//     ZQ_INTERVAL, handled the same way;
//   * true random numbers: the D-RaNGe controller and its 1 KiB random
//     number buffer live here, as in the paper.  The buffer's read side
//     (head word, pop, word count) is brought out for the buf_size and
//     rand_dram PiDRAM instructions.
// Intervals are parameters in nanoseconds, converted to cycles of the
// CLK_NS controller clock.  tREFI = 7.8 us is the DDR3 value; the ZQ
// interval of 128 ms is this design's choice, since the paper only says
// maintenance commands are issued periodically.
module periodic_ops
  import pidram_pkg::*;
#(
  parameter int unsigned CLK_NS         = CLK_PS / 1000,
  parameter int unsigned T_REFI_NS      = 7800,
  parameter int unsigned ZQ_INTERVAL_NS = 128_000_000,
  parameter int unsigned RNG_WORDS      = RNG_DEPTH
) (
  input  logic       clk,
  input  logic       rst_n,
  // refresh / maintenance
  output logic       ref_req,
  input  logic       ref_ack,
  output logic       zq_req,
  input  logic       zq_ack,
  // D-RaNGe configuration (from the CRF)
  input  logic       trng_en,
  input  crf_word_t  trng_period_ns,
  input  logic [8:0] trng_cfg_bit [TRNG_CELLS],
  // D-RaNGe accesses through the scheduler
  output logic       trng_req,
  input  logic       trng_ack,
  input  logic       trng_rvalid,
  input  blk_t       trng_rdata,
  // random number buffer read side
  input  logic                         rng_pop,
  output logic [RNG_WORD_W-1:0]        rng_head,
  output logic                         rng_empty,
  output logic [$clog2(RNG_WORDS+1)-1:0] rng_count
);
  localparam int unsigned REFI_CYC = (T_REFI_NS + CLK_NS - 1) / CLK_NS;
  localparam int unsigned ZQ_CYC   = (ZQ_INTERVAL_NS + CLK_NS - 1) / CLK_NS;

  logic [31:0] ref_cnt, zq_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ref_cnt <= '0;
      zq_cnt  <= '0;
      ref_req <= 1'b0;
      zq_req  <= 1'b0;
    end else begin
      if (ref_cnt == REFI_CYC - 1) begin
        ref_cnt <= '0;
        ref_req <= 1'b1;
      end else begin
        ref_cnt <= ref_cnt + 1;
        if (ref_ack) ref_req <= 1'b0;
      end
      if (zq_cnt == ZQ_CYC - 1) begin
        zq_cnt <= '0;
        zq_req <= 1'b1;
      end else begin
        zq_cnt <= zq_cnt + 1;
        if (zq_ack) zq_req <= 1'b0;
      end
    end
  end

  logic                  buf_full, buf_push;
  logic [RNG_WORD_W-1:0] buf_word;

  drange_ctrl #(.CLK_NS(CLK_NS)) u_drange (
    .clk, .rst_n,
    .enable    (trng_en),
    .period_ns (trng_period_ns),
    .cfg_bit   (trng_cfg_bit),
    .trng_req,
    .trng_ack, .trng_rvalid, .trng_rdata,
    .buf_full,
    .push      (buf_push),
    .push_word (buf_word)
  );

  rng_buffer #(.WIDTH(RNG_WORD_W), .DEPTH(RNG_WORDS)) u_buf (
    .clk, .rst_n,
    .push  (buf_push),
    .din   (buf_word),
    .pop   (rng_pop),
    .head  (rng_head),
    .empty (rng_empty),
    .full  (buf_full),
    .count (rng_count)
  );
endmodule
