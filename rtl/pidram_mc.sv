// pidram_mc: PiDRAM custom memory controller.
//
// Joins the parts of the controller:
//   * cmd_scheduler + cmd_timer: the memory request scheduler, serving
//     LOAD/STORE traffic and the RowClone and reduced-tRCD sequences;
//   * periodic_ops: refresh, ZQ calibration, D-RaNGe controller and random
//     number buffer;
//   * crf: the configuration register file;
//   * an instruction dispatcher for the POC interface.
// The dispatcher sends COPY_ROW and ACT_FAIL to the scheduler, whose accept
// and finish pulses become the POC's Ack and Fin (ACT_FAIL also returns the
// low 64 bits of the block it read).  WRITE_CRF, READ_CRF, RNG_SIZE and
// RNG_READ are served in the cycle they are offered: Ack, Fin and, where
// there is one, the result arrive together.  RNG_READ on an empty buffer
// returns zero.  Returning only the low 64 bits of an ACT_FAIL read is this
// design's choice; the paper does not say what the data register holds
// after that operation.  Unknown opcodes are acknowledged and finish at
// once without effect.
//
// The CPU side is a cache-block request port (see cmd_scheduler); the DRAM
// side a DFI-style port with one DDR3 command per controller cycle, write
// data beside the WR command and read data returned with rddata_valid.
module pidram_mc
  import pidram_pkg::*;
#(
  parameter int unsigned T_REFI_NS      = 7800,
  parameter int unsigned ZQ_INTERVAL_NS = 128_000_000,
  parameter int unsigned RNG_WORDS      = RNG_DEPTH
) (
  input  logic       clk,
  input  logic       rst_n,
  // LOAD/STORE port
  input  logic       req_valid,
  output logic       req_ready,
  input  logic       req_we,
  input  pa_t        req_addr,
  input  blk_t       req_wdata,
  output logic       rsp_valid,
  output blk_t       rsp_rdata,
  // POC interface
  input  logic       pim_valid,
  input  pim_instr_t pim_instr,
  output logic       pim_ack,
  output logic       pim_fin,
  output logic       pim_dvalid,
  output word_t      pim_data,
  // DFI-style DRAM interface
  output dfi_cmd_t   dfi_cmd,
  output logic       dfi_wrdata_en,
  output blk_t       dfi_wrdata,
  input  logic       dfi_rddata_valid,
  input  blk_t       dfi_rddata
);
  logic [63:0] iraw;
  assign iraw = pim_instr;

  // ---------------------------------------------------------- CRF
  crf_word_t crf_regs [CRF_N];
  crf_word_t crf_rdata;
  logic      crf_we;

  crf u_crf (
    .clk, .rst_n,
    .we    (crf_we),
    .waddr (iraw[35:32]),
    .wdata (iraw[31:0]),
    .raddr (iraw[35:32]),
    .rdata (crf_rdata),
    .regs  (crf_regs)
  );

  // ------------------------------------------------ periodic operations
  logic       ref_req, ref_ack, zq_req, zq_ack;
  logic       trng_req, trng_ack, trng_rvalid;
  bank_t      trng_bank;
  row_t       trng_row;
  col_t       trng_col;
  blk_t       trng_rdata;
  logic [8:0] trng_bits [TRNG_CELLS];
  logic                           rng_pop, rng_empty;
  logic [RNG_WORD_W-1:0]          rng_head;
  logic [$clog2(RNG_WORDS+1)-1:0] rng_count;

  // the TRNG block address goes from the CRF straight to the scheduler
  assign trng_bank = crf_regs[CRF_TRNG_BANK][BANK_W-1:0];
  assign trng_row  = crf_regs[CRF_TRNG_ROW][ROW_W-1:0];
  assign trng_col  = crf_regs[CRF_TRNG_COL][COL_W-1:0];

  always_comb begin
    for (int i = 0; i < TRNG_CELLS; i++) trng_bits[i] = crf_regs[CRF_TRNG_BIT0 + i][8:0];
  end

  periodic_ops #(
    .T_REFI_NS(T_REFI_NS), .ZQ_INTERVAL_NS(ZQ_INTERVAL_NS), .RNG_WORDS(RNG_WORDS)
  ) u_periodic (
    .clk, .rst_n,
    .ref_req, .ref_ack, .zq_req, .zq_ack,
    .trng_en        (crf_regs[CRF_TRNG_EN][0]),
    .trng_period_ns (crf_regs[CRF_TRNG_PERIOD]),
    .trng_cfg_bit   (trng_bits),
    .trng_req,
    .trng_ack, .trng_rvalid, .trng_rdata,
    .rng_pop, .rng_head, .rng_empty, .rng_count
  );

  // ------------------------------------------------ dispatcher
  logic sched_pum_valid, sched_pum_ack, sched_pum_fin;
  blk_t sched_pum_rdata;
  logic is_sched_op, is_afail_q;

  assign is_sched_op     = pim_instr.op == OP_COPY_ROW || pim_instr.op == OP_ACT_FAIL;
  assign sched_pum_valid = pim_valid && is_sched_op;

  always_comb begin
    crf_we     = 1'b0;
    rng_pop    = 1'b0;
    pim_ack    = 1'b0;
    pim_fin    = 1'b0;
    pim_dvalid = 1'b0;
    pim_data   = '0;
    if (pim_valid && !is_sched_op) begin
      pim_ack = 1'b1;
      pim_fin = 1'b1;
      unique case (pim_instr.op)
        OP_WRITE_CRF: crf_we = 1'b1;
        OP_READ_CRF:  begin pim_dvalid = 1'b1; pim_data = word_t'(crf_rdata); end
        OP_RNG_SIZE:  begin pim_dvalid = 1'b1; pim_data = word_t'(rng_count); end
        OP_RNG_READ:  begin
          pim_dvalid = 1'b1;
          pim_data   = rng_empty ? '0 : word_t'(rng_head);
          rng_pop    = !rng_empty;
        end
        default: ;
      endcase
    end else begin
      pim_ack = sched_pum_ack;
      pim_fin = sched_pum_fin;
      if (sched_pum_fin && is_afail_q) begin
        pim_dvalid = 1'b1;
        pim_data   = sched_pum_rdata[WORD_W-1:0];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              is_afail_q <= 1'b0;
    else if (sched_pum_ack)  is_afail_q <= pim_instr.op == OP_ACT_FAIL;
  end

  // ------------------------------------------------ scheduler + timer
  dram_cmd_e tq_cmd;
  bank_t     tq_bank;
  bypass_t   tq_bypass;
  logic      tq_ok, issue_valid;

  cmd_timer u_timer (
    .clk, .rst_n,
    .query_cmd    (tq_cmd),
    .query_bank   (tq_bank),
    .query_bypass (tq_bypass),
    .ok           (tq_ok),
    .issue_valid  (issue_valid),
    .issue_cmd    (tq_cmd),
    .issue_bank   (tq_bank)
  );

  cmd_scheduler u_sched (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_we, .req_addr, .req_wdata,
    .rsp_valid, .rsp_rdata,
    .pum_valid (sched_pum_valid),
    .pum_op    (pim_instr.op),
    .pum_src   (pim_instr.addr_a),
    .pum_dst   (pim_instr.addr_b),
    .pum_ack   (sched_pum_ack),
    .pum_fin   (sched_pum_fin),
    .pum_rdata (sched_pum_rdata),
    .ref_req, .ref_ack, .zq_req, .zq_ack,
    .trng_req, .trng_bank, .trng_row, .trng_col,
    .trng_ack, .trng_rvalid, .trng_rdata,
    .rc_t1    (crf_regs[CRF_RC_T1]),
    .rc_t2    (crf_regs[CRF_RC_T2]),
    .trcd_red (crf_regs[CRF_TRCD_RED]),
    .tq_cmd, .tq_bank, .tq_bypass, .tq_ok, .issue_valid,
    .dfi_cmd, .dfi_wrdata_en, .dfi_wrdata, .dfi_rddata_valid, .dfi_rddata
  );
endmodule
