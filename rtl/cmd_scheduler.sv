// cmd_scheduler: DDR3 command scheduler with the PiDRAM custom sequences.
//
// Serves one job at a time and turns it into DDR3 commands on a DFI-style
// port, one command slot per controller cycle.  Every candidate command is
// first offered to the command timer (tq_*), and goes out only when the
// timer says ok.  Banks are left open after an access (open-bank policy);
// the scheduler keeps the open row of each bank, so a LOAD/STORE to the open
// row needs only RD/WR, one to a closed bank ACT then RD/WR, and one to
// another row PRE, ACT, RD/WR.
//
// Jobs, in fixed priority order when several wait:
//   1. refresh       (PREA if any bank is open, then REF)
//   2. ZQ short calibration (PREA if needed, then ZQCS)
//   3. LOAD/STORE    (cache-block RD or WR)
//   4. PuM operation from the POC:
//        COPY_ROW  RowClone: ACT src, PRE after T1 cycles, ACT dst after T2
//                  cycles (tRAS and tRP deliberately violated; T1 and T2 come
//                  from the configuration register file).  The bank is
//                  closed first if open.  pum_fin pulses with the last ACT.
//        ACT_FAIL  ACT, then RD after the reduced tRCD from the CRF; the
//                  block read back, with its activation failures, is
//                  returned on pum_rdata with pum_fin.
//   5. TRNG sample for the D-RaNGe controller: the same reduced-tRCD access
//      to the block named by trng_bank/row/col; data on trng_rdata.
// The priorities, and giving LOAD/STORE precedence over PuM work so that
// added PuM modules do not slow normal requests, are this design's reading
// of the paper, which asks only that new modules not compromise LOAD/STORE
// performance.
//
// Handshakes: req_ready, pum_ack and trng_ack pulse in the cycle a job is
// accepted (valid/ready style; requests hold until accepted); ref_ack and
// zq_ack pulse in the cycle the REF or ZQCS command issues.  rsp_valid
// pulses once per LOAD/STORE: for a load with the block, for a store when
// the WR command issues.  Only one read is outstanding at a time; write data
// travels with the WR command on dfi_wrdata (the PHY adds write latency).
module cmd_scheduler
  import pidram_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  // LOAD/STORE requests from the memory bus
  input  logic      req_valid,
  output logic      req_ready,
  input  logic      req_we,
  input  pa_t       req_addr,
  input  blk_t      req_wdata,
  output logic      rsp_valid,
  output blk_t      rsp_rdata,
  // PuM operations (COPY_ROW, ACT_FAIL)
  input  logic      pum_valid,
  input  pim_op_e   pum_op,
  input  pa_t       pum_src,
  input  pa_t       pum_dst,
  output logic      pum_ack,
  output logic      pum_fin,
  output blk_t      pum_rdata,
  // periodic operations
  input  logic      ref_req,
  output logic      ref_ack,
  input  logic      zq_req,
  output logic      zq_ack,
  input  logic      trng_req,
  input  bank_t     trng_bank,
  input  row_t      trng_row,
  input  col_t      trng_col,
  output logic      trng_ack,
  output logic      trng_rvalid,
  output blk_t      trng_rdata,
  // violated timings from the CRF (controller cycles)
  input  crf_word_t rc_t1,
  input  crf_word_t rc_t2,
  input  crf_word_t trcd_red,
  // command timer
  output dram_cmd_e tq_cmd,
  output bank_t     tq_bank,
  output bypass_t   tq_bypass,
  input  logic      tq_ok,
  output logic      issue_valid,
  // DFI-style DRAM interface
  output dfi_cmd_t  dfi_cmd,
  output logic      dfi_wrdata_en,
  output blk_t      dfi_wrdata,
  input  logic      dfi_rddata_valid,
  input  blk_t      dfi_rddata
);
  typedef enum logic [3:0] {
    S_IDLE, S_PREA, S_REF, S_ZQ, S_PRE, S_ACT, S_RW, S_RDWAIT, S_RC_PRE, S_RC_ACT
  } state_e;

  typedef enum logic [2:0] {
    J_RD, J_WR, J_COPY, J_AFAIL, J_TRNG, J_REF, J_ZQ
  } job_e;

  state_e  state;
  job_e    job;
  bank_t   j_bank;
  row_t    j_row, j_row2;
  col_t    j_col;
  blk_t    j_wdata;

  logic  [NBANKS-1:0] bank_open;
  row_t               open_row [NBANKS];
  crf_word_t          since;          // cycles since the last issued command

  // address decoding (pidram_pkg::dram_addr_of)
  dram_addr_t rq_a, src_a, dst_a;
  row_t  rq_row,  src_row,  dst_row;
  bank_t rq_bank, src_bank;
  col_t  rq_bcol, src_bcol;
  always_comb begin
    rq_a     = dram_addr_of(req_addr);
    src_a    = dram_addr_of(pum_src);
    dst_a    = dram_addr_of(pum_dst);
    rq_row   = rq_a.row;   rq_bank  = rq_a.bank;  rq_bcol  = rq_a.blk_col;
    src_row  = src_a.row;  src_bank = src_a.bank; src_bcol = src_a.blk_col;
    dst_row  = dst_a.row;
  end

  // ------------------------------------------------ command selection
  dram_cmd_e           cand;
  logic [DRAM_A_W-1:0] cand_addr;
  logic                cand_ready;    // sequence-specific wait satisfied

  always_comb begin
    cand       = CMD_NOP;
    cand_addr  = '0;
    cand_ready = 1'b1;
    tq_bypass  = '0;
    unique case (state)
      S_PREA:   cand = CMD_PREA;
      S_REF:    cand = CMD_REF;
      S_ZQ:     cand = CMD_ZQCS;
      S_PRE:    cand = CMD_PRE;
      S_ACT:    begin cand = CMD_ACT; cand_addr = j_row; end
      S_RW: begin
        cand      = (job == J_WR) ? CMD_WR : CMD_RD;
        cand_addr = DRAM_A_W'(j_col);
        if (job == J_AFAIL || job == J_TRNG) begin
          tq_bypass.trcd = 1'b1;
          cand_ready     = (since >= trcd_red);
        end
      end
      S_RC_PRE: begin
        cand = CMD_PRE; tq_bypass.tras = 1'b1; cand_ready = (since >= rc_t1);
      end
      S_RC_ACT: begin
        cand = CMD_ACT; cand_addr = j_row2; tq_bypass.trp = 1'b1;
        cand_ready = (since >= rc_t2);
      end
      default: ;
    endcase
  end

  assign tq_cmd      = cand;
  assign tq_bank     = j_bank;
  assign issue_valid = (cand != CMD_NOP) && cand_ready && tq_ok;
  assign dfi_cmd     = issue_valid ? encode_cmd(cand, j_bank, cand_addr)
                                   : encode_cmd(CMD_NOP, '0, '0);
  assign dfi_wrdata_en = issue_valid && cand == CMD_WR;
  assign dfi_wrdata    = j_wdata;

  // ------------------------------------------------ job acceptance
  logic take_ref, take_zq, take_req, take_pum, take_trng;
  always_comb begin
    take_ref  = (state == S_IDLE) && ref_req;
    take_zq   = (state == S_IDLE) && !ref_req && zq_req;
    take_req  = (state == S_IDLE) && !ref_req && !zq_req && req_valid;
    take_pum  = (state == S_IDLE) && !ref_req && !zq_req && !req_valid && pum_valid &&
                (pum_op == OP_COPY_ROW || pum_op == OP_ACT_FAIL);
    take_trng = (state == S_IDLE) && !ref_req && !zq_req && !req_valid && !take_pum &&
                trng_req;
  end

  assign req_ready = take_req;
  assign ref_ack   = issue_valid && state == S_REF;
  assign zq_ack    = issue_valid && state == S_ZQ;
  assign pum_ack   = take_pum;
  assign trng_ack  = take_trng;

  // ------------------------------------------------ state machine
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      job       <= J_RD;
      j_bank    <= '0;
      j_row     <= '0;
      j_row2    <= '0;
      j_col     <= '0;
      j_wdata   <= '0;
      bank_open <= '0;
      for (int b = 0; b < NBANKS; b++) open_row[b] <= '0;
      since     <= '0;
      rsp_valid <= 1'b0;
      rsp_rdata <= '0;
      pum_fin   <= 1'b0;
      pum_rdata <= '0;
      trng_rvalid <= 1'b0;
      trng_rdata  <= '0;
    end else begin
      rsp_valid   <= 1'b0;
      pum_fin     <= 1'b0;
      trng_rvalid <= 1'b0;

      if (issue_valid) since <= crf_word_t'(1);
      else if (since != '1) since <= since + 1'b1;

      unique case (state)
        S_IDLE: begin
          if (take_ref || take_zq) begin
            job   <= take_ref ? J_REF : J_ZQ;
            state <= (bank_open != '0) ? S_PREA : (take_ref ? S_REF : S_ZQ);
          end else if (take_req) begin
            job     <= req_we ? J_WR : J_RD;
            j_bank  <= rq_bank;
            j_row   <= rq_row;
            j_col   <= rq_bcol;
            j_wdata <= req_wdata;
            if (bank_open[rq_bank] && open_row[rq_bank] == rq_row) state <= S_RW;
            else if (bank_open[rq_bank])                           state <= S_PRE;
            else                                                   state <= S_ACT;
          end else if (take_pum) begin
            job    <= (pum_op == OP_COPY_ROW) ? J_COPY : J_AFAIL;
            j_bank <= src_bank;
            j_row  <= src_row;
            j_row2 <= dst_row;
            j_col  <= src_bcol;
            state  <= bank_open[src_bank] ? S_PRE : S_ACT;
          end else if (take_trng) begin
            job    <= J_TRNG;
            j_bank <= trng_bank;
            j_row  <= trng_row;
            j_col  <= {trng_col[COL_W-1:3], 3'b000};
            state  <= bank_open[trng_bank] ? S_PRE : S_ACT;
          end
        end
        S_PREA: if (issue_valid) begin
          bank_open <= '0;
          state     <= (job == J_REF) ? S_REF : S_ZQ;
        end
        S_REF: if (issue_valid) state <= S_IDLE;
        S_ZQ:  if (issue_valid) state <= S_IDLE;
        S_PRE: if (issue_valid) begin
          bank_open[j_bank] <= 1'b0;
          state             <= S_ACT;
        end
        S_ACT: if (issue_valid) begin
          bank_open[j_bank] <= 1'b1;
          open_row[j_bank]  <= j_row;
          state             <= (job == J_COPY) ? S_RC_PRE : S_RW;
        end
        S_RW: if (issue_valid) begin
          if (job == J_WR) begin
            rsp_valid <= 1'b1;
            state     <= S_IDLE;
          end else begin
            state <= S_RDWAIT;
          end
        end
        S_RDWAIT: if (dfi_rddata_valid) begin
          unique case (job)
            J_AFAIL: begin pum_fin <= 1'b1; pum_rdata <= dfi_rddata; end
            J_TRNG:  begin trng_rvalid <= 1'b1; trng_rdata <= dfi_rddata; end
            default: begin rsp_valid <= 1'b1; rsp_rdata <= dfi_rddata; end
          endcase
          state <= S_IDLE;
        end
        S_RC_PRE: if (issue_valid) begin
          bank_open[j_bank] <= 1'b0;
          state             <= S_RC_ACT;
        end
        S_RC_ACT: if (issue_valid) begin
          bank_open[j_bank] <= 1'b1;
          open_row[j_bank]  <= j_row2;
          pum_fin           <= 1'b1;
          state             <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A command only leaves when the timer has cleared it.
  a_timer_ok: assert property (@(posedge clk) disable iff (!rst_n)
                               issue_valid |-> tq_ok);
  // At most one job is accepted per cycle.
  a_one_take: assert property (@(posedge clk) disable iff (!rst_n)
                               $onehot0({take_ref, take_zq, take_req, take_pum, take_trng}));
endmodule
