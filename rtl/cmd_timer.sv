// cmd_timer: DDR3 command timer.
//
// The command scheduler picks the next DRAM command and asks this block
// whether it may go out in the current cycle; ok answers combinationally.
// Every standard constraint is held as a down-counter of cycles still to
// wait: per bank tRCD, tRAS, tRP, tRC and the read/write-to-precharge gap
// (tRTP, write recovery), and across banks tRRD, tCCD, write-to-read,
// read-to-write and the refresh / ZQ-calibration busy times.  When a command
// is issued (issue_valid) each counter it affects is loaded with the
// constraint length minus one, unless it already holds more.  Adding a new
// standard command means adding another such counter.
//
// A custom PuM sequence may deliberately break tRAS, tRP (with tRC) or tRCD:
// it sets the matching bit of bypass and the timer ignores that check only.
// All other constraints still hold, so a RowClone or reduced-tRCD access
// never collides with normal traffic.
//
// Timing: all values are parameters in picoseconds, rounded up to
// controller cycles.  tRAS = 37.5 ns and tRP = 13.5 ns are the paper's DDR3
// figures; the rest are typical DDR3-800 datasheet values chosen here.
// The four-activate window (tFAW, 40 ns for a 1 KiB-page DDR3-800 device)
// has no counter of its own: with at most one command per 10 ns cycle and
// tRRD of one cycle, five ACTs span at least 40 ns, so tFAW always holds at
// the default clock.  A faster controller clock would need a tFAW counter.
module cmd_timer
  import pidram_pkg::*;
#(
  parameter int unsigned T_RCD_PS  = 13500,
  parameter int unsigned T_RP_PS   = 13500,
  parameter int unsigned T_RAS_PS  = 37500,
  parameter int unsigned T_RRD_PS  = 10000,
  parameter int unsigned T_RTP_PS  = 7500,
  parameter int unsigned T_WRP_PS  = 37500,   // WR command -> PRE (WL + BL/2 + tWR)
  parameter int unsigned T_CCD_PS  = 10000,
  parameter int unsigned T_WTR_PS  = 30000,   // WR command -> RD (WL + BL/2 + tWTR)
  parameter int unsigned T_RTW_PS  = 15000,   // RD command -> WR
  parameter int unsigned T_RFC_PS  = 110000,
  parameter int unsigned T_ZQCS_PS = 160000
) (
  input  logic      clk,
  input  logic      rst_n,
  // candidate command
  input  dram_cmd_e query_cmd,
  input  bank_t     query_bank,
  input  bypass_t   query_bypass,
  output logic      ok,
  // command actually issued this cycle
  input  logic      issue_valid,
  input  dram_cmd_e issue_cmd,
  input  bank_t     issue_bank
);
  localparam int unsigned CW = 8;
  typedef logic [CW-1:0] cnt_t;

  localparam cnt_t L_RCD = cnt_t'(cycles_of(T_RCD_PS) - 1);
  localparam cnt_t L_RP  = cnt_t'(cycles_of(T_RP_PS) - 1);
  localparam cnt_t L_RAS = cnt_t'(cycles_of(T_RAS_PS) - 1);
  localparam cnt_t L_RC  = cnt_t'(cycles_of(T_RAS_PS + T_RP_PS) - 1);
  localparam cnt_t L_RRD = cnt_t'(cycles_of(T_RRD_PS) - 1);
  localparam cnt_t L_RTP = cnt_t'(cycles_of(T_RTP_PS) - 1);
  localparam cnt_t L_WRP = cnt_t'(cycles_of(T_WRP_PS) - 1);
  localparam cnt_t L_CCD = cnt_t'(cycles_of(T_CCD_PS) - 1);
  localparam cnt_t L_WTR = cnt_t'(cycles_of(T_WTR_PS) - 1);
  localparam cnt_t L_RTW = cnt_t'(cycles_of(T_RTW_PS) - 1);
  localparam cnt_t L_RFC = cnt_t'(cycles_of(T_RFC_PS) - 1);
  localparam cnt_t L_ZQ  = cnt_t'(cycles_of(T_ZQCS_PS) - 1);

  // per-bank counters
  cnt_t c_rcd [NBANKS];   // ACT -> RD/WR
  cnt_t c_ras [NBANKS];   // ACT -> PRE
  cnt_t c_rp  [NBANKS];   // PRE -> ACT
  cnt_t c_rc  [NBANKS];   // ACT -> ACT, same bank
  cnt_t c_rwp [NBANKS];   // RD/WR -> PRE
  // cross-bank counters
  cnt_t c_rrd, c_rd, c_wr, c_busy;

  function automatic cnt_t upd(input cnt_t cur, input logic hit, input cnt_t len);
    cnt_t dec;
    dec = (cur != 0) ? cur - 1'b1 : '0;
    return (hit && len > dec) ? len : dec;
  endfunction

  wire is_act  = issue_valid && issue_cmd == CMD_ACT;
  wire is_pre  = issue_valid && issue_cmd == CMD_PRE;
  wire is_prea = issue_valid && issue_cmd == CMD_PREA;
  wire is_rd   = issue_valid && issue_cmd == CMD_RD;
  wire is_wr   = issue_valid && issue_cmd == CMD_WR;
  wire is_ref  = issue_valid && issue_cmd == CMD_REF;
  wire is_zq   = issue_valid && issue_cmd == CMD_ZQCS;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < NBANKS; b++) begin
        c_rcd[b] <= '0; c_ras[b] <= '0; c_rp[b] <= '0; c_rc[b] <= '0; c_rwp[b] <= '0;
      end
      c_rrd <= '0; c_rd <= '0; c_wr <= '0; c_busy <= '0;
    end else begin
      for (int b = 0; b < NBANKS; b++) begin
        automatic logic here = (issue_bank == bank_t'(b));
        c_rcd[b] <= upd(c_rcd[b], is_act && here, L_RCD);
        c_ras[b] <= upd(c_ras[b], is_act && here, L_RAS);
        c_rc[b]  <= upd(c_rc[b],  is_act && here, L_RC);
        c_rp[b]  <= upd(c_rp[b],  (is_pre && here) || is_prea, L_RP);
        c_rwp[b] <= upd(c_rwp[b], (is_rd || is_wr) && here, is_wr ? L_WRP : L_RTP);
      end
      c_rrd  <= upd(c_rrd, is_act, L_RRD);
      c_rd   <= upd(c_rd,  is_rd || is_wr, is_wr ? L_WTR : L_CCD);
      c_wr   <= upd(c_wr,  is_rd || is_wr, is_rd ? L_RTW : L_CCD);
      c_busy <= upd(c_busy, is_ref || is_zq, is_ref ? L_RFC : L_ZQ);
    end
  end

  // combinational answer for the candidate command
  always_comb begin
    logic all_pre_ok, all_act_ok;
    all_pre_ok = 1'b1;
    all_act_ok = 1'b1;
    for (int b = 0; b < NBANKS; b++) begin
      if (c_ras[b] != 0 || c_rwp[b] != 0) all_pre_ok = 1'b0;
      if (c_rp[b] != 0 || c_rc[b] != 0)   all_act_ok = 1'b0;
    end
    ok = 1'b0;
    unique case (query_cmd)
      CMD_NOP:  ok = 1'b1;
      CMD_ACT:  ok = (c_busy == 0) && (c_rrd == 0) &&
                     (query_bypass.trp || (c_rp[query_bank] == 0 && c_rc[query_bank] == 0));
      CMD_PRE:  ok = (c_busy == 0) && (c_rwp[query_bank] == 0) &&
                     (query_bypass.tras || c_ras[query_bank] == 0);
      CMD_PREA: ok = (c_busy == 0) && all_pre_ok;
      CMD_RD:   ok = (c_busy == 0) && (c_rd == 0) &&
                     (query_bypass.trcd || c_rcd[query_bank] == 0);
      CMD_WR:   ok = (c_busy == 0) && (c_wr == 0) &&
                     (query_bypass.trcd || c_rcd[query_bank] == 0);
      CMD_REF,
      CMD_ZQCS: ok = (c_busy == 0) && all_act_ok;
      default:  ok = 1'b0;
    endcase
  end
endmodule
