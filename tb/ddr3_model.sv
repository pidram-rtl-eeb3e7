// ddr3_model: behavioural model of a DDR3 PHY plus DRAM module, seen from
// the DFI-style port of the PiDRAM controller.  Not synthesizable.
//
// It stores 64-byte blocks in a sparse array (unwritten blocks read as
// tb_pkg::init_block), tracks open rows per bank and checks the standard
// timings with its own nominal values (in controller cycles).  It mimics
// the two behaviours of real DDR3 chips that PiDRAM relies on:
//   * RowClone: ACT r1, PRE before tRAS, ACT r2 before tRP, with r1 and r2
//     in the same subarray (SUBARRAY_ROWS rows), copies row r1 into r2.
//     Rows in different subarrays are not copied (counted in rc_fail).
//   * activation failures: a RD issued before tRCD returns the stored data
//     with the bits at RAND_BIT0..3 replaced by random values.
// Violations it counts: tras_viol, trp_viol, trcd_viol (expected only from
// PuM sequences) and other_viol (never expected).  Read data comes back
// RL cycles after the RD command.
module ddr3_model
  import pidram_pkg::*;
  import tb_pkg::*;
#(
  parameter int RL            = 3,
  parameter int NOM_TRCD      = 2,
  parameter int NOM_TRAS      = 4,
  parameter int NOM_TRP       = 2,
  parameter int NOM_TRFC      = 11,
  parameter int SUBARRAY_ROWS = 512,
  parameter int RAND_BIT0     = 3,
  parameter int RAND_BIT1     = 77,
  parameter int RAND_BIT2     = 200,
  parameter int RAND_BIT3     = 511
) (
  input  logic     clk,
  input  logic     rst_n,
  input  dfi_cmd_t dfi_cmd,
  input  logic     dfi_wrdata_en,
  input  blk_t     dfi_wrdata,
  output logic     dfi_rddata_valid,
  output blk_t     dfi_rddata
);
  blk_t mem [key_t];

  logic        open_q [NBANKS];
  row_t        row_q  [NBANKS];
  longint      t_act  [NBANKS];
  longint      t_pre  [NBANKS];
  row_t        prev_row [NBANKS];
  logic        early_pre [NBANKS];   // last PRE came before tRAS
  longint      t_ref;
  longint      cyc;

  int tras_viol, trp_viol, trcd_viol, other_viol;
  int rc_copies, rc_fail, n_ref, n_zq, n_act, n_rd, n_wr;
  int last_rc_t1, last_rc_t2;

  typedef struct { longint due; blk_t data; } rd_t;
  rd_t rq [$];

  function automatic blk_t rd_blk(input key_t k);
    return mem.exists(k) ? mem[k] : init_block(k);
  endfunction

  initial begin
    for (int b = 0; b < NBANKS; b++) begin
      open_q[b] = 0; row_q[b] = '0; t_act[b] = -1000; t_pre[b] = -1000;
      prev_row[b] = '0; early_pre[b] = 0;
    end
    t_ref = -1000; cyc = 0;
    tras_viol = 0; trp_viol = 0; trcd_viol = 0; other_viol = 0;
    rc_copies = 0; rc_fail = 0; n_ref = 0; n_zq = 0; n_act = 0; n_rd = 0; n_wr = 0;
    last_rc_t1 = 0; last_rc_t2 = 0;
    dfi_rddata_valid = 0; dfi_rddata = '0;
  end

  always @(posedge clk) begin
    dram_cmd_e c;
    bank_t     b;
    key_t      k;
    blk_t      d;
    cyc = cyc + 1;
    dfi_rddata_valid <= 1'b0;
    if (rq.size() > 0 && rq[0].due <= cyc) begin
      dfi_rddata_valid <= 1'b1;
      dfi_rddata       <= rq[0].data;
      void'(rq.pop_front());
    end
    c = decode_cmd(dfi_cmd);
    b = dfi_cmd.bank;
    if (rst_n && c != CMD_NOP && cyc - t_ref < NOM_TRFC) other_viol++;
    if (rst_n) unique case (c)
      CMD_ACT: begin
        n_act++;
        if (open_q[b]) other_viol++;
        if (cyc - t_pre[b] < NOM_TRP) begin
          trp_viol++;
          if (early_pre[b]) begin
            last_rc_t1 = int'(t_pre[b] - t_act[b]);
            last_rc_t2 = int'(cyc - t_pre[b]);
            if (int'(prev_row[b]) / SUBARRAY_ROWS == int'(dfi_cmd.addr) / SUBARRAY_ROWS &&
                prev_row[b] != row_t'(dfi_cmd.addr)) begin
              rc_copies++;
              for (int bc = 0; bc < 128; bc++)
                mem[key_of(b, row_t'(dfi_cmd.addr), 7'(bc))] = rd_blk(key_of(b, prev_row[b], 7'(bc)));
            end else rc_fail++;
          end
        end
        open_q[b] = 1; row_q[b] = row_t'(dfi_cmd.addr); t_act[b] = cyc;
      end
      CMD_PRE: begin
        early_pre[b] = open_q[b] && (cyc - t_act[b] < NOM_TRAS);
        if (early_pre[b]) tras_viol++;
        prev_row[b] = row_q[b];
        open_q[b] = 0; t_pre[b] = cyc;
      end
      CMD_PREA: begin
        for (int i = 0; i < NBANKS; i++) begin
          if (open_q[i] && cyc - t_act[i] < NOM_TRAS) other_viol++;
          if (open_q[i]) begin t_pre[i] = cyc; prev_row[i] = row_q[i]; early_pre[i] = 0; end
          open_q[i] = 0;
        end
      end
      CMD_RD: begin
        n_rd++;
        if (!open_q[b]) other_viol++;
        k = key_of(b, row_q[b], dfi_cmd.addr[9:3]);
        d = rd_blk(k);
        if (cyc - t_act[b] < NOM_TRCD) begin
          trcd_viol++;
          d[RAND_BIT0] = $urandom_range(0, 1);
          d[RAND_BIT1] = $urandom_range(0, 1);
          d[RAND_BIT2] = $urandom_range(0, 1);
          d[RAND_BIT3] = $urandom_range(0, 1);
        end
        rq.push_back('{due: cyc + RL, data: d});
      end
      CMD_WR: begin
        n_wr++;
        if (!open_q[b] || !dfi_wrdata_en) other_viol++;
        if (cyc - t_act[b] < NOM_TRCD) other_viol++;
        mem[key_of(b, row_q[b], dfi_cmd.addr[9:3])] = dfi_wrdata;
      end
      CMD_REF: begin
        n_ref++;
        for (int i = 0; i < NBANKS; i++)
          if (open_q[i] || cyc - t_pre[i] < NOM_TRP) other_viol++;
        t_ref = cyc;
      end
      CMD_ZQCS: begin
        n_zq++;
        for (int i = 0; i < NBANKS; i++) if (open_q[i]) other_viol++;
        t_ref = cyc;
      end
      default: ;
    endcase
  end
endmodule
