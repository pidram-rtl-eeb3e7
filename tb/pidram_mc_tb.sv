// pidram_mc_tb: the memory controller on its own, driven through its POC
// interface and LOAD/STORE port, with the DDR3 model.  Checks the
// instruction dispatcher: WRITE_CRF / READ_CRF, RNG_SIZE and RNG_READ
// finish in the cycle they are offered (Ack, Fin and data together);
// RNG_READ of an empty buffer gives zero; COPY_ROW gives Ack before Fin and
// copies the row with the CRF's T1/T2; ACT_FAIL returns the block's low
// 64 bits; unknown opcodes finish without effect; D-RaNGe words pass
// through the buffer in order (tREFI and buffer shortened for speed).
module pidram_mc_tb;
  import pidram_pkg::*;
  import tb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, req_we = 0, rsp_valid;
  pa_t req_addr = 0; blk_t req_wdata = 0, rsp_rdata;
  logic pim_valid = 0, pim_ack, pim_fin, pim_dvalid;
  pim_instr_t pim_instr = '0;
  word_t pim_data;
  dfi_cmd_t dfi_cmd; logic dfi_wrdata_en, dfi_rddata_valid; blk_t dfi_wrdata, dfi_rddata;
  int checks = 0, failures = 0;

  pidram_mc #(.T_REFI_NS(3000), .RNG_WORDS(4)) dut (.clk, .rst_n, .req_valid, .req_ready,
    .req_we, .req_addr, .req_wdata, .rsp_valid, .rsp_rdata, .pim_valid, .pim_instr, .pim_ack,
    .pim_fin, .pim_dvalid, .pim_data, .dfi_cmd, .dfi_wrdata_en, .dfi_wrdata,
    .dfi_rddata_valid, .dfi_rddata);
  ddr3_model u_dram (.clk, .rst_n, .dfi_cmd, .dfi_wrdata_en, .dfi_wrdata, .dfi_rddata_valid,
    .dfi_rddata);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input bit cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // offer an instruction the way the POC does; return the cycles to Ack
  // and to Fin and the data delivered
  task automatic exec(input pim_op_e op, input pa_t a, input pa_t b,
                      output int t_ack, output int t_fin, output word_t data, output bit got);
    int n = 0;
    got = 0; t_ack = -1; t_fin = -1; data = '0;
    @(negedge clk);
    pim_valid = 1; pim_instr = '{op: op, addr_a: a, addr_b: b};
    while (t_fin < 0 && n < 500) begin
      #1;
      if (pim_ack && t_ack < 0) t_ack = n;
      if (pim_fin) t_fin = n;
      if (pim_dvalid) begin got = 1; data = pim_data; end
      @(negedge clk);
      if (t_ack >= 0) pim_valid = 0;
      n++;
    end
    pim_valid = 0;
  endtask

  task automatic mem_op(input logic we, input pa_t a, input blk_t d);
    @(negedge clk);
    req_valid = 1; req_we = we; req_addr = a; req_wdata = d;
    do @(posedge clk); while (!req_ready);
    #1 req_valid = 0;
    while (!rsp_valid) @(posedge clk);
  endtask

  initial begin
    int ta, tf; word_t d; bit got; blk_t b0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    exec(OP_READ_CRF, pa_t'(CRF_TRNG_PERIOD << 2), '0, ta, tf, d, got);
    check("reset TRNG period 220 ns", got && d == 220 && ta == 0 && tf == 0);
    exec(OP_WRITE_CRF, pa_t'(12 << 2), pa_t'(30'h1234567), ta, tf, d, got);
    check("WRITE_CRF immediate", ta == 0 && tf == 0 && !got);
    exec(OP_READ_CRF, pa_t'(12 << 2), '0, ta, tf, d, got);
    check("READ_CRF", got && d == 64'h1234567);
    exec(OP_RNG_SIZE, '0, '0, ta, tf, d, got);
    check("RNG_SIZE empty", got && d == 0 && tf == 0);
    exec(OP_RNG_READ, '0, '0, ta, tf, d, got);
    check("RNG_READ empty returns 0", got && d == 0);
    exec(OP_NOP, '0, '0, ta, tf, d, got);
    check("NOP finishes", ta == 0 && tf == 0 && !got);
    // RowClone row 5 -> row 6 of bank 0 with T1 = 2
    exec(OP_WRITE_CRF, pa_t'(CRF_RC_T1 << 2), pa_t'(2), ta, tf, d, got);
    b0 = rand_block();
    mem_op(1, {14'd5, 3'd0, 7'd9, 6'd0}, b0);
    exec(OP_COPY_ROW, {14'd5, 3'd0, 13'd0}, {14'd6, 3'd0, 13'd0}, ta, tf, d, got);
    check("COPY_ROW Ack before Fin", ta >= 0 && tf > ta);
    check("COPY_ROW used T1/T2", u_dram.last_rc_t1 == 2 && u_dram.last_rc_t2 == 1);
    mem_op(0, {14'd6, 3'd0, 7'd9, 6'd0}, '0);
    check("row copied", rsp_rdata == b0 && u_dram.rc_copies == 1);
    // ACT_FAIL on that block: low 64 bits, bit 3 is a random cell
    exec(OP_ACT_FAIL, {14'd6, 3'd0, 7'd9, 6'd0}, '0, ta, tf, d, got);
    check("ACT_FAIL data", got && (d & ~64'h8) == (b0[63:0] & ~64'h8));
    // D-RaNGe: four words, read back in order
    exec(OP_WRITE_CRF, pa_t'(CRF_TRNG_BIT0 << 2), pa_t'(3), ta, tf, d, got);
    exec(OP_WRITE_CRF, pa_t'(CRF_TRNG_EN << 2), pa_t'(1), ta, tf, d, got);
    do begin
      repeat (50) @(posedge clk);
      exec(OP_RNG_SIZE, '0, '0, ta, tf, d, got);
    end while (d < 4);
    check("buffer reaches 4 words", d == 4);
    exec(OP_WRITE_CRF, pa_t'(CRF_TRNG_EN << 2), pa_t'(0), ta, tf, d, got);
    for (int i = 0; i < 4; i++) begin
      exec(OP_RNG_READ, '0, '0, ta, tf, d, got);
      check("rand word delivered", got && d[63:32] == 0);
      exec(OP_RNG_SIZE, '0, '0, ta, tf, d, got);
      check("count drops by one", d == 64'(3 - i));
    end
    check("model saw refreshes and no bad timing", u_dram.n_ref > 0 && u_dram.other_viol == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
