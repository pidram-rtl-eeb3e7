// pidram_top_full_tb: one complete pass through the PiDRAM hardware with
// every parameter at its default (7.8 us refresh interval, 1 KiB random
// number buffer).  Sets the RowClone timings, copies one 8 KiB row and
// reads part of it back, lets at least one refresh happen, configures
// D-RaNGe with a 220 ns period, waits for the first random word and reads
// it with rand_dram.
module pidram_top_full_tb;
  import pidram_pkg::*;
  import tb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic mmio_valid = 0, mmio_we = 0, mmio_rvalid;
  logic [4:0] mmio_addr = 0;
  word_t mmio_wdata = 0, mmio_rdata;
  logic req_valid = 0, req_ready, req_we = 0, rsp_valid;
  pa_t req_addr = 0; blk_t req_wdata = 0, rsp_rdata;
  dfi_cmd_t dfi_cmd; logic dfi_wrdata_en, dfi_rddata_valid; blk_t dfi_wrdata, dfi_rddata;
  int checks = 0, failures = 0;
  blk_t src_blk [128];

  pidram_top dut (
    .clk, .rst_n, .mmio_valid, .mmio_we, .mmio_addr, .mmio_wdata, .mmio_rvalid, .mmio_rdata,
    .req_valid, .req_ready, .req_we, .req_addr, .req_wdata, .rsp_valid, .rsp_rdata,
    .dfi_cmd, .dfi_wrdata_en, .dfi_wrdata, .dfi_rddata_valid, .dfi_rddata);
  ddr3_model u_dram (.clk, .rst_n, .dfi_cmd, .dfi_wrdata_en, .dfi_wrdata, .dfi_rddata_valid,
    .dfi_rddata);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input bit cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic mem_op(input logic we, input pa_t a, input blk_t d);
    @(negedge clk);
    req_valid = 1; req_we = we; req_addr = a; req_wdata = d;
    do @(posedge clk); while (!req_ready);
    #1 req_valid = 0;
    while (!rsp_valid) @(posedge clk);
  endtask

  task automatic store(input logic [4:0] a, input word_t d);
    @(negedge clk);
    mmio_valid = 1; mmio_we = 1; mmio_addr = a; mmio_wdata = d;
    @(negedge clk);
    mmio_valid = 0; mmio_we = 0;
  endtask

  task automatic load(input logic [4:0] a, output word_t d);
    @(negedge clk);
    mmio_valid = 1; mmio_we = 0; mmio_addr = a;
    @(negedge clk);
    mmio_valid = 0;
    d = mmio_rdata;
  endtask

  task automatic pim_exec(input pim_op_e op, input pa_t a, input pa_t b, output word_t data);
    word_t f;
    store(POC_INSTR, {op, a, b});
    store(POC_FLAG, 64'h1);
    do load(POC_FLAG, f); while (!f[FLAG_FIN]);
    load(POC_DATA, data);
  endtask

  initial begin
    word_t d;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // source row 40 of bank 3
    for (int bc = 0; bc < 128; bc++) begin
      src_blk[bc] = rand_block();
      mem_op(1, {14'd40, 3'd3, 7'(bc), 6'd0}, src_blk[bc]);
    end
    // set_timings(10 ns, 10 ns, 1 cycle)
    pim_exec(OP_WRITE_CRF, pa_t'(CRF_RC_T1 << 2), pa_t'(1), d);
    pim_exec(OP_WRITE_CRF, pa_t'(CRF_RC_T2 << 2), pa_t'(1), d);
    // copy_row(row 40 -> row 41)
    pim_exec(OP_COPY_ROW, {14'd40, 3'd3, 13'd0}, {14'd41, 3'd3, 13'd0}, d);
    for (int bc = 0; bc < 128; bc += 7) begin
      mem_op(0, {14'd41, 3'd3, 7'(bc), 6'd0}, '0);
      check("copied block", rsp_rdata == src_blk[bc]);
    end
    // rng_configure(220 ns, bank 6 row 77 column 64, cells 3/77/200/511)
    pim_exec(OP_WRITE_CRF, pa_t'(CRF_TRNG_BANK << 2), pa_t'(6), d);
    pim_exec(OP_WRITE_CRF, pa_t'(CRF_TRNG_ROW << 2), pa_t'(77), d);
    pim_exec(OP_WRITE_CRF, pa_t'(CRF_TRNG_COL << 2), pa_t'(64), d);
    pim_exec(OP_WRITE_CRF, pa_t'((CRF_TRNG_BIT0 + 0) << 2), pa_t'(3), d);
    pim_exec(OP_WRITE_CRF, pa_t'((CRF_TRNG_BIT0 + 1) << 2), pa_t'(77), d);
    pim_exec(OP_WRITE_CRF, pa_t'((CRF_TRNG_BIT0 + 2) << 2), pa_t'(200), d);
    pim_exec(OP_WRITE_CRF, pa_t'((CRF_TRNG_BIT0 + 3) << 2), pa_t'(511), d);
    pim_exec(OP_WRITE_CRF, pa_t'(CRF_TRNG_EN << 2), pa_t'(1), d);
    do pim_exec(OP_RNG_SIZE, '0, '0, d); while (d == 0);
    pim_exec(OP_RNG_READ, '0, '0, d);
    check("random word read", d[63:32] == 0);
    while (u_dram.n_ref == 0) @(posedge clk);
    check("refresh issued", u_dram.n_ref > 0);
    check("RowClone performed", u_dram.rc_copies == 1);
    check("no standard timing violated", u_dram.other_viol == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
