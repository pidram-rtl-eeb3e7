// drange_workload_tb: the D-RaNGe throughput microbenchmark at default
// parameters.  For every TRNG period from 220 ns to 1000 ns in 10 ns steps
// the sampler is reprogrammed through the POC (rng_configure), and a loop
// like the one software runs polls buf_size and calls rand_dram whenever a
// word is available.  The time between the first and the seventh word
// seen by the loop gives the throughput.  One 32-bit word takes eight
// 4-bit samples and one sample is taken every ceil(period / 10 ns)
// cycles, so the expected cost is 8 * ceil(period / 10 ns) cycles per
// word; refreshes and polling may add a little (at most 5 % + 16 cycles
// is accepted).  At 220 ns this is 4 bits per 220 ns, about 18.2 Mb/s at
// the buffer; a CPU loop that is slower than the sampler observes less.
// The ones density of all words collected must lie between 40 % and 60 %.
module drange_workload_tb;
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
  longint cyc = 0;
  localparam int WORDS = 6;   // measured intervals per period

  pidram_top dut (
    .clk, .rst_n, .mmio_valid, .mmio_we, .mmio_addr, .mmio_wdata, .mmio_rvalid, .mmio_rdata,
    .req_valid, .req_ready, .req_we, .req_addr, .req_wdata, .rsp_valid, .rsp_rdata,
    .dfi_cmd, .dfi_wrdata_en, .dfi_wrdata, .dfi_rddata_valid, .dfi_rddata);
  ddr3_model u_dram (.clk, .rst_n, .dfi_cmd, .dfi_wrdata_en, .dfi_wrdata, .dfi_rddata_valid,
    .dfi_rddata);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input bit cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
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

  task automatic crf_write(input int idx, input int unsigned v);
    word_t d;
    pim_exec(OP_WRITE_CRF, pa_t'(idx << 2), pa_t'(v), d);
  endtask

  initial begin
    word_t d;
    longint t_first, t_last;
    int got, ones, bits;
    real mbps;
    ones = 0; bits = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // rng_configure: block in bank 6, row 77, column 64; cells 3/77/200/511
    crf_write(CRF_TRNG_BANK, 6);
    crf_write(CRF_TRNG_ROW, 77);
    crf_write(CRF_TRNG_COL, 64);
    crf_write(CRF_TRNG_BIT0 + 0, 3);
    crf_write(CRF_TRNG_BIT0 + 1, 77);
    crf_write(CRF_TRNG_BIT0 + 2, 200);
    crf_write(CRF_TRNG_BIT0 + 3, 511);
    for (int period = 220; period <= 1000; period += 10) begin
      int unsigned exp_cyc;
      exp_cyc = 8 * ((period + 9) / 10);
      crf_write(CRF_TRNG_EN, 0);
      crf_write(CRF_TRNG_PERIOD, period);
      // drain what is left from the previous period
      do begin
        pim_exec(OP_RNG_SIZE, '0, '0, d);
        if (d != 0) pim_exec(OP_RNG_READ, '0, '0, d);
      end while (d != 0);
      crf_write(CRF_TRNG_EN, 1);
      got = 0; t_first = 0; t_last = 0;
      // the microbenchmark loop: buf_size, then rand_dram when non-zero
      while (got <= WORDS + 1) begin
        pim_exec(OP_RNG_SIZE, '0, '0, d);
        if (d != 0) begin
          pim_exec(OP_RNG_READ, '0, '0, d);
          // the first word may hold samples taken before the switch
          if (got == 1) t_first = cyc;
          if (got == WORDS + 1) t_last = cyc;
          if (got >= 1) begin
            for (int i = 0; i < 32; i++) ones += int'(d[i]);
            bits += 32;
          end
          got++;
        end
      end
      mbps = 32.0 * WORDS * 100.0 / real'(t_last - t_first);
      if (period == 220 || period == 500 || period == 1000)
        $display("period %0d ns: %0d cycles for %0d words, %.2f Mb/s", period,
                 t_last - t_first, WORDS, mbps);
      check("cycles per word at this period",
            (t_last - t_first) >= longint'(WORDS * exp_cyc) - 16 &&
            (t_last - t_first) * 100 <= longint'(WORDS * exp_cyc) * 105 + 1600);
    end
    $display("ones density %0d / %0d", ones, bits);
    check("random bits balanced", ones * 10 >= bits * 4 && ones * 10 <= bits * 6);
    check("refreshes interleaved", u_dram.n_ref > 0);
    check("reduced-tRCD reads seen", u_dram.trcd_viol > 0);
    check("no standard timing violated", u_dram.other_viol == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
