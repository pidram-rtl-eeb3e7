// pidram_top_tb: end-to-end test of the PiDRAM hardware with the DDR3
// model, driven the way the PuM library drives it: stores to the POC
// instruction and flag registers, polling of Ack or Fin, loads of the data
// register, and ordinary cache-block LOAD/STOREs beside them.
//
// Reduced sizes: tREFI 2 us, ZQ interval 20 us and a 16-word random number
// buffer, so that every mechanism shows up in a short run.  Mechanisms
// counted (each must occur): row hit, closed-bank access, row conflict,
// refresh (with PREA of open banks), ZQ calibration, RowClone-Copy,
// RowClone-Initialize (copy from an all-zero row), ACT_FAIL, D-RaNGe
// sample, buffer full, rand_dram, buf_size, CRF write and readback,
// Ack-polling and Fin-polling.  Data checks: every load against a
// reference memory; copied rows; random words against the model's random
// cells; the model's timing-violation counters.  Rate check: with no other
// traffic and a 220 ns TRNG period, the 16-word buffer (128 samples) must
// fill in 128 x 22 cycles plus at most 15 % for refresh interference.
module pidram_top_tb;
  import pidram_pkg::*;
  import tb_pkg::*;
  localparam int WORDS = 16;
  logic clk = 0, rst_n = 0;
  logic mmio_valid = 0, mmio_we = 0, mmio_rvalid;
  logic [4:0] mmio_addr = 0;
  word_t mmio_wdata = 0, mmio_rdata;
  logic req_valid = 0, req_ready, req_we = 0, rsp_valid;
  pa_t req_addr = 0; blk_t req_wdata = 0, rsp_rdata;
  dfi_cmd_t dfi_cmd; logic dfi_wrdata_en, dfi_rddata_valid; blk_t dfi_wrdata, dfi_rddata;
  int checks = 0, failures = 0;
  blk_t shadow [key_t];

  // mechanism counters
  int m_hit, m_closed, m_conflict, m_prea, m_copy, m_init, m_afail, m_full,
      m_rand, m_size, m_crf, m_ackpoll, m_finpoll;

  pidram_top #(.T_REFI_NS(2000), .ZQ_INTERVAL_NS(20000), .RNG_WORDS(WORDS)) dut (
    .clk, .rst_n, .mmio_valid, .mmio_we, .mmio_addr, .mmio_wdata, .mmio_rvalid, .mmio_rdata,
    .req_valid, .req_ready, .req_we, .req_addr, .req_wdata, .rsp_valid, .rsp_rdata,
    .dfi_cmd, .dfi_wrdata_en, .dfi_wrdata, .dfi_rddata_valid, .dfi_rddata);
  ddr3_model u_dram (.clk, .rst_n, .dfi_cmd, .dfi_wrdata_en, .dfi_wrdata, .dfi_rddata_valid,
    .dfi_rddata);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // bank state as seen on the command bus, to classify LOAD/STOREs
  logic tb_open [NBANKS]; row_t tb_row [NBANKS];
  initial for (int b = 0; b < NBANKS; b++) tb_open[b] = 0;
  always @(posedge clk) if (rst_n) begin
    unique case (decode_cmd(dfi_cmd))
      CMD_ACT:  begin tb_open[dfi_cmd.bank] = 1; tb_row[dfi_cmd.bank] = row_t'(dfi_cmd.addr); end
      CMD_PRE:  tb_open[dfi_cmd.bank] = 0;
      CMD_PREA: begin m_prea++; for (int b = 0; b < NBANKS; b++) tb_open[b] = 0; end
      default: ;
    endcase
  end

  function automatic blk_t ref_rd(input key_t k);
    return shadow.exists(k) ? shadow[k] : init_block(k);
  endfunction

  task automatic check(input string what, input bit cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // ------------------------------------------------ memory bus
  task automatic mem_op(input logic we, input pa_t a, input blk_t d = rand_block());
    @(negedge clk);
    req_valid = 1; req_we = we; req_addr = a; req_wdata = d;
    do @(posedge clk); while (!req_ready);
    if (!tb_open[a[15:13]])              m_closed++;
    else if (tb_row[a[15:13]] == a[29:16]) m_hit++;
    else                                 m_conflict++;
    #1 req_valid = 0;
    while (!rsp_valid) @(posedge clk);
    if (we) shadow[key_of_pa(a)] = d;
    else check($sformatf("load %h", a), rsp_rdata == ref_rd(key_of_pa(a)));
  endtask

  // ------------------------------------------------ POC access, as pumolib
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

  task automatic pim_exec(input pim_op_e op, input pa_t a, input pa_t b,
                          input bit wait_fin, output word_t data);
    word_t f;
    store(POC_INSTR, {op, a, b});
    store(POC_FLAG, 64'h1);
    if (wait_fin) begin
      do load(POC_FLAG, f); while (!f[FLAG_FIN]);
      m_finpoll++;
    end else begin
      do load(POC_FLAG, f); while (!f[FLAG_ACK]);
      m_ackpoll++;
    end
    load(POC_DATA, data);
  endtask

  task automatic write_crf(input int idx, input int unsigned v);
    word_t d;
    pim_exec(OP_WRITE_CRF, pa_t'(idx << 2), pa_t'(v), 1, d);
    m_crf++;
    pim_exec(OP_READ_CRF, pa_t'(idx << 2), '0, 1, d);
    check("CRF readback", d == word_t'(v));
  endtask

  task automatic copy_row(input pa_t s, input pa_t d, input bit blocking);
    word_t x;
    int copies0 = u_dram.rc_copies;
    pim_exec(OP_COPY_ROW, s, d, blocking, x);
    if (!blocking) begin
      do load(POC_FLAG, x); while (!x[FLAG_FIN]);
    end
    for (int bc = 0; bc < 128; bc++)
      shadow[key_of(d[15:13], d[29:16], 7'(bc))] = ref_rd(key_of(s[15:13], s[29:16], 7'(bc)));
    check("RowClone performed", u_dram.rc_copies == copies0 + 1);
    for (int bc = 0; bc < 128; bc += 13) mem_op(0, {d[29:13], 7'(bc), 6'd0});
  endtask

  function automatic word_t rand_cells(input blk_t v);
    return word_t'({v[3], v[77], v[200], v[511]});
  endfunction

  initial begin
    word_t d, f, w, prev_w;
    int t0, n_same;
    m_hit = 0; m_closed = 0; m_conflict = 0; m_prea = 0; m_copy = 0; m_init = 0;
    m_afail = 0; m_full = 0; m_rand = 0; m_size = 0; m_crf = 0; m_ackpoll = 0; m_finpoll = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- normal traffic
    for (int i = 0; i < 300; i++)
      mem_op($urandom_range(0, 1),
             {13'($urandom_range(0, 2) * 3), 1'b0, 3'($urandom_range(0, 3)),
              7'($urandom_range(0, 7)), 6'd0});

    // ---- set_timings: T1 = T2 = 10 ns, reduced tRCD one cycle
    write_crf(CRF_RC_T1, 1);
    write_crf(CRF_RC_T2, 1);
    write_crf(CRF_TRCD_RED, 1);

    // ---- RowClone-Copy (blocking on Fin, and on Ack then Fin)
    mem_op(1, {14'd100, 3'd2, 7'd5, 6'd0});
    copy_row({14'd100, 3'd2, 13'd0}, {14'd101, 3'd2, 13'd0}, 1); m_copy++;
    copy_row({14'd101, 3'd2, 13'd0}, {14'd300, 3'd2, 13'd0}, 0); m_copy++;

    // ---- RowClone-Initialize: zero an initializer row, clone it
    for (int bc = 0; bc < 128; bc++) mem_op(1, {14'd511, 3'd5, 7'(bc), 6'd0}, '0);
    mem_op(0, {14'd260, 3'd5, 7'd1, 6'd0});
    copy_row({14'd511, 3'd5, 13'd0}, {14'd260, 3'd5, 13'd0}, 1); m_init++;
    mem_op(0, {14'd260, 3'd5, 7'd77, 6'd0});
    check("row initialised to zero", rsp_rdata == '0);

    // ---- activation_failure: only the random cells may differ
    mem_op(1, {14'd9, 3'd7, 7'd2, 6'd0});
    for (int i = 0; i < 4; i++) begin
      pim_exec(OP_ACT_FAIL, {14'd9, 3'd7, 7'd2, 6'd0}, '0, 1, d);
      m_afail++;
      check("ACT_FAIL data", (d & ~64'h8) == (ref_rd(key_of(3'd7, 14'd9, 7'd2))[63:0] & ~64'h8));
    end

    // ---- rng_configure and throughput
    pim_exec(OP_RNG_SIZE, '0, '0, 1, d); m_size++;
    check("buffer empty before enable", d == 0);
    write_crf(CRF_TRNG_PERIOD, 220);
    write_crf(CRF_TRNG_BANK, 6);
    write_crf(CRF_TRNG_ROW, 77);
    write_crf(CRF_TRNG_COL, 64);
    write_crf(CRF_TRNG_BIT0 + 0, 3);
    write_crf(CRF_TRNG_BIT0 + 1, 77);
    write_crf(CRF_TRNG_BIT0 + 2, 200);
    write_crf(CRF_TRNG_BIT0 + 3, 511);
    t0 = int'(u_dram.cyc);
    write_crf(CRF_TRNG_EN, 1);
    do begin
      repeat (100) @(posedge clk);
      pim_exec(OP_RNG_SIZE, '0, '0, 1, d); m_size++;
    end while (d < WORDS && int'(u_dram.cyc) - t0 < 20000);
    check("buffer filled", d == WORDS);
    m_full++;
    $display("buffer of %0d words filled in %0d cycles (%0d expected at 22 cycles per sample)",
             WORDS, int'(u_dram.cyc) - t0, WORDS * 8 * 22);
    check("TRNG rate", int'(u_dram.cyc) - t0 >= WORDS * 8 * 22 &&
                       int'(u_dram.cyc) - t0 <= WORDS * 8 * 22 * 115 / 100 + 200);
    repeat (500) @(posedge clk);
    pim_exec(OP_RNG_SIZE, '0, '0, 1, d); m_size++;
    check("full buffer stops sampling", d == WORDS);
    // every random word's non-random bits: each nibble is 4 random cells, so
    // only check that words vary
    n_same = 0;
    prev_w = '1;
    for (int i = 0; i < WORDS; i++) begin
      pim_exec(OP_RNG_READ, '0, '0, 1, w); m_rand++;
      if (w == prev_w) n_same++;
      prev_w = w;
      check("random word is 32 bits", w[63:32] == 0);
    end
    check("random words vary", n_same < WORDS / 2);

    // ---- traffic while D-RaNGe refills the buffer
    for (int i = 0; i < 200; i++)
      mem_op($urandom_range(0, 1),
             {13'($urandom_range(0, 2) * 3), 1'b0, 3'($urandom_range(0, 7)),
              7'($urandom_range(0, 7)), 6'd0});
    pim_exec(OP_RNG_SIZE, '0, '0, 1, d); m_size++;
    check("buffer refilling under traffic", d > 0);
    write_crf(CRF_TRNG_EN, 0);
    repeat (30000) @(posedge clk);   // long enough for a ZQ calibration

    // ---- model-side checks
    check("no standard timing violated", u_dram.other_viol == 0);
    check("tRAS/tRP violated once per RowClone",
          u_dram.tras_viol == 3 && u_dram.trp_viol == 3 && u_dram.rc_copies == 3);
    check("tRCD violated once per reduced read", u_dram.trcd_viol >= 4 + WORDS * 8);

    $display("hit %0d closed %0d conflict %0d prea %0d ref %0d zq %0d copy %0d init %0d",
             m_hit, m_closed, m_conflict, m_prea, u_dram.n_ref, u_dram.n_zq, m_copy, m_init);
    $display("act_fail %0d trng samples %0d full %0d rand %0d size %0d crf %0d ackpoll %0d finpoll %0d",
             m_afail, u_dram.trcd_viol - m_afail, m_full, m_rand, m_size, m_crf, m_ackpoll, m_finpoll);
    check("mechanism: row hit", m_hit > 0);
    check("mechanism: closed bank", m_closed > 0);
    check("mechanism: row conflict", m_conflict > 0);
    check("mechanism: PREA before refresh", m_prea > 0);
    check("mechanism: refresh", u_dram.n_ref > 0);
    check("mechanism: ZQ calibration", u_dram.n_zq > 0);
    check("mechanism: RowClone-Copy", m_copy > 0);
    check("mechanism: RowClone-Initialize", m_init > 0);
    check("mechanism: activation failure", m_afail > 0);
    check("mechanism: D-RaNGe samples", u_dram.trcd_viol > m_afail);
    check("mechanism: buffer full", m_full > 0);
    check("mechanism: rand_dram", m_rand > 0);
    check("mechanism: buf_size", m_size > 0);
    check("mechanism: CRF write", m_crf > 0);
    check("mechanism: Ack polling", m_ackpoll > 0);
    check("mechanism: Fin polling", m_finpoll > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
