// rowclone_workload_tb: the bulk copy / initialise workloads run through
// the POC at default parameters, as the library would run them.
//   * rcc / rci sweep: arrays of 8 KiB to 8 MiB (1 to 1024 rows of 8 KiB,
//     doubling).  rcc copies every row of the source array with one
//     copy_row each; rci copies a zero row of the same subarray into every
//     row of the destination.  Four random blocks of every row are read
//     back and compared with the expected data.
//   * forkbench: N = 8 to 2048 pages of 4 KiB (N/2 row copies), then 32K
//     random cache-block loads inside the new pages, all checked.
//   * compile: rci of two 4 KiB pages (one row) followed by loads.
//   * libquantum-sized initialisation: rci of 512 KiB (64 rows).
// Operand placement (what the allocator would guarantee): array row i lies
// in bank i % 8; its source and destination rows are 256 rows apart in one
// 512-row subarray, and row 511 of every bank is that subarray's zero row.
// Per-copy cost is measured in controller cycles, from the first store
// to the POC to Fin seen by polling, and must grow linearly with the
// array size (from 64 KiB up, within 15 % of the per-row cost at 8 MiB).
module rowclone_workload_tb;
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

  pidram_top dut (
    .clk, .rst_n, .mmio_valid, .mmio_we, .mmio_addr, .mmio_wdata, .mmio_rvalid, .mmio_rdata,
    .req_valid, .req_ready, .req_we, .req_addr, .req_wdata, .rsp_valid, .rsp_rdata,
    .dfi_cmd, .dfi_wrdata_en, .dfi_wrdata, .dfi_rddata_valid, .dfi_rddata);
  ddr3_model u_dram (.clk, .rst_n, .dfi_cmd, .dfi_wrdata_en, .dfi_wrdata, .dfi_rddata_valid,
    .dfi_rddata);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (6000000) @(posedge clk);
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

  task automatic pim_exec(input pim_op_e op, input pa_t a, input pa_t b);
    word_t f;
    store(POC_INSTR, {op, a, b});
    store(POC_FLAG, 64'h1);
    do load(POC_FLAG, f); while (!f[FLAG_FIN]);
  endtask

  // placement of array row i
  function automatic bank_t bank_of(input int i); return bank_t'(i % 8); endfunction
  function automatic row_t src_row(input int i); return row_t'(i / 8); endfunction
  function automatic row_t dst_row(input int i); return row_t'(i / 8 + 256); endfunction
  localparam row_t ZERO_ROW = 14'd511;
  function automatic pa_t pa_of(input bank_t b, input row_t r, input int bc);
    return {r, b, 7'(bc), 6'd0};
  endfunction

  // expected[i]: 0 = copy of the source row, 1 = zeros
  bit zeroed [1024];

  task automatic verify_row(input int i, input int n);
    for (int k = 0; k < n; k++) begin
      int bc;
      bc = $urandom_range(0, 127);
      mem_op(0, pa_of(bank_of(i), dst_row(i), bc), '0);
      check("row contents", rsp_rdata == (zeroed[i] ? blk_t'(0)
                                   : init_block(key_of(bank_of(i), src_row(i), 7'(bc)))));
    end
  endtask

  task automatic rcc(input int rows, output longint t);
    longint t0;
    t0 = cyc;
    for (int i = 0; i < rows; i++) begin
      pim_exec(OP_COPY_ROW, pa_of(bank_of(i), src_row(i), 0), pa_of(bank_of(i), dst_row(i), 0));
      zeroed[i] = 0;
    end
    t = cyc - t0;
  endtask

  task automatic rci(input int rows, output longint t);
    longint t0;
    t0 = cyc;
    for (int i = 0; i < rows; i++) begin
      pim_exec(OP_COPY_ROW, pa_of(bank_of(i), ZERO_ROW, 0), pa_of(bank_of(i), dst_row(i), 0));
      zeroed[i] = 1;
    end
    t = cyc - t0;
  endtask

  initial begin
    longint t;
    longint tc [11], ti [11];
    int copies0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // zero rows: one per bank, each in the subarray of rows 0..511
    for (int b = 0; b < 8; b++)
      for (int bc = 0; bc < 128; bc++) mem_op(1, pa_of(bank_t'(b), ZERO_ROW, bc), '0);

    // ---------------------------------------------- rcc / rci sweep
    for (int s = 0; s <= 10; s++) begin
      int rows;
      rows = 1 << s;
      rcc(rows, tc[s]);
      $display("rcc %0d KiB: %0d cycles (%0d ns per 8 KiB row)", rows * 8, tc[s], tc[s] * 10 / rows);
      for (int i = 0; i < rows; i++) verify_row(i, (rows <= 64) ? 4 : 1);
      rci(rows, ti[s]);
      $display("rci %0d KiB: %0d cycles (%0d ns per 8 KiB row)", rows * 8, ti[s], ti[s] * 10 / rows);
      for (int i = 0; i < rows; i++) verify_row(i, (rows <= 64) ? 4 : 1);
    end
    // execution time grows linearly with the array size: from 64 KiB up,
    // the per-row cost stays within 15 % of the per-row cost at 8 MiB
    for (int s = 3; s <= 10; s++) begin
      check("rcc time linear in size", tc[s] * 1024 * 100 <= tc[10] * (1 << s) * 115 &&
                                       tc[s] * 1024 * 100 >= tc[10] * (1 << s) * 85);
      check("rci time linear in size", ti[s] * 1024 * 100 <= ti[10] * (1 << s) * 115 &&
                                       ti[s] * 1024 * 100 >= ti[10] * (1 << s) * 85);
    end

    // ---------------------------------------------- forkbench
    for (int pages = 8; pages <= 2048; pages *= 4) begin
      longint t0;
      int rows;
      rows = pages / 2;
      rcc(rows, t);
      t0 = cyc;
      for (int k = 0; k < 32768; k++) begin
        int i, bc;
        i  = $urandom_range(0, rows - 1);
        bc = $urandom_range(0, 127);
        mem_op(0, pa_of(bank_of(i), dst_row(i), bc), '0);
        check("forkbench load", rsp_rdata == init_block(key_of(bank_of(i), src_row(i), 7'(bc))));
      end
      $display("forkbench N=%0d: copy %0d cycles, 32K loads %0d cycles", pages, t, cyc - t0);
    end

    // ---------------------------------------------- compile: two pages
    rci(1, t);
    verify_row(0, 8);
    // ---------------------------------------------- libquantum: 512 KiB
    copies0 = u_dram.rc_copies;
    rci(64, t);
    $display("libquantum rci 512 KiB: %0d cycles", t);
    check("64 RowClones for 512 KiB", u_dram.rc_copies - copies0 == 64);
    for (int i = 0; i < 64; i++) verify_row(i, 2);

    check("every copy landed", u_dram.rc_fail == 0);
    check("no standard timing violated", u_dram.other_viol == 0);
    check("refresh ran during the workload", u_dram.n_ref > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
