// cmd_scheduler_tb: the scheduler with the command timer and the DDR3
// model.  Random LOAD/STOREs (row hits, closed banks and row conflicts)
// are checked against a reference memory; refresh and ZQ requests arrive
// while banks are open; RowClone copies are checked by reading the whole
// destination row back and by the ACT->PRE and PRE->ACT gaps the model
// measured (T1, T2 from the CRF inputs); reduced-tRCD reads
// (ACT_FAIL and TRNG) must return the block with only the model's random
// cells possibly changed.  The model must see no violation other than the
// intended tRAS/tRP (one each per RowClone) and tRCD (one per reduced read).
module cmd_scheduler_tb;
  import pidram_pkg::*;
  import tb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, req_we = 0, rsp_valid;
  pa_t req_addr = 0; blk_t req_wdata = 0, rsp_rdata;
  logic pum_valid = 0, pum_ack, pum_fin;
  pim_op_e pum_op = OP_NOP; pa_t pum_src = 0, pum_dst = 0; blk_t pum_rdata;
  logic ref_req = 0, ref_ack, zq_req = 0, zq_ack;
  logic trng_req = 0, trng_ack, trng_rvalid; blk_t trng_rdata;
  crf_word_t rc_t1 = 1, rc_t2 = 1, trcd_red = 1;
  dram_cmd_e tq_cmd; bank_t tq_bank; bypass_t tq_bypass; logic tq_ok, issue_valid;
  dfi_cmd_t dfi_cmd; logic dfi_wrdata_en, dfi_rddata_valid; blk_t dfi_wrdata, dfi_rddata;
  int checks = 0, failures = 0;
  int n_rc = 0, n_red = 0, n_hit = 0, n_conf = 0, n_closed = 0;
  blk_t shadow [key_t];

  cmd_scheduler dut (.clk, .rst_n, .req_valid, .req_ready, .req_we, .req_addr, .req_wdata,
    .rsp_valid, .rsp_rdata, .pum_valid, .pum_op, .pum_src, .pum_dst, .pum_ack, .pum_fin,
    .pum_rdata, .ref_req, .ref_ack, .zq_req, .zq_ack, .trng_req, .trng_bank(3'd6),
    .trng_row(14'd77), .trng_col(10'd64), .trng_ack, .trng_rvalid, .trng_rdata,
    .rc_t1, .rc_t2, .trcd_red, .tq_cmd, .tq_bank, .tq_bypass, .tq_ok, .issue_valid,
    .dfi_cmd, .dfi_wrdata_en, .dfi_wrdata, .dfi_rddata_valid, .dfi_rddata);
  cmd_timer u_timer (.clk, .rst_n, .query_cmd(tq_cmd), .query_bank(tq_bank),
    .query_bypass(tq_bypass), .ok(tq_ok), .issue_valid, .issue_cmd(tq_cmd), .issue_bank(tq_bank));
  ddr3_model u_dram (.clk, .rst_n, .dfi_cmd, .dfi_wrdata_en, .dfi_wrdata, .dfi_rddata_valid,
    .dfi_rddata);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic blk_t ref_rd(input key_t k);
    return shadow.exists(k) ? shadow[k] : init_block(k);
  endfunction

  function automatic blk_t rand_mask();
    blk_t m = '0;
    m[3] = 1; m[77] = 1; m[200] = 1; m[511] = 1;
    return m;
  endfunction

  // classify row-buffer outcomes seen on the command bus
  dram_cmd_e prev_cmd = CMD_NOP;
  always @(posedge clk) if (rst_n && issue_valid) begin
    if ((tq_cmd == CMD_RD || tq_cmd == CMD_WR) && prev_cmd != CMD_ACT) n_hit++;
    if (tq_cmd == CMD_ACT && prev_cmd == CMD_PRE) n_conf++;
    prev_cmd <= tq_cmd;
  end

  always @(posedge clk) begin
    if (ref_ack) ref_req <= 0;
    if (zq_ack)  zq_req  <= 0;
  end

  task automatic mem_op(input logic we, input pa_t a);
    blk_t d = rand_block();
    @(negedge clk);
    req_valid = 1; req_we = we; req_addr = a; req_wdata = d;
    do @(posedge clk); while (!req_ready);
    #1 req_valid = 0;
    while (!rsp_valid) @(posedge clk);
    if (we) shadow[key_of_pa(a)] = d;
    else begin
      checks++;
      if (rsp_rdata != ref_rd(key_of_pa(a))) begin
        failures++; $display("FAIL read %h", a);
      end
    end
  endtask

  task automatic rowclone(input pa_t s, input pa_t d);
    @(negedge clk);
    pum_valid = 1; pum_op = OP_COPY_ROW; pum_src = s; pum_dst = d;
    do @(posedge clk); while (!pum_ack);
    #1 pum_valid = 0;
    while (!pum_fin) @(posedge clk);
    n_rc++;
    for (int bc = 0; bc < 128; bc++)
      shadow[key_of(d[15:13], d[29:16], 7'(bc))] = ref_rd(key_of(s[15:13], s[29:16], 7'(bc)));
    checks++;
    if (u_dram.last_rc_t1 != int'(rc_t1) || u_dram.last_rc_t2 != int'(rc_t2)) begin
      failures++;
      $display("FAIL RowClone gaps %0d/%0d", u_dram.last_rc_t1, u_dram.last_rc_t2);
    end
    // read the whole destination row back
    for (int bc = 0; bc < 128; bc += 9) mem_op(0, {d[29:13], 7'(bc), 6'd0});
  endtask

  task automatic act_fail(input pa_t a);
    blk_t e;
    @(negedge clk);
    pum_valid = 1; pum_op = OP_ACT_FAIL; pum_src = a; pum_dst = 0;
    do @(posedge clk); while (!pum_ack);
    #1 pum_valid = 0;
    while (!pum_fin) @(posedge clk);
    n_red++;
    e = ref_rd(key_of_pa(a));
    checks++;
    if ((pum_rdata & ~rand_mask()) != (e & ~rand_mask())) begin
      failures++; $display("FAIL act_fail data");
    end
  endtask

  initial begin
    pa_t a;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // LOAD/STORE traffic over 2 rows x 3 banks for hits and conflicts
    for (int i = 0; i < 400; i++) begin
      a = {13'($urandom_range(0, 1) * 5), 1'b0, 3'($urandom_range(0, 2)), 7'($urandom_range(0, 5)), 6'd0};
      if (i == 200) begin @(negedge clk) ref_req = 1; end
      if (i == 300) begin @(negedge clk) zq_req = 1; end
      mem_op($urandom_range(0, 1), a);
    end
    wait (!ref_req && !zq_req);
    // RowClone within a subarray: row 10 -> row 13 of bank 1, open bank first
    mem_op(1, {14'd10, 3'd1, 7'd4, 6'd0});
    mem_op(0, {14'd20, 3'd1, 7'd0, 6'd0});
    rowclone({14'd10, 3'd1, 13'd0}, {14'd13, 3'd1, 13'd0});
    rc_t1 = 2; rc_t2 = 1;
    rowclone({14'd13, 3'd1, 13'd0}, {14'd400, 3'd1, 13'd0});
    rc_t1 = 3; rc_t2 = 1;
    rowclone({14'd600, 3'd4, 13'd0}, {14'd601, 3'd4, 13'd0});
    rc_t1 = 1; rc_t2 = 1;
    // reduced-tRCD accesses
    mem_op(1, {14'd50, 3'd2, 7'd3, 6'd0});
    for (int i = 0; i < 5; i++) act_fail({14'd50, 3'd2, 7'd3, 6'd0});
    @(negedge clk) trng_req = 1;
    do @(posedge clk); while (!trng_ack);
    #1 trng_req = 0;
    while (!trng_rvalid) @(posedge clk);
    n_red++;
    checks++;
    if ((trng_rdata & ~rand_mask()) != (init_block(key_of(3'd6, 14'd77, 7'd8)) & ~rand_mask())) begin
      failures++; $display("FAIL trng data");
    end
    repeat (20) @(posedge clk);
    checks++;
    if (u_dram.other_viol != 0 || u_dram.tras_viol != n_rc || u_dram.trp_viol != n_rc ||
        u_dram.trcd_viol != n_red || u_dram.rc_copies != n_rc || u_dram.n_ref != 1 ||
        u_dram.n_zq != 1) begin
      failures++;
      $display("FAIL model: other %0d tras %0d trp %0d trcd %0d copies %0d ref %0d zq %0d",
               u_dram.other_viol, u_dram.tras_viol, u_dram.trp_viol, u_dram.trcd_viol,
               u_dram.rc_copies, u_dram.n_ref, u_dram.n_zq);
    end
    checks++;
    if (n_hit < 20 || n_conf < 20) begin
      failures++; $display("FAIL coverage hits %0d conflicts %0d", n_hit, n_conf);
    end
    $display("row hits %0d, conflicts %0d, rowclones %0d, reduced reads %0d", n_hit, n_conf, n_rc, n_red);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
