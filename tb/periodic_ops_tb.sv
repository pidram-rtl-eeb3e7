// periodic_ops_tb: refresh and ZQ requests at the right interval (here
// tREFI shortened to 500 ns = 50 cycles and the ZQ interval to 2 us = 200
// cycles), held until acknowledged; the D-RaNGe path through to the
// random number buffer, whose words, count and full flag are checked.
module periodic_ops_tb;
  import pidram_pkg::*;
  localparam int WORDS = 4;
  logic clk = 0, rst_n = 0;
  logic ref_req, ref_ack = 0, zq_req, zq_ack = 0;
  logic trng_req, trng_ack = 0, trng_rvalid = 0;
  blk_t trng_rdata = '0;
  logic [8:0] bits [TRNG_CELLS];
  logic rng_pop = 0, rng_empty;
  logic [31:0] rng_head;
  logic [2:0] rng_count;
  int checks = 0, failures = 0, cyc = 0, last_ref = -1, last_zq = -1, n_ref = 0, n_zq = 0;
  logic prev_ref = 0, prev_zq = 0;
  logic [31:0] acc, words [$];
  int nsamp = 0;

  periodic_ops #(.T_REFI_NS(500), .ZQ_INTERVAL_NS(2000), .RNG_WORDS(WORDS)) dut (
    .clk, .rst_n, .ref_req, .ref_ack, .zq_req, .zq_ack,
    .trng_en(1'b1), .trng_period_ns(32'd220), .trng_cfg_bit(bits),
    .trng_req, .trng_ack, .trng_rvalid, .trng_rdata,
    .rng_pop, .rng_head, .rng_empty, .rng_count);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // interval checks on rising request edges; acknowledge after a delay
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (ref_req && !prev_ref) begin
      n_ref++;
      if (last_ref >= 0) begin
        checks++;
        if (cyc - last_ref != 50) begin failures++; $display("FAIL tREFI %0d", cyc - last_ref); end
      end
      last_ref = cyc;
    end
    if (zq_req && !prev_zq) begin
      n_zq++;
      if (last_zq >= 0) begin
        checks++;
        if (cyc - last_zq != 200) begin failures++; $display("FAIL ZQ %0d", cyc - last_zq); end
      end
      last_zq = cyc;
    end
    prev_ref <= ref_req;
    prev_zq  <= zq_req;
  end

  initial begin
    forever begin
      @(negedge clk);
      ref_ack = 0;
      if (ref_req) begin
        repeat ($urandom_range(1, 12)) @(negedge clk);
        checks++;
        if (!ref_req) begin failures++; $display("FAIL ref_req dropped before ack"); end
        ref_ack = 1;
      end
    end
  end
  initial begin
    forever begin
      @(negedge clk);
      zq_ack = 0;
      if (zq_req) begin
        repeat ($urandom_range(1, 12)) @(negedge clk);
        zq_ack = 1;
      end
    end
  end

  // stand-in scheduler for TRNG reads
  initial begin
    forever begin
      @(negedge clk);
      trng_ack = 0; trng_rvalid = 0;
      if (trng_req) begin
        trng_ack = 1;
        @(negedge clk) trng_ack = 0;
        repeat (3) @(negedge clk);
        for (int i = 0; i < 16; i++) trng_rdata[i*32 +: 32] = $urandom;
        acc = {acc[27:0], trng_rdata[bits[0]], trng_rdata[bits[1]], trng_rdata[bits[2]],
               trng_rdata[bits[3]]};
        nsamp++;
        if (nsamp % 8 == 0) words.push_back(acc);
        trng_rvalid = 1;
      end
    end
  end

  initial begin
    bits[0] = 9'd1; bits[1] = 9'd2; bits[2] = 9'd100; bits[3] = 9'd400;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // let the buffer fill: 4 words = 32 samples of 22 cycles
    repeat (32 * 22 + 400) @(posedge clk);
    checks++;
    if (rng_count != 3'(WORDS) || nsamp != 8 * WORDS) begin
      failures++; $display("FAIL buffer count %0d samples %0d", rng_count, nsamp);
    end
    // drain and compare
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      checks++;
      if (rng_empty || rng_head != words[0]) begin
        failures++; $display("FAIL head %h exp %h", rng_head, words[0]);
      end
      void'(words.pop_front());
      rng_pop = 1;
      @(negedge clk) rng_pop = 0;
    end
    repeat (500) @(posedge clk);
    checks++;
    if (n_ref < 20 || n_zq < 5) begin failures++; $display("FAIL refs %0d zqs %0d", n_ref, n_zq); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
