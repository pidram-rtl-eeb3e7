// drange_ctrl_tb: drives the D-RaNGe controller with a stand-in scheduler
// that accepts requests after a random delay and returns random blocks.
// Checks: the four configured bits are packed, first sample in the top
// nibble, into words pushed after every eighth sample; requests come no
// sooner than one TRNG period apart (220 ns = 22 cycles, and exactly that
// when the scheduler answers at once); no request while the buffer is full
// or the controller is disabled.
module drange_ctrl_tb;
  import pidram_pkg::*;
  logic clk = 0, rst_n = 0;
  logic enable = 0, buf_full = 0;
  crf_word_t period_ns = 220;
  logic [8:0] cfg_bit [TRNG_CELLS];
  logic trng_req, trng_ack, trng_rvalid, push;
  blk_t trng_rdata;
  logic [31:0] push_word;
  int checks = 0, failures = 0;
  int unsigned last_ack, cyc = 0;
  logic [31:0] exp_acc;
  int nsamp = 0, nwords = 0;
  bit fast = 1;
  logic [31:0] exp_words [$];

  drange_ctrl dut (.clk, .rst_n, .enable, .period_ns,
                   .cfg_bit, .trng_req,
                   .trng_ack, .trng_rvalid, .trng_rdata, .buf_full, .push, .push_word);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stand-in scheduler
  initial begin
    trng_ack = 0; trng_rvalid = 0; trng_rdata = '0; last_ack = 0;
    forever begin
      @(negedge clk);
      trng_ack = 0;
      if (trng_req) begin
        if (!fast) repeat ($urandom_range(0, 10)) begin
          @(negedge clk);
        end
        if (trng_req) begin
          trng_ack = 1;
          if (last_ack != 0) begin
            checks++;
            if (cyc - last_ack < 22 || (fast && cyc - last_ack != 22)) begin
              failures++; $display("FAIL period %0d cycles", cyc - last_ack);
            end
          end
          last_ack = cyc;
          @(negedge clk);
          trng_ack = 0;
          repeat (fast ? 3 : $urandom_range(2, 8)) @(negedge clk);
          for (int i = 0; i < 16; i++) trng_rdata[i*32 +: 32] = $urandom;
          exp_acc = {exp_acc[27:0], trng_rdata[cfg_bit[0]], trng_rdata[cfg_bit[1]],
                     trng_rdata[cfg_bit[2]], trng_rdata[cfg_bit[3]]};
          nsamp++;
          if (nsamp % 8 == 0) exp_words.push_back(exp_acc);
          trng_rvalid = 1;
          @(negedge clk);
          trng_rvalid = 0;
        end
      end
    end
  end

  always @(posedge clk) if (rst_n && push) begin
    checks++;
    nwords++;
    if (exp_words.size() == 0 || push_word != exp_words[0]) begin
      failures++; $display("FAIL word %h exp %h n=%0d t=%0t q=%0d", push_word, exp_words.size()>0?exp_words[0]:0, nwords, $time, exp_words.size());
    end
    if (exp_words.size() > 0) void'(exp_words.pop_front());
  end

  always @(negedge clk) if (rst_n && (buf_full || !enable)) begin
    if (trng_req) begin failures++; $display("FAIL request while full/disabled"); end
  end

  initial begin
    cfg_bit[0] = 9'd0; cfg_bit[1] = 9'd63; cfg_bit[2] = 9'd300; cfg_bit[3] = 9'd511;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (50) @(posedge clk);
    checks++;
    if (nsamp != 0) begin failures++; $display("FAIL sampled while disabled"); end
    enable = 1;
    repeat (22 * 64) @(posedge clk);          // ~64 samples, fast scheduler
    fast = 0;
    repeat (3000) @(posedge clk);
    @(negedge clk) buf_full = 1;
    repeat (20) @(posedge clk);
    last_ack = 0;
    repeat (300) @(posedge clk);
    @(negedge clk) buf_full = 0;
    repeat (2000) @(posedge clk);
    @(negedge clk) enable = 0;
    repeat (100) @(posedge clk);
    checks++;
    if (nwords < 10) begin failures++; $display("FAIL only %0d words", nwords); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
