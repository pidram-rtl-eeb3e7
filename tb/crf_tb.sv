// crf_tb: reset contents, writes to every register and isolation between
// registers of the configuration register file.
module crf_tb;
  import pidram_pkg::*;
  logic clk = 0, rst_n = 0, we = 0;
  logic [3:0] waddr = 0, raddr = 0;
  crf_word_t wdata = 0, rdata;
  crf_word_t regs [16];
  crf_word_t ref_q [16];
  int checks = 0, failures = 0;

  crf dut (.clk, .rst_n, .we, .waddr, .wdata, .raddr, .rdata, .regs);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare_all();
    for (int i = 0; i < 16; i++) begin
      raddr = 4'(i);
      #1;
      checks++;
      if (regs[i] !== ref_q[i] || rdata !== ref_q[i]) begin
        failures++;
        $display("FAIL reg %0d = %h / %h, expected %h", i, regs[i], rdata, ref_q[i]);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < 16; i++) ref_q[i] = 0;
    ref_q[0] = 1; ref_q[1] = 1; ref_q[2] = 1; ref_q[3] = 220;   // 10 ns, 10 ns, 1 cycle, 220 ns
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    compare_all();
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      we    = ($urandom_range(0, 3) != 0);
      waddr = 4'($urandom);
      wdata = $urandom;
      @(posedge clk);
      if (we) ref_q[waddr] = wdata;
      #1 we = 0;
      if (n % 20 == 0) compare_all();
    end
    @(negedge clk);
    compare_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
