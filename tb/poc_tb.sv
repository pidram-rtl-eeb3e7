// poc_tb: runs the pumolib protocol against the POC with a stand-in memory
// controller: write the instruction, set Start, poll the flag register for
// Ack and then Fin, load the data register.  Checks the flag values seen
// at each step (Start only; Ack after acceptance; Ack and Fin at the end),
// that the instruction reaches the controller intact and only while Start
// is set, and the data register contents.
module poc_tb;
  import pidram_pkg::*;
  logic clk = 0, rst_n = 0;
  logic mmio_valid = 0, mmio_we = 0, mmio_rvalid;
  logic [4:0] mmio_addr = 0;
  word_t mmio_wdata = 0, mmio_rdata;
  logic pim_valid, pim_ack = 0, pim_fin = 0, pim_dvalid = 0;
  pim_instr_t pim_instr;
  word_t pim_data = 0;
  int checks = 0, failures = 0;
  int ack_delay, fin_delay;
  word_t result;

  poc dut (.clk, .rst_n, .mmio_valid, .mmio_we, .mmio_addr, .mmio_wdata, .mmio_rvalid,
           .mmio_rdata, .pim_valid, .pim_instr, .pim_ack, .pim_fin, .pim_dvalid, .pim_data);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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
    if (!mmio_rvalid) begin failures++; $display("FAIL no rvalid"); end
    d = mmio_rdata;
  endtask

  task automatic expect_eq(input string what, input word_t got, input word_t exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h expected %h", what, got, exp); end
  endtask

  // stand-in memory controller
  initial begin
    forever begin
      @(negedge clk);
      pim_ack = 0; pim_fin = 0; pim_dvalid = 0;
      if (pim_valid) begin
        repeat (ack_delay) @(negedge clk);
        checks++;
        if (!pim_valid) begin failures++; $display("FAIL valid dropped"); end
        pim_ack = 1;
        @(negedge clk) pim_ack = 0;
        repeat (fin_delay) @(negedge clk);
        pim_fin = 1; pim_dvalid = 1; pim_data = ~word_t'(pim_instr);
      end
    end
  end

  initial begin
    word_t f, instr;
    repeat (3) @(posedge clk);
    rst_n = 1;
    load(POC_FLAG, f);  expect_eq("flag after reset", f, 0);
    for (int n = 0; n < 40; n++) begin
      ack_delay = (n % 3 == 0) ? 0 : 8;
      fin_delay = 12;
      instr = {$urandom, $urandom};
      store(POC_INSTR, instr);
      load(POC_INSTR, f); expect_eq("instr readback", f, instr);
      checks++;
      if (pim_valid) begin failures++; $display("FAIL valid before Start"); end
      store(POC_FLAG, 64'h1);
      if (ack_delay > 2) begin
        load(POC_FLAG, f); expect_eq("flag while waiting", f, 64'b001);
      end
      checks++;
      if (word_t'(pim_instr) != instr) begin failures++; $display("FAIL instr to MC"); end
      do load(POC_FLAG, f); while (f[FLAG_ACK] == 0);
      expect_eq("flag at ack", f, 64'b010);
      do load(POC_FLAG, f); while (f[FLAG_FIN] == 0);
      expect_eq("flag at fin", f, 64'b110);
      load(POC_DATA, result); expect_eq("data", result, ~instr);
      checks++;
      if (pim_valid) begin failures++; $display("FAIL Start not cleared"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
