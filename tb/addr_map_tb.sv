// addr_map_tb: checks the physical-to-DRAM address split of
// pidram_pkg::dram_addr_of (row PA[29:16], bank PA[15:13], column PA[12:3],
// block column {PA[12:6],000}, byte PA[2:0]) against arithmetic (division
// and modulo) on random and corner addresses.
module addr_map_tb;
  import pidram_pkg::*;
  pa_t pa; row_t row; bank_t bank; col_t col, blk_col; logic [2:0] byte_off;
  int checks = 0, failures = 0;

  dram_addr_t d;
  always_comb begin
    d        = dram_addr_of(pa);
    row      = d.row;
    bank     = d.bank;
    col      = d.col;
    blk_col  = d.blk_col;
    byte_off = d.byte_off;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int unsigned a);
    int unsigned e_row, e_bank, e_col, e_bcol, e_byte;
    pa = pa_t'(a);
    #1;
    e_row  = a / 65536;
    e_bank = (a / 8192) % 8;
    e_col  = (a / 8) % 1024;
    e_bcol = ((a / 64) % 128) * 8;
    e_byte = a % 8;
    checks++;
    if (row != row_t'(e_row) || bank != bank_t'(e_bank) || col != col_t'(e_col) ||
        blk_col != col_t'(e_bcol) || byte_off != 3'(e_byte)) begin
      failures++;
      $display("FAIL pa=%h row=%h bank=%h col=%h bcol=%h", a, row, bank, col, blk_col);
    end
  endtask

  initial begin
    check(0);
    check(32'h3FFF_FFFF);
    check(32'h0000_2000);   // first byte of bank 1
    check(32'h0001_0000);   // first byte of row 1
    for (int i = 0; i < 500; i++) check($urandom & 32'h3FFF_FFFF);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
