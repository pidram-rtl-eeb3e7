// pidram_pkg: types, constants and helper functions shared by the PiDRAM
// processing-using-memory controller.
//
// Address widths follow the physical-address to DRAM-address mapping of the
// prototype: a 30-bit physical address (1 GiB DDR3 module) split into a
// 14-bit row, 3-bit bank, 10-bit column and 3-bit byte offset.  A memory
// request moves one 64-byte cache block (512 bits).
//
// Timing values are given in picoseconds and converted to controller clock
// cycles with cycles_of().  The controller clock (10 ns, i.e. DDR3-800 run
// through a 4:1 PHY) is this design's own choice; the paper gives only the
// 800 MT/s data rate.  tRAS = 37.5 ns and tRP = 13.5 ns are the paper's
// numbers; the other standard DDR3 values are typical datasheet values.
//
// The command encoding on the DFI-style port is the JEDEC DDR3 truth table
// (CS#, RAS#, CAS#, WE#).  The PiDRAM instruction format, the POC register
// map and the configuration register file map are this design's own.
package pidram_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned PA_W      = 30;   // physical address bits
  localparam int unsigned ROW_W     = 14;   // PA[29:16]
  localparam int unsigned BANK_W    = 3;    // PA[15:13]
  localparam int unsigned COL_W     = 10;   // PA[12:3]
  localparam int unsigned NBANKS    = 1 << BANK_W;
  localparam int unsigned BLK_W     = 512;  // 64-byte cache block
  localparam int unsigned DRAM_A_W  = 14;   // DDR3 address pins A[13:0]
  localparam int unsigned WORD_W    = 64;   // CPU load/store width to the POC

  typedef logic [PA_W-1:0]     pa_t;
  typedef logic [ROW_W-1:0]    row_t;
  typedef logic [BANK_W-1:0]   bank_t;
  typedef logic [COL_W-1:0]    col_t;
  typedef logic [BLK_W-1:0]    blk_t;
  typedef logic [WORD_W-1:0]   word_t;

  // Physical address to DRAM address: row PA[29:16], bank PA[15:13],
  // column PA[12:3], byte in the burst PA[2:0].  Columns, then banks, then
  // rows from low to high bits, so consecutive 8 KiB pages fall in
  // different banks.  A 64-byte block is one BL8 burst starting at column
  // {PA[12:6], 000}.  This is pure bit selection, done where it is used.
  typedef struct packed {
    row_t        row;
    bank_t       bank;
    col_t        col;       // column of the addressed 8-byte word
    col_t        blk_col;   // first column of the 64-byte block
    logic [2:0]  byte_off;
  } dram_addr_t;

  function automatic dram_addr_t dram_addr_of(input pa_t pa);
    dram_addr_t d;
    d.row      = pa[29:16];
    d.bank     = pa[15:13];
    d.col      = pa[12:3];
    d.blk_col  = {pa[12:6], 3'b000};
    d.byte_off = pa[2:0];
    return d;
  endfunction

  // ------------------------------------------------------- clock / timing
  localparam int unsigned CLK_PS = 10000;   // controller clock period

  function automatic int unsigned cycles_of(input int unsigned ps);
    int unsigned c;
    c = (ps + CLK_PS - 1) / CLK_PS;
    return (c == 0) ? 1 : c;
  endfunction

  // ---------------------------------------------------- DDR3 command bus
  typedef enum logic [2:0] {
    CMD_NOP  = 3'd0,
    CMD_ACT  = 3'd1,
    CMD_PRE  = 3'd2,   // single bank (A10 = 0)
    CMD_PREA = 3'd3,   // all banks   (A10 = 1)
    CMD_RD   = 3'd4,
    CMD_WR   = 3'd5,
    CMD_REF  = 3'd6,
    CMD_ZQCS = 3'd7
  } dram_cmd_e;

  // One command slot of the DFI-style command interface.
  typedef struct packed {
    logic                 cs_n;
    logic                 ras_n;
    logic                 cas_n;
    logic                 we_n;
    bank_t                bank;
    logic [DRAM_A_W-1:0]  addr;
  } dfi_cmd_t;

  function automatic dfi_cmd_t encode_cmd(input dram_cmd_e c, input bank_t b,
                                          input logic [DRAM_A_W-1:0] a);
    dfi_cmd_t d;
    d.bank = b;
    d.addr = a;
    d.cs_n = 1'b0;
    unique case (c)
      CMD_ACT:  {d.ras_n, d.cas_n, d.we_n} = 3'b011;
      CMD_PRE:  begin {d.ras_n, d.cas_n, d.we_n} = 3'b010; d.addr[10] = 1'b0; end
      CMD_PREA: begin {d.ras_n, d.cas_n, d.we_n} = 3'b010; d.addr[10] = 1'b1; end
      CMD_RD:   begin {d.ras_n, d.cas_n, d.we_n} = 3'b101; d.addr[10] = 1'b0; end
      CMD_WR:   begin {d.ras_n, d.cas_n, d.we_n} = 3'b100; d.addr[10] = 1'b0; end
      CMD_REF:  {d.ras_n, d.cas_n, d.we_n} = 3'b001;
      CMD_ZQCS: begin {d.ras_n, d.cas_n, d.we_n} = 3'b110; d.addr[10] = 1'b0; end
      default:  begin d = '1; end   // deselect
    endcase
    return d;
  endfunction

  function automatic dram_cmd_e decode_cmd(input dfi_cmd_t d);
    if (d.cs_n) return CMD_NOP;
    unique case ({d.ras_n, d.cas_n, d.we_n})
      3'b011:  return CMD_ACT;
      3'b010:  return d.addr[10] ? CMD_PREA : CMD_PRE;
      3'b101:  return CMD_RD;
      3'b100:  return CMD_WR;
      3'b001:  return CMD_REF;
      3'b110:  return CMD_ZQCS;
      default: return CMD_NOP;
    endcase
  endfunction

  // Bypass flags: which standard constraints a custom sequence may violate.
  typedef struct packed {
    logic tras;   // ACT -> PRE
    logic trp;    // PRE -> ACT (and tRC)
    logic trcd;   // ACT -> RD/WR
  } bypass_t;

  // ------------------------------------------------- PiDRAM instructions
  // 64-bit instruction register: [63:60] opcode, operands below.
  typedef enum logic [3:0] {
    OP_NOP       = 4'd0,
    OP_COPY_ROW  = 4'd1,   // [59:30] source PA, [29:0] destination PA
    OP_ACT_FAIL  = 4'd2,   // [29:0] PA: reduced-tRCD read of one cache block
    OP_WRITE_CRF = 4'd3,   // [35:32] register index, [31:0] value
    OP_RNG_SIZE  = 4'd4,   // data <= number of random words in the buffer
    OP_RNG_READ  = 4'd5,   // data <= one random word (popped)
    OP_READ_CRF  = 4'd6    // [35:32] register index; data <= its value
  } pim_op_e;

  typedef struct packed {
    pim_op_e     op;
    pa_t         addr_a;
    pa_t         addr_b;
  } pim_instr_t;   // 4 + 30 + 30 = 64 bits

  // POC memory-mapped register offsets (byte addresses, 64-bit registers).
  localparam logic [4:0] POC_INSTR = 5'h00;
  localparam logic [4:0] POC_FLAG  = 5'h08;
  localparam logic [4:0] POC_DATA  = 5'h10;
  // Flag register bits.
  localparam int unsigned FLAG_START = 0;
  localparam int unsigned FLAG_ACK   = 1;
  localparam int unsigned FLAG_FIN   = 2;

  // --------------------------------------- configuration register file
  localparam int unsigned CRF_N = 16;
  localparam int unsigned CRF_W = 32;
  typedef logic [CRF_W-1:0] crf_word_t;

  localparam int unsigned CRF_RC_T1       = 0;  // ACT -> PRE of RowClone, cycles
  localparam int unsigned CRF_RC_T2       = 1;  // PRE -> ACT of RowClone, cycles
  localparam int unsigned CRF_TRCD_RED    = 2;  // reduced ACT -> RD, cycles
  localparam int unsigned CRF_TRNG_PERIOD = 3;  // D-RaNGe period, nanoseconds
  localparam int unsigned CRF_TRNG_BANK   = 4;
  localparam int unsigned CRF_TRNG_ROW    = 5;
  localparam int unsigned CRF_TRNG_COL    = 6;
  localparam int unsigned CRF_TRNG_BIT0   = 7;  // 7..10: bit offsets in block
  localparam int unsigned CRF_TRNG_EN     = 11;
  localparam int unsigned TRNG_CELLS      = 4;  // random cells per cache block

  // Reset contents: RowClone tRAS/tRP of 10 ns and a 220 ns TRNG period.
  function automatic crf_word_t crf_reset_value(input int unsigned idx);
    unique case (idx)
      CRF_RC_T1:       return crf_word_t'(cycles_of(10000));
      CRF_RC_T2:       return crf_word_t'(cycles_of(10000));
      CRF_TRCD_RED:    return crf_word_t'(1);
      CRF_TRNG_PERIOD: return crf_word_t'(220);
      default:         return '0;
    endcase
  endfunction

  // ------------------------------------------------ random number buffer
  localparam int unsigned RNG_BYTES = 1024;          // 1 KiB buffer
  localparam int unsigned RNG_WORD_W = 32;           // random word
  localparam int unsigned RNG_DEPTH = RNG_BYTES * 8 / RNG_WORD_W;

endpackage
