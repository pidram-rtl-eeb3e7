// crf: Configuration Register File.
//
// Sixteen 32-bit user-programmable registers that hold the parameters the
// standard DDR3 timing set does not cover: the violated timings of the PuM
// command sequences and the settings of the D-RaNGe controller.  Standard
// timings are not stored here; they are fixed in the command timer.
// Software writes a register through a WRITE_CRF PiDRAM instruction (the
// pumolib set_timings and rng_configure functions), so the file has a single
// synchronous write port and exposes all registers in parallel.
//
// Register map (this design's choice; the paper names the contents only):
//   0 RowClone T1 (ACT->PRE, cycles)   1 RowClone T2 (PRE->ACT, cycles)
//   2 reduced tRCD (cycles)            3 TRNG period (ns)
//   4 TRNG bank  5 TRNG row  6 TRNG column
//   7..10 bit offsets of the four TRNG cells inside the 512-bit block
//   11 TRNG enable (bit 0)             12..15 free for new techniques
// Reset loads 10 ns RowClone timings and a 220 ns TRNG period, the values the
// paper evaluates; everything else resets to zero.  Writes take effect on
// the next clock edge; reads are combinational.
module crf
  import pidram_pkg::*;
#(
  parameter int unsigned N = CRF_N
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 we,
  input  logic [$clog2(N)-1:0] waddr,
  input  crf_word_t            wdata,
  input  logic [$clog2(N)-1:0] raddr,
  output crf_word_t            rdata,
  output crf_word_t            regs [N]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) regs[i] <= crf_reset_value(i);
    end else if (we) begin
      regs[waddr] <= wdata;
    end
  end

  assign rdata = regs[raddr];
endmodule
