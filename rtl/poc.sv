// poc: PuM Operations Controller.
//
// The CPU drives PuM operations with ordinary loads and stores to three
// memory-mapped 64-bit registers:
//   0x00 instruction  the PiDRAM instruction to execute (see pidram_pkg)
//   0x08 flag         bit 0 Start, bit 1 Ack, bit 2 Fin
//   0x10 data         result of the last instruction that returned one
// A pumolib call writes the instruction, writes the flag register with
// Start = 1, polls the flag register for Ack (operation started) or Fin
// (operation finished) and, where the operation has a result, loads the
// data register.  Writing Start = 1 clears Ack and Fin.  While Start is set
// the POC offers the instruction to the memory controller (pim_valid);
// when the controller accepts it (pim_ack) the POC clears Start and sets
// Ack.  pim_fin sets Fin, and pim_dvalid loads the data register.
//
// The Start/Ack/Fin protocol is the paper's; the register offsets, the flag
// bit positions and the one-cycle read latency of the MMIO port (rvalid one
// cycle after a read request, always ready) are this design's choices.
module poc
  import pidram_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // memory-mapped register port (from the memory bus)
  input  logic       mmio_valid,
  input  logic       mmio_we,
  input  logic [4:0] mmio_addr,
  input  word_t      mmio_wdata,
  output logic       mmio_rvalid,
  output word_t      mmio_rdata,
  // to / from the memory controller
  output logic       pim_valid,
  output pim_instr_t pim_instr,
  input  logic       pim_ack,
  input  logic       pim_fin,
  input  logic       pim_dvalid,
  input  word_t      pim_data
);
  pim_instr_t instr_q;
  logic       start_q, ack_q, fin_q;
  word_t      data_q;

  wire wr_instr = mmio_valid && mmio_we && mmio_addr == POC_INSTR;
  wire wr_flag  = mmio_valid && mmio_we && mmio_addr == POC_FLAG;

  assign pim_valid = start_q;
  assign pim_instr = instr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      instr_q     <= '0;
      start_q     <= 1'b0;
      ack_q       <= 1'b0;
      fin_q       <= 1'b0;
      data_q      <= '0;
      mmio_rvalid <= 1'b0;
      mmio_rdata  <= '0;
    end else begin
      if (wr_instr) instr_q <= pim_instr_t'(mmio_wdata);

      if (wr_flag && mmio_wdata[FLAG_START]) begin
        start_q <= 1'b1;
        ack_q   <= 1'b0;
        fin_q   <= 1'b0;
      end else begin
        if (pim_valid && pim_ack) begin
          start_q <= 1'b0;
          ack_q   <= 1'b1;
        end
        if (pim_fin) fin_q <= 1'b1;
      end
      if (pim_dvalid) data_q <= pim_data;

      mmio_rvalid <= mmio_valid && !mmio_we;
      unique case (mmio_addr)
        POC_INSTR: mmio_rdata <= word_t'(instr_q);
        POC_FLAG:  mmio_rdata <= word_t'({fin_q, ack_q, start_q});
        POC_DATA:  mmio_rdata <= data_q;
        default:   mmio_rdata <= '0;
      endcase
    end
  end

  // The controller acknowledges only an offered instruction.
  a_ack_offered: assert property (@(posedge clk) disable iff (!rst_n)
                                  pim_ack |-> pim_valid);
endmodule
