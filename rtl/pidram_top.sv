// pidram_top: the PiDRAM hardware between a CPU and a DDR3 PHY.
//
// PiDRAM lets unmodified DDR3 chips compute: a memory controller that may
// deliberately violate DRAM timings issues command sequences that copy a
// whole row inside the chip (RowClone) or read cells with too short an
// activation latency to harvest random bits (D-RaNGe).  Software reaches
// these operations with ordinary loads and stores to the PuM Operations
// Controller (POC), and keeps using normal loads and stores for memory.
//
// Ports, all plain signals:
//   mmio_*   the POC's three memory-mapped registers (instruction, flag,
//            data), as reached through the CPU's memory bus;
//   req_*    cache-block LOAD/STORE requests from the memory bus;
//   rsp_*    their responses;
//   dfi_*    one DDR3 command per cycle, write and read data, towards the
//            DDR3 PHY, which is outside this design.
// The CPU, its caches and bus, and the PHY are not part of this RTL.
//
// All flip-flops use rst_n as an asynchronous active-low reset.  Lint tools
// may report rst_n as used both synchronously and asynchronously: the
// synchronous use is only the "disable iff (!rst_n)" of the handshake
// assertions, which generate no logic, so the warning stands.
module pidram_top
  import pidram_pkg::*;
#(
  parameter int unsigned T_REFI_NS      = 7800,
  parameter int unsigned ZQ_INTERVAL_NS = 128_000_000,
  parameter int unsigned RNG_WORDS      = RNG_DEPTH
) (
  input  logic       clk,
  input  logic       rst_n,
  // POC memory-mapped registers
  input  logic       mmio_valid,
  input  logic       mmio_we,
  input  logic [4:0] mmio_addr,
  input  word_t      mmio_wdata,
  output logic       mmio_rvalid,
  output word_t      mmio_rdata,
  // LOAD/STORE port
  input  logic       req_valid,
  output logic       req_ready,
  input  logic       req_we,
  input  pa_t        req_addr,
  input  blk_t       req_wdata,
  output logic       rsp_valid,
  output blk_t       rsp_rdata,
  // DFI-style DDR3 PHY interface
  output dfi_cmd_t   dfi_cmd,
  output logic       dfi_wrdata_en,
  output blk_t       dfi_wrdata,
  input  logic       dfi_rddata_valid,
  input  blk_t       dfi_rddata
);
  logic       pim_valid, pim_ack, pim_fin, pim_dvalid;
  pim_instr_t pim_instr;
  word_t      pim_data;

  poc u_poc (
    .clk, .rst_n,
    .mmio_valid, .mmio_we, .mmio_addr, .mmio_wdata, .mmio_rvalid, .mmio_rdata,
    .pim_valid, .pim_instr, .pim_ack, .pim_fin, .pim_dvalid, .pim_data
  );

  pidram_mc #(
    .T_REFI_NS(T_REFI_NS), .ZQ_INTERVAL_NS(ZQ_INTERVAL_NS), .RNG_WORDS(RNG_WORDS)
  ) u_mc (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_we, .req_addr, .req_wdata, .rsp_valid, .rsp_rdata,
    .pim_valid, .pim_instr, .pim_ack, .pim_fin, .pim_dvalid, .pim_data,
    .dfi_cmd, .dfi_wrdata_en, .dfi_wrdata, .dfi_rddata_valid, .dfi_rddata
  );
endmodule
