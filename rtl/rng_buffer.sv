// rng_buffer: random number buffer of the D-RaNGe controller.
//
// A first-word-fall-through FIFO of 32-bit random words, 1 KiB deep by
// default (256 words), as in the paper.  The D-RaNGe controller pushes a
// word each time it has collected 32 random bits; the rand_dram PiDRAM
// instruction pops one and buf_size reads the word count.  head is the
// oldest word and is valid whenever empty is low.  A push to a full buffer
// and a pop from an empty one are ignored (the D-RaNGe controller stops
// sampling while the buffer is full).  Push and pop in the same cycle are
// both served.  Storage is a plain array, so it maps to block or
// distributed RAM.
module rng_buffer #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 256
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [WIDTH-1:0]           din,
  input  logic                       pop,
  output logic [WIDTH-1:0]           head,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(DEPTH+1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;

  wire do_push = push && !full;
  wire do_pop  = pop  && !empty;

  assign empty = (count == 0);
  assign full  = (count == CW'(DEPTH));
  assign head  = mem[rptr];

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_push) wptr <= (wptr == AW'(DEPTH-1)) ? '0 : wptr + 1'b1;
      if (do_pop)  rptr <= (rptr == AW'(DEPTH-1)) ? '0 : rptr + 1'b1;
      count <= count + CW'(do_push) - CW'(do_pop);
    end
  end

  // The occupancy can never exceed the depth.
  a_count_bound: assert property (@(posedge clk) disable iff (!rst_n) count <= CW'(DEPTH));
endmodule
