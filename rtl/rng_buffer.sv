// rng_buffer: random number buffer of the memory controller.
//
// D-RaNGe operations produce a few random bits at a time; this FIFO keeps
// them until software reads them through the POC data register. It is a
// circular buffer of DEPTH entries of WIDTH bits, held in a register array,
// with read and write pointers one bit wider than the index so that full
// and empty differ.
//
// Interface: push/push_data write one entry; the writer must not push when
// full (an assertion checks this, and such a push is dropped). pop removes
// the head (ignored when empty). DEPTH must be a power of two. valid shows
// that head_data holds an entry; head_data is the oldest entry, read without
// delay. count is the number of entries. A push and a pop may happen in the
// same cycle.
//
// The paper names the buffer and what it holds; its depth, width and
// organisation are this design's choices (16 entries of 4 bits, the size of
// one D-RaNGe result).
module rng_buffer #(
  parameter int unsigned WIDTH = 4,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  logic [WIDTH-1:0]         push_data,
  input  logic                     pop,
  output logic                     valid,
  output logic [WIDTH-1:0]         head_data,
  output logic                     full,
  output logic [$clog2(DEPTH):0]   count
);

  localparam int unsigned IW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [IW:0]      wp, rp;

  logic do_push, do_pop;
  assign do_push = push && !full;
  assign do_pop  = pop && valid;

  assign count     = wp - rp;
  assign valid     = (wp != rp);
  assign full      = (count == (IW+1)'(DEPTH));
  assign head_data = mem[rp[IW-1:0]];

  always_ff @(posedge clk) begin
    if (do_push) mem[wp[IW-1:0]] <= push_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (do_push) wp <= wp + 1'b1;
      if (do_pop)  rp <= rp + 1'b1;
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    !(push && full));

endmodule
