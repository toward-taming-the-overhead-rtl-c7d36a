// dfi_fifo_ptr -- hardware head/tail pointers of the packet FIFO memory.
//
// The packet FIFO is an ordinary region of memory next to the checker,
// starting at packet_mem_addr (captured by the parser) and DEPTH_WORDS 32-bit
// words long. This block keeps the two pointers in hardware so that neither
// side runs software to maintain the queue: the tail is advanced by the
// producer (the info-collector, one step per packet word written) and the
// head by the consumer (the checker, one step per word read). Each pointer
// has one extra wrap bit, so full and empty are told apart exactly.
// wr_addr is the byte address of the next word to write, rd_addr that of the
// next word to read; both wrap inside the region.
// Keeping head and tail in hardware follows the paper; the region size, the
// pop-pulse interface for the consumer and the wrap-bit scheme are this
// design's choices.
//
// Timing: push and pop take effect at the clock edge; count, full and empty
// are combinational from the registered pointers. A push when full or a pop
// when empty is ignored (and flagged by an assertion).
module dfi_fifo_ptr
  import dfi_pkg::*;
#(
  parameter int unsigned DEPTH_WORDS = 16384,
  localparam int unsigned PW = $clog2(DEPTH_WORDS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [AW-1:0] base,
  input  logic          push,
  input  logic          pop,
  output logic [PW:0]   head,
  output logic [PW:0]   tail,
  output logic [PW:0]   count,
  output logic          full,
  output logic          empty,
  output logic [AW-1:0] wr_addr,
  output logic [AW-1:0] rd_addr
);

  logic do_push, do_pop;

  assign count   = tail - head;
  assign full    = (count == (PW+1)'(DEPTH_WORDS));
  assign empty   = (count == '0);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign wr_addr = base + (AW'(tail[PW-1:0]) << 2);
  assign rd_addr = base + (AW'(head[PW-1:0]) << 2);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head <= '0;
      tail <= '0;
    end else begin
      if (do_push) tail <= tail + 1'b1;
      if (do_pop)  head <= head + 1'b1;
    end
  end

  a_no_push_full: assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  a_no_pop_empty: assert property (@(posedge clk) disable iff (!rst_n) pop  |-> !empty);

endmodule
