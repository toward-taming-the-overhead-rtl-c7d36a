// dfi_info_collector -- the info-collector: hardware added between the main
// processor and its memory controller for data-flow integrity (DFI)
// enforcement by a checker next to memory.
//
// The instrumented user program follows every load and store with a "DFI
// store" to a signature address (dfi_global) whose data carries the
// instruction's identifier and type. This block turns that stream into
// compact DFI packets in a FIFO region of memory, where a processing-in-memory
// core checks them against the reaching-definition sets. It holds:
//   u_parser  (dfi_info_parser)  set-up capture, DFI store decoding, basic and
//                                library packets, relay of ordinary accesses,
//                                FIFO-region protection;
//   u_txbuf   (dfi_tx_buffer)    2 KB transmission buffer with optimizations C
//                                and E and compression;
//   u_fifo    (dfi_fifo_ptr)     head/tail pointers of the packet FIFO.
// One memory-controller port carries both kinds of traffic. Relayed program
// accesses have priority; a packet word is written to packet_mem_addr +
// 4*tail when no relayed access waits and the FIFO is not full. The PIM side
// reads words at fifo_rd_addr and pulses pim_pop for each word consumed.
// The parts and their roles follow the paper; the single shared port, its
// priority and the valid/ready handshakes are this design's choices.
//
// Timing: a relayed access leaves one cycle after it is accepted. Packet
// words leave when a block is flushed (buffer full, or flush_req). While a
// block is processed, DFI stores are held off (cpu_ready low).
//
// The raw head and tail values of u_fifo stay unconnected on purpose: the
// PIM side needs only fifo_rd_addr and fifo_count, and the write side only
// the write address, so a lint tool reports them as unused.
module dfi_info_collector
  import dfi_pkg::*;
#(
  parameter int unsigned   BUF_BYTES    = 2048,
  parameter int unsigned   FIFO_BYTES   = 65536,
  parameter bit            EN_OPT_C     = 1'b1,
  parameter bit            EN_OPT_E     = 1'b1,
  parameter bit            EN_COMPRESS  = 1'b1,
  parameter logic [DW-1:0] DFI_DUMMY    = DFI_DUMMY_DEFAULT,
  parameter logic [DW-1:0] PACKET_DUMMY = PACKET_DUMMY_DEFAULT,
  localparam int unsigned  FW = $clog2(FIFO_BYTES / 4),
  localparam int unsigned  CW = $clog2(BUF_BYTES / SLOT_BYTES + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // main processor side
  input  logic          cpu_valid,
  output logic          cpu_ready,
  input  mem_op_t       cpu_op,
  input  logic          flush_req,
  // memory controller side
  output logic          mc_valid,
  input  logic          mc_ready,
  output mem_op_t       mc_op,
  output logic          mc_is_pkt,
  // PIM side of the packet FIFO
  input  logic          pim_pop,
  output logic [AW-1:0] fifo_rd_addr,
  output logic [FW:0]   fifo_count,
  output logic          fifo_empty,
  output logic          fifo_full,
  // status
  output logic          setup_done,
  output logic [AW-1:0] dfi_global,
  output logic [AW-1:0] packet_mem_addr,
  output logic          fifo_violation,
  output logic          buf_busy,
  output logic          ev_packet,
  output logic          ev_flush,
  output logic [CW-1:0] ev_pruned,
  output logic          ev_swap,
  output logic          ev_pair,
  output logic          ev_one,
  output logic          ev_basic,
  output logic          ev_lib
);

  logic     relay_valid, relay_ready;
  mem_op_t  relay_op;
  logic     pkt_valid, pkt_ready;
  dfi_pkt_t pkt;
  logic     glob_def, pm_def;

  dfi_info_parser #(
    .DFI_DUMMY(DFI_DUMMY), .PACKET_DUMMY(PACKET_DUMMY), .FIFO_BYTES(FIFO_BYTES)
  ) u_parser (
    .clk, .rst_n,
    .cpu_valid, .cpu_ready, .cpu_op,
    .relay_valid, .relay_ready, .relay_op,
    .pkt_valid, .pkt_ready, .pkt,
    .dfi_global_def(glob_def), .dfi_global,
    .packet_mem_def(pm_def), .packet_mem_addr,
    .fifo_violation
  );

  assign setup_done = glob_def && pm_def;
  assign ev_packet  = pkt_valid && pkt_ready;

  logic          out_valid, out_ready;
  logic [DW-1:0] out_word;

  dfi_tx_buffer #(
    .BUF_BYTES(BUF_BYTES), .EN_OPT_C(EN_OPT_C), .EN_OPT_E(EN_OPT_E), .EN_COMPRESS(EN_COMPRESS)
  ) u_txbuf (
    .clk, .rst_n,
    .in_valid(pkt_valid), .in_ready(pkt_ready), .in_pkt(pkt),
    .flush_req,
    .out_valid, .out_ready, .out_word,
    .busy(buf_busy),
    .ev_flush, .ev_pruned, .ev_swap, .ev_pair, .ev_one, .ev_basic, .ev_lib
  );

  logic [FW:0]   fifo_head, fifo_tail;
  logic [AW-1:0] fifo_wr_addr;
  logic          push;

  dfi_fifo_ptr #(.DEPTH_WORDS(FIFO_BYTES / 4)) u_fifo (
    .clk, .rst_n,
    .base(packet_mem_addr), .push, .pop(pim_pop),
    .head(fifo_head), .tail(fifo_tail), .count(fifo_count),
    .full(fifo_full), .empty(fifo_empty),
    .wr_addr(fifo_wr_addr), .rd_addr(fifo_rd_addr)
  );

  // memory-controller port: relayed accesses first, then packet words
  always_comb begin
    relay_ready = mc_ready;
    out_ready   = mc_ready && !relay_valid && !fifo_full;
    mc_valid    = relay_valid || (out_valid && !fifo_full);
    mc_is_pkt   = !relay_valid;
    if (relay_valid) mc_op = relay_op;
    else             mc_op = '{we: 1'b1, addr: fifo_wr_addr, data: out_word};
  end
  assign push = out_valid && out_ready;

endmodule
