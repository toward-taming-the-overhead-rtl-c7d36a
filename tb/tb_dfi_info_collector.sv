// tb_dfi_info_collector -- end-to-end test of the info-collector at reduced
// size: a 256-byte transmission buffer (32 slots) and a 64-byte packet FIFO,
// so that blocks are flushed often and the FIFO fills up. See
// dfi_top_tb_body.svh for what is driven and checked.
module tb_dfi_info_collector;
  import dfi_pkg::*;
  import dfi_ref_pkg::*;

  localparam int BUF_B  = 256;
  localparam int FIFO_B = 64;
  localparam int REPS   = 3;
  localparam bit NEED_FULL = 1;

  `include "dfi_top_tb_body.svh"

  dfi_info_collector #(.BUF_BYTES(BUF_B), .FIFO_BYTES(FIFO_B)) dut (.*);
endmodule
