// tb_dfi_fifo_ptr -- self-checking test of the packet-FIFO pointers.
//
// Random pushes and pops on an 8-word FIFO at base 0x1000, compared every
// cycle with a counter model: count, full, empty, and the byte addresses of
// the next write and the next read, which must wrap inside the region. The
// FIFO is driven to full and back to empty at least once.
module tb_dfi_fifo_ptr;
  import dfi_pkg::*;

  localparam int D = 8;
  logic clk = 0, rst_n = 0;
  logic push, pop, full, empty;
  logic [3:0] head, tail, count;
  logic [31:0] wr_addr, rd_addr;
  int checks = 0, failures = 0;
  int m_head = 0, m_tail = 0;
  int saw_full = 0, saw_empty = 0;

  dfi_fifo_ptr #(.DEPTH_WORDS(D)) dut (.clk, .rst_n, .base(32'h1000), .push, .pop,
                                       .head, .tail, .count, .full, .empty, .wr_addr, .rd_addr);

  always #5 clk = !clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 2000; c++) begin
      int bias;
      bias = (c / 200) % 2;   // alternate phases of filling and draining
      @(negedge clk);
      checks++;
      if (count != 4'(m_tail - m_head) || full != ((m_tail - m_head) == D) || empty != (m_tail == m_head) ||
          wr_addr != 32'h1000 + 32'((m_tail % D) * 4) || rd_addr != 32'h1000 + 32'((m_head % D) * 4)) begin
        failures++;
        $display("FAIL cycle %0d: count %0d full %0d empty %0d wr %h rd %h model h%0d t%0d",
                 c, count, full, empty, wr_addr, rd_addr, m_head, m_tail);
      end
      if (full) saw_full++;
      if (empty) saw_empty++;
      push = !full && ($urandom_range(0, 9) < (bias ? 3 : 7));
      pop  = !empty && ($urandom_range(0, 9) < (bias ? 7 : 3));
      @(posedge clk);
      #1;
      if (push) m_tail++;
      if (pop) m_head++;
    end
    checks++;
    if (saw_full == 0 || saw_empty == 0) begin failures++; $display("FAIL full/empty never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
