// tb_dfi_tx_buffer -- self-checking test of the transmission buffer.
//
// A 128-byte buffer (16 slots) receives a stream of basic and library
// packets: strided store/load loops (compressible after sorting), repeated
// loads of one address (pruned by optimization C), random addresses (sent
// uncompressed) and library calls, with random gaps on the input and random
// back-pressure on the output. The emitted words are decoded by the
// reference decoder and must equal, packet for packet, what the reference
// model predicts: blocks cut where the next packet no longer fits, then per
// block optimization C and a stable address sort between library packets.
// The test also requires that every mechanism occurred: pruning, swapping,
// paired and single compressed words, uncompressed basic packets, library
// packets, and input stalls while a block is processed.
module tb_dfi_tx_buffer;
  import dfi_pkg::*;
  import dfi_ref_pkg::*;

  localparam int BUF = 128;
  localparam int N   = BUF / 8;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, flush_req, out_valid, out_ready, busy;
  dfi_pkt_t in_pkt;
  logic [31:0] out_word;
  logic ev_flush, ev_swap, ev_pair, ev_one, ev_basic, ev_lib;
  logic [4:0] ev_pruned;
  int checks = 0, failures = 0;
  int n_flush = 0, n_pruned = 0, n_swap = 0, n_stall = 0;

  dfi_tx_buffer #(.BUF_BYTES(BUF)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_pkt, .flush_req,
    .out_valid, .out_ready, .out_word, .busy,
    .ev_flush, .ev_pruned, .ev_swap, .ev_pair, .ev_one, .ev_basic, .ev_lib
  );

  always #5 clk = !clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  word_decoder dec = new();

  always @(negedge clk) begin
    out_ready = ($urandom_range(0, 4) != 0);
    if (out_valid && out_ready) dec.push(out_word);
    if (ev_flush) n_flush++;
    n_pruned += int'(ev_pruned);
    if (ev_swap) n_swap++;
    if (in_valid && !in_ready) n_stall++;
  end

  pkt_q_t sent;

  task automatic send(dfi_pkt_t p);
    @(negedge clk);
    #1;
    in_pkt = p; in_valid = 1'b1;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 in_valid = 1'b0;
    sent.push_back(p);
    if ($urandom_range(0, 3) == 0) repeat ($urandom_range(1, 3)) @(negedge clk);
  endtask

  function automatic pkt_q_t ref_all(pkt_q_t q);
    pkt_q_t out, blk;
    int used;
    used = 0; out = {}; blk = {};
    foreach (q[i]) begin
      int need;
      need = (q[i].kind == PKT_LIB) ? 3 : 1;
      if (used + need > N) begin
        out = {out, ref_block_out(blk, 1, 1)}; blk = {}; used = 0;
      end
      blk.push_back(q[i]); used += need;
      if (used == N) begin out = {out, ref_block_out(blk, 1, 1)}; blk = {}; used = 0; end
    end
    if (blk.size() != 0) out = {out, ref_block_out(blk, 1, 1)};
    return out;
  endfunction

  initial begin
    pkt_q_t expq;
    in_valid = 0; in_pkt = '0; flush_req = 0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 40; r++) begin
      int kind;
      kind = $urandom_range(0, 4);
      case (kind)
        0: for (int i = 0; i < 6; i++) begin   // aa[i] = i; then read back, interleaved
             send(mk_basic(0, 16'd12, 32'h8000 + 32'(i * 4)));
             send(mk_basic(1, 16'd25, 32'h8000 + 32'(5 - i) * 32'h400));
           end
        1: for (int i = 0; i < 5; i++) send(mk_basic(1, 16'd40, 32'h9000));   // repeated load
        2: for (int i = 0; i < 4; i++) send(mk_basic(1'($urandom), 16'($urandom), $urandom));
        3: send(mk_lib(16'd7, 1, 1, 1'($urandom), 32'h5000, 32'h6000, {32'd1, 32'd40}));
        default: send(mk_lib(16'd15, 0, 1, 0, 32'h0, 32'h7000, 64'd12));
      endcase
    end
    // drain the last block
    @(negedge clk);
    flush_req = 1;
    repeat (2) @(negedge clk);
    while (busy) @(negedge clk);
    flush_req = 0;
    repeat (5) @(negedge clk);

    expq = ref_all(sent);
    checks++;
    if (dec.out.size() != expq.size()) begin
      failures++;
      $display("FAIL %0d packets decoded, %0d expected", dec.out.size(), expq.size());
    end
    for (int i = 0; i < expq.size() && i < dec.out.size(); i++) begin
      checks++;
      if (!pkt_eq(dec.out[i], expq[i])) begin
        failures++;
        if (failures < 10) $display("FAIL packet %0d: got %s expected %s", i, pkt_str(dec.out[i]), pkt_str(expq[i]));
      end
    end
    $display("sent %0d packets, %0d blocks, pruned %0d, swap phases %0d, pair %0d one %0d basic %0d lib %0d, stall cycles %0d",
             sent.size(), n_flush, n_pruned, n_swap, dec.n_pair, dec.n_one, dec.n_basic, dec.n_lib, n_stall);
    checks++; if (n_pruned == 0)     begin failures++; $display("FAIL no pruning"); end
    checks++; if (n_swap == 0)       begin failures++; $display("FAIL no sorting swap"); end
    checks++; if (dec.n_pair == 0)   begin failures++; $display("FAIL no compressed pair"); end
    checks++; if (dec.n_one == 0)    begin failures++; $display("FAIL no single compressed word"); end
    checks++; if (dec.n_basic == 0)  begin failures++; $display("FAIL no uncompressed packet"); end
    checks++; if (dec.n_lib == 0)    begin failures++; $display("FAIL no library packet"); end
    checks++; if (n_stall == 0)      begin failures++; $display("FAIL input never stalled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
