// tb_dfi_info_parser -- self-checking test of DFI store recognition and
// packet generation.
//
// Drives the parser with the memory operations of an instrumented program:
// ordinary accesses before set-up (relayed), the two set-up stores
// ("store 123456 11122" makes 11122 the dfi_global address), an instrumented
// store (id 12) and load (id 25), the two library-call sequences of the
// library example (memcpy with a 32-bit length, memset with a 64-bit length),
// a return-address record, and accesses into the packet FIFO region. Output
// streams are stalled at random. Every relayed access, every packet and the
// violation flag are compared with the expected lists.
module tb_dfi_info_parser;
  import dfi_pkg::*;
  import dfi_ref_pkg::*;

  localparam logic [31:0] GLOBAL = 32'd11122;
  localparam logic [31:0] PMEM   = 32'h0010_0000;

  logic clk = 0, rst_n = 0;
  logic cpu_valid, cpu_ready, relay_valid, relay_ready, pkt_valid, pkt_ready;
  mem_op_t cpu_op, relay_op;
  dfi_pkt_t pkt;
  logic gdef, pdef, fifo_violation;
  logic [31:0] gaddr, paddr;
  int checks = 0, failures = 0, n_viol = 0, cyc = 0;

  mem_op_t  exp_relay[$];
  dfi_pkt_t exp_pkt[$];

  dfi_info_parser #(.FIFO_BYTES(256)) dut (
    .clk, .rst_n, .cpu_valid, .cpu_ready, .cpu_op,
    .relay_valid, .relay_ready, .relay_op, .pkt_valid, .pkt_ready, .pkt,
    .dfi_global_def(gdef), .dfi_global(gaddr), .packet_mem_def(pdef), .packet_mem_addr(paddr),
    .fifo_violation
  );

  always #5 clk = !clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // random back-pressure and output checking; everything is driven and
  // sampled at the falling edge, so a transfer seen here happens at the next
  // rising edge
  always @(negedge clk) begin
    cyc++;
    relay_ready = ($urandom_range(0, 3) != 0);
    pkt_ready   = ($urandom_range(0, 3) != 0);
    if (relay_valid && relay_ready) begin
      checks++;
      if (exp_relay.size() == 0 || relay_op != exp_relay[0]) begin
        failures++;
        $display("FAIL relay %h %h %h", relay_op.we, relay_op.addr, relay_op.data);
      end
      if (exp_relay.size() != 0) void'(exp_relay.pop_front());
    end
    if (pkt_valid && pkt_ready) begin
      checks++;
      if (exp_pkt.size() == 0 || !pkt_eq(pkt, exp_pkt[0])) begin
        failures++;
        $display("FAIL packet %s", pkt_str(pkt));
        if (exp_pkt.size() != 0) $display("     expected %s", pkt_str(exp_pkt[0]));
      end
      if (exp_pkt.size() != 0) void'(exp_pkt.pop_front());
    end
    if (fifo_violation) n_viol++;
  end

  task automatic op(bit we, bit [31:0] addr, bit [31:0] data);
    @(negedge clk);
    #1;
    cpu_op = '{we: we, addr: addr, data: data};
    cpu_valid = 1'b1;
    #1;
    while (!cpu_ready) begin
      @(negedge clk);
      #1;
    end
    @(posedge clk);
    #1 cpu_valid = 1'b0;
  endtask

  // ordinary access that must be relayed
  task automatic user(bit we, bit [31:0] addr, bit [31:0] data);
    exp_relay.push_back('{we: we, addr: addr, data: data});
    op(we, addr, data);
  endtask

  initial begin
    cpu_valid = 0; cpu_op = '0; relay_ready = 1; pkt_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // before set-up: everything relayed, even a store to the future dfi_global
    user(1, 32'h2000, 32'd7);
    user(0, 32'h2000, 32'd0);
    user(1, GLOBAL, 32'h1_0005);
    // set-up stores (consumed)
    op(1, GLOBAL, 32'd123456);
    op(1, PMEM, 32'd654321);
    // a second dfi_dummy store is an ordinary store now
    user(1, 32'h3000, 32'd123456);
    // store x1 addr1 (id 12), load x2 addr2 (id 25)
    user(1, 32'h8000, 32'd1);
    exp_pkt.push_back(mk_basic(0, 12, 32'h8000));
    op(1, GLOBAL, (0 << 16) + 12);
    user(0, 32'h8400, 32'd0);
    exp_pkt.push_back(mk_basic(1, 25, 32'h8400));
    op(1, GLOBAL, (1 << 16) + 25);
    // memcpy(x1, y1, 40), id 7: loads y1, stores x1, 32-bit length
    exp_pkt.push_back(mk_lib(7, 1, 1, 0, 32'h5000, 32'h6000, 40));
    op(1, GLOBAL, (1 << 20) + (1 << 19) + (0 << 18) + (1 << 17) + 7);
    op(1, GLOBAL, 32'h5000);
    user(0, 32'h2004, 32'd0);          // an unrelated access in between
    op(1, GLOBAL, 32'h6000);
    op(1, GLOBAL, 40);
    // memset(x2, 3, (9<<32)+12), id 15: stores only, 64-bit length
    exp_pkt.push_back(mk_lib(15, 0, 1, 1, 0, 32'h7000, (64'd9 << 32) + 12));
    op(1, GLOBAL, (1 << 20) + (0 << 19) + (1 << 18) + (1 << 17) + 15);
    op(1, GLOBAL, 32'h7000);
    op(1, GLOBAL, 12);
    op(1, GLOBAL, 9);
    // return-address protection: load-type record, id 33, pointer 0x7ff0
    exp_pkt.push_back(mk_basic(1, 33, 32'h7ff0));
    op(1, GLOBAL, (1 << 21) + (1 << 16) + 33);
    op(1, GLOBAL, 32'h7ff0);
    // accesses into the packet FIFO region: flagged, store dropped, load relayed
    op(1, PMEM + 8, 32'hdead);
    user(0, PMEM + 252, 32'h0);
    user(1, PMEM + 256, 32'h1);        // just past the region: ordinary
    // random traffic: ordinary accesses with instrumentation after each
    for (int i = 0; i < 200; i++) begin
      bit [31:0] a;
      bit ld;
      bit [15:0] id;
      a = 32'h9000 + 32'($urandom_range(0, 255)) * 4;
      ld = 1'($urandom);
      id = 16'($urandom);
      user(!ld, a, $urandom);
      exp_pkt.push_back(mk_basic(ld, id, a));
      op(1, GLOBAL, {15'b0, ld, id});
    end
    repeat (20) @(posedge clk);
    checks++;
    if (!gdef || gaddr != GLOBAL || !pdef || paddr != PMEM) begin
      failures++; $display("FAIL set-up capture %0d %h %0d %h", gdef, gaddr, pdef, paddr);
    end
    checks++;
    if (n_viol != 2) begin failures++; $display("FAIL violations %0d, expected 2", n_viol); end
    checks++;
    if (exp_relay.size() != 0 || exp_pkt.size() != 0) begin
      failures++; $display("FAIL missing outputs: %0d relays, %0d packets", exp_relay.size(), exp_pkt.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
