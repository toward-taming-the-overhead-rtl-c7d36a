// Shared body of the end-to-end testbenches of dfi_info_collector.
//
// The including module defines BUF_B, FIFO_B, REPS, NEED_FULL and instantiates the DUT
// as "dut" on the signals declared here. The testbench plays three roles:
//   * the main processor: it runs a synthetic instrumented program (set-up
//     stores, a store loop aa[i] = i, a strided store loop over bb, loads
//     reading both back several times, a memcpy library call, call/return
//     records for a return address, and finally one overflow store by an
//     instruction outside the reaching-definition set of a later load);
//   * memory: a sparse word array behind the memory-controller port, which
//     stalls at random;
//   * the checker next to memory: a behavioural model of the DFI checking
//     program that pops words from the packet FIFO, decodes basic,
//     compressed and library packets, keeps the reaching-definition table
//     (RDT, one identifier per word) and checks every load against the
//     reaching-definition sets (RDS).
// A golden model applies the same DFI rules to the program in its original
// order. The test passes when the checker reports exactly the golden
// violations, ends with the same RDT, memory holds the program's data, and
// every mechanism occurred at least once.

  logic clk = 0, rst_n = 0;
  logic cpu_valid, cpu_ready, flush_req;
  mem_op_t cpu_op;
  logic mc_valid, mc_ready, mc_is_pkt;
  mem_op_t mc_op;
  logic pim_pop;
  logic [31:0] fifo_rd_addr, dfi_global, packet_mem_addr;
  logic [$clog2(FIFO_B / 4):0] fifo_count;
  logic fifo_empty, fifo_full, setup_done, fifo_violation, buf_busy;
  logic ev_packet, ev_flush, ev_swap, ev_pair, ev_one, ev_basic, ev_lib;
  logic [$clog2(BUF_B / 8 + 1)-1:0] ev_pruned;

  localparam logic [31:0] GLOBAL = 32'h0000_2b72;   // 11122
  localparam logic [31:0] PMEM   = 32'h0100_0000;
  localparam logic [31:0] AA     = 32'h0000_8000;
  localparam logic [31:0] BB     = 32'h0001_0000;
  localparam logic [31:0] CC     = 32'h0003_0000;
  localparam logic [31:0] STK    = 32'h0004_0ff0;

  int checks = 0, failures = 0;

  always #5 clk = !clk;

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("WATCHDOG expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reaching-definition sets ----------------
  // identifiers: 12 store aa[i], 25 load aa[i] {12}, 14 store bb, 30 load bb
  // {14}, 7 memcpy bb->cc {14}, 40 load cc {7}, 50 call (stores the return
  // address), 51 return {50}, 99 overflowing store (in no RDS)
  bit rds [bit [15:0]][bit [15:0]];
  function automatic bit in_rds(bit [15:0] id, bit [15:0] def);
    if (!rds.exists(id)) return 0;
    return rds[id].exists(def);
  endfunction

  // ---------------- golden model ----------------
  bit [15:0] g_rdt [bit [31:0]];
  int        g_viol[$];          // identifiers of loads that violate
  bit [31:0] g_mem [bit [31:0]];

  function automatic void g_store(bit [15:0] id, bit [31:0] a);
    g_rdt[a >> 2] = id;
  endfunction
  function automatic void g_load(bit [15:0] id, bit [31:0] a);
    bit [15:0] d;
    d = g_rdt.exists(a >> 2) ? g_rdt[a >> 2] : 16'h0;
    if (!in_rds(id, d)) g_viol.push_back(id);
  endfunction

  // ---------------- program ----------------
  mem_op_t prog[$];
  function automatic void p_op(bit we, bit [31:0] a, bit [31:0] d);
    prog.push_back('{we: we, addr: a, data: d});
    if (we) g_mem[a] = d;
  endfunction
  function automatic void p_store(bit [15:0] id, bit [31:0] a, bit [31:0] d);
    p_op(1, a, d); p_op(1, GLOBAL, {15'b0, 1'b0, id}); g_store(id, a);
  endfunction
  function automatic void p_load(bit [15:0] id, bit [31:0] a);
    p_op(0, a, 0); p_op(1, GLOBAL, {15'b0, 1'b1, id}); g_load(id, a);
  endfunction
  function automatic void p_memcpy(bit [15:0] id, bit [31:0] dst, bit [31:0] src, int words);
    p_op(1, GLOBAL, (1 << 20) + (1 << 19) + (0 << 18) + (1 << 17) + 32'(id));
    p_op(1, GLOBAL, src);
    p_op(1, GLOBAL, dst);
    p_op(1, GLOBAL, 32'(words));
    for (int i = 0; i < words; i++) begin
      g_load(id, src + 32'(4 * i));
      p_op(1, dst + 32'(4 * i), g_mem.exists(src + 32'(4 * i)) ? g_mem[src + 32'(4 * i)] : 0);
    end
    for (int i = 0; i < words; i++) g_store(id, dst + 32'(4 * i));
  endfunction
  function automatic void p_ret(bit is_load, bit [15:0] id, bit [31:0] ptr);
    p_op(1, GLOBAL, (1 << 21) + (32'(is_load) << 16) + 32'(id));
    p_op(1, GLOBAL, ptr);
    if (is_load) g_load(id, ptr); else g_store(id, ptr);
  endfunction

  function automatic void build_program();
    rds[25][12] = 1; rds[30][14] = 1; rds[7][14] = 1; rds[40][7] = 1; rds[51][50] = 1;
    p_op(1, GLOBAL, 32'd123456);           // store dfi_dummy dfi_global
    p_op(1, PMEM, 32'd654321);             // store packet_dummy packet_mem_addr
    p_ret(0, 50, STK);                     // call: return address stored
    for (int r = 0; r < REPS; r++) begin
      for (int i = 0; i < 16; i++) p_store(12, AA + 32'(4 * (16 * r + i)), 32'(i));
      for (int i = 0; i < 8; i++)  p_store(14, BB + 32'(32'h400 * i) + 32'(4 * r), 32'(r + i));
      for (int k = 0; k < 3; k++)            // read aa back three times
        for (int i = 0; i < 16; i++) p_load(25, AA + 32'(4 * (16 * r + i)));
      for (int i = 7; i >= 0; i--) p_load(30, BB + 32'(32'h400 * i) + 32'(4 * r));
      p_load(25, 32'h0000_4000 + 32'($urandom_range(0, 1000)) * 4); // never written
    end
    p_memcpy(7, CC, BB, 4);
    for (int i = 0; i < 4; i++) p_load(40, CC + 32'(4 * i));
    p_op(0, PMEM + 4, 0);                  // program touches the packet FIFO
    p_ret(1, 51, STK);                     // return: return address loaded
    p_store(99, AA + 12, 32'hbad);         // overflow into aa[3]
    p_load(25, AA + 12);                   // violation: 99 not in RDS(25)
  endfunction

  // ---------------- memory behind the controller port ----------------
  bit [31:0] mem [bit [31:0]];
  int n_relay = 0, n_pkt_words = 0, n_mc_stall = 0;
  always @(negedge clk) begin
    mc_ready = ($urandom_range(0, 7) != 0);
    if (mc_valid && !mc_ready) n_mc_stall++;
    if (mc_valid && mc_ready) begin
      if (mc_op.we) mem[mc_op.addr] = mc_op.data;
      if (mc_is_pkt) n_pkt_words++; else n_relay++;
    end
  end

  // ---------------- checker next to memory ----------------
  word_decoder dec = new();
  bit [15:0] c_rdt [bit [31:0]];
  int        c_viol[$];
  int        n_done = 0;

  function automatic void c_check(bit [15:0] id, bit [31:0] widx);
    bit [15:0] d;
    d = c_rdt.exists(widx) ? c_rdt[widx] : 16'h0;
    if (!in_rds(id, d)) c_viol.push_back(id);
  endfunction

  always @(negedge clk) begin
    pim_pop = 1'b0;
    if (rst_n && !fifo_empty && $urandom_range(0, 7) == 0) begin
      dec.push(mem.exists(fifo_rd_addr) ? mem[fifo_rd_addr] : 32'h0);
      pim_pop = 1'b1;
    end
    while (n_done < dec.out.size()) begin
      dfi_pkt_t p;
      p = dec.out[n_done];
      n_done++;
      if (p.kind == PKT_BASIC) begin
        if (p.is_load) c_check(p.id, p.addr >> 2);
        else c_rdt[p.addr >> 2] = p.id;
      end else begin
        if (p.l_load)  for (int i = 0; i < int'(p.len); i++) c_check(p.id, (p.ld_addr >> 2) + 32'(i));
        if (p.l_store) for (int i = 0; i < int'(p.len); i++) c_rdt[(p.st_addr >> 2) + 32'(i)] = p.id;
      end
    end
  end

  // ---------------- mechanism counters ----------------
  int n_cpu_stall = 0, n_fifo_full = 0, n_fifo_viol = 0, n_pruned = 0, n_swap = 0, n_flush = 0;
  int n_pair = 0, n_one = 0, n_basic = 0, n_lib = 0, n_packets = 0;
  always @(negedge clk) begin
    if (cpu_valid && !cpu_ready) n_cpu_stall++;
    if (fifo_full) n_fifo_full++;
    if (fifo_violation) n_fifo_viol++;
    n_pruned += int'(ev_pruned);
    if (ev_swap) n_swap++;
    if (ev_flush) n_flush++;
    if (ev_pair) n_pair++;
    if (ev_one) n_one++;
    if (ev_basic) n_basic++;
    if (ev_lib) n_lib++;
    if (ev_packet) n_packets++;
  end

  task automatic mech(string name, int n);
    checks++;
    $display("  %-28s %0d", name, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", name); end
  endtask

  initial begin
    int t0;
    cpu_valid = 0; cpu_op = '0; flush_req = 0; mc_ready = 1; pim_pop = 0;
    build_program();
    repeat (3) @(posedge clk);
    rst_n = 1;
    t0 = 0;
    foreach (prog[i]) begin
      @(negedge clk);
      #1;
      cpu_op = prog[i]; cpu_valid = 1'b1;
      #1;
      while (!cpu_ready) begin @(negedge clk); #1; end
      @(posedge clk);
      #1 cpu_valid = 1'b0;
    end
    // end of program: drain the buffer and let the checker empty the FIFO
    @(negedge clk);
    flush_req = 1;
    repeat (3) @(negedge clk);
    while (buf_busy || mc_valid) @(negedge clk);
    flush_req = 0;
    while (!fifo_empty || dec.need != 0) @(negedge clk);
    repeat (5) @(negedge clk);

    $display("program: %0d memory operations, %0d DFI packets, %0d FIFO words, %0d blocks",
             prog.size(), n_packets, n_pkt_words, n_flush);
    checks++;
    if (!setup_done || dfi_global != GLOBAL || packet_mem_addr != PMEM) begin
      failures++; $display("FAIL set-up addresses %h %h", dfi_global, packet_mem_addr);
    end
    // verdicts
    checks++;
    if (c_viol != g_viol) begin
      failures++;
      $display("FAIL checker violations %p, golden %p", c_viol, g_viol);
    end
    $display("violations: checker %p, golden %p", c_viol, g_viol);
    checks++;
    if (g_viol.size() == 0 || g_viol[$] != 25) begin failures++; $display("FAIL attack not in golden list"); end
    // RDT equality
    checks++;
    if (c_rdt.size() != g_rdt.size()) begin
      failures++; $display("FAIL RDT sizes %0d vs %0d", c_rdt.size(), g_rdt.size());
    end
    foreach (g_rdt[w]) begin
      checks++;
      if (!c_rdt.exists(w) || c_rdt[w] != g_rdt[w]) begin
        failures++;
        if (failures < 10) $display("FAIL RDT[%h] = %h, expected %h", w, c_rdt.exists(w) ? c_rdt[w] : 16'hffff, g_rdt[w]);
      end
    end
    // program data reached memory (except the dropped store to the FIFO region: none here)
    foreach (g_mem[a]) begin
      if (a == GLOBAL || a == PMEM) continue;
      checks++;
      if (!mem.exists(a) || mem[a] != g_mem[a]) begin
        failures++;
        if (failures < 10) $display("FAIL mem[%h] = %h, expected %h", a, mem.exists(a) ? mem[a] : 0, g_mem[a]);
      end
    end
    // nothing of the set-up or DFI stores reached memory at their addresses
    checks++;
    if (mem.exists(GLOBAL)) begin failures++; $display("FAIL a DFI store was relayed"); end
    $display("mechanisms:");
    mech("set-up capture", int'(setup_done));
    mech("relayed accesses", n_relay);
    mech("DFI packets", n_packets);
    mech("library packets", n_lib);
    mech("blocks flushed", n_flush);
    mech("optimization C pruned", n_pruned);
    mech("optimization E swap phases", n_swap);
    mech("compressed pair words", n_pair);
    mech("compressed single words", n_one);
    mech("uncompressed basic packets", n_basic);
    mech("core stall cycles", n_cpu_stall);
    if (NEED_FULL) mech("FIFO full cycles", n_fifo_full);
    else $display("  %-28s %0d (not required at this FIFO size)", "FIFO full cycles", n_fifo_full);
    mech("memory port stall cycles", n_mc_stall);
    mech("FIFO region violations", n_fifo_viol);
    mech("DFI violations reported", c_viol.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
