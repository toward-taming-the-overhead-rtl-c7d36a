// tb_dfi_opt_e_sorter -- self-checking test of optimization E.
//
// Applies the sort step N+1 times (alternating phases) to a buffer and
// checks the result against a stable sort by {dead, address} done separately
// on each side of every library packet. The first case is the buffer of the
// optimization-E example: ten basic packets around one library packet.
// Random buffers follow, with few distinct addresses so that stability is
// exercised, and some entries marked dead.
module tb_dfi_opt_e_sorter;
  import dfi_pkg::*;

  localparam int N = 14;
  slot_t        cur [N], nxt [N];
  logic [N-1:0] cur_dead, nxt_dead;
  logic         odd, swapped;
  int checks = 0, failures = 0;
  int n_swaps = 0;

  dfi_opt_e_sorter #(.N(N)) dut (.slots_i(cur), .dead_i(cur_dead), .odd,
                                 .slots_o(nxt), .dead_o(nxt_dead), .swapped);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: stable sort of each segment between non-basic slots
  task automatic ref_sort(input slot_t s_in [N], input logic [N-1:0] d_in,
                          output slot_t s_out [N], output logic [N-1:0] d_out);
    s_out = s_in; d_out = d_in;
    for (int a = 1; a < N; a++) begin
      int b;
      slot_t t;
      logic td;
      if (s_out[a].kind != SLOT_BASIC) continue;
      t = s_out[a]; td = d_out[a];
      b = a - 1;
      while (b >= 0 && s_out[b].kind == SLOT_BASIC &&
             {d_out[b], slot_addr(s_out[b])} > {td, slot_addr(t)}) begin
        s_out[b+1] = s_out[b]; d_out[b+1] = d_out[b]; b--;
      end
      s_out[b+1] = t; d_out[b+1] = td;
    end
  endtask

  task automatic run(string name);
    slot_t exp_s [N];
    logic [N-1:0] exp_d;
    ref_sort(cur, cur_dead, exp_s, exp_d);
    odd = 1'b0;
    for (int p = 0; p <= N; p++) begin
      #1;
      if (swapped) n_swaps++;
      cur = nxt; cur_dead = nxt_dead;
      odd = !odd;
    end
    #1;
    checks++;
    if (cur != exp_s || cur_dead != exp_d) begin
      failures++;
      $display("FAIL %s", name);
      for (int i = 0; i < N; i++)
        $display("  %0d: got %0d %h d%0d  exp %0d %h d%0d", i, cur[i].kind, cur[i].payload, cur_dead[i],
                 exp_s[i].kind, exp_s[i].payload, exp_d[i]);
    end
  endtask

  initial begin
    // example buffer: S89@8000 L12@ff14 L67@8010 Sb4@ff2a S89@8010 L67@ff38
    // S89@8020 | library | L67@fff4 Sb4@8030
    cur[0] = '{SLOT_BASIC, basic_payload(0, 16'h89, 32'h8000)};
    cur[1] = '{SLOT_BASIC, basic_payload(1, 16'h12, 32'hff14)};
    cur[2] = '{SLOT_BASIC, basic_payload(1, 16'h67, 32'h8010)};
    cur[3] = '{SLOT_BASIC, basic_payload(0, 16'hb4, 32'hff2a)};
    cur[4] = '{SLOT_BASIC, basic_payload(0, 16'h89, 32'h8010)};
    cur[5] = '{SLOT_BASIC, basic_payload(1, 16'h67, 32'hff38)};
    cur[6] = '{SLOT_BASIC, basic_payload(0, 16'h89, 32'h8020)};
    cur[7] = '{SLOT_LIB_HDR, 64'h2_0001};
    cur[8] = '{SLOT_LIB_ADR, 64'h0};
    cur[9] = '{SLOT_LIB_LEN, 64'h4};
    cur[10] = '{SLOT_BASIC, basic_payload(1, 16'h67, 32'hfff4)};
    cur[11] = '{SLOT_BASIC, basic_payload(0, 16'hb4, 32'h8030)};
    cur[12] = '{SLOT_BASIC, basic_payload(0, 0, 32'hffff_ffff)};
    cur[13] = '{SLOT_BASIC, basic_payload(0, 0, 32'hffff_ffff)};
    cur_dead = 14'b11_0000_0000_0000;
    run("example");
    // expected order from the example
    checks++;
    if (slot_addr(cur[0]) != 32'h8000 || slot_addr(cur[1]) != 32'h8010 || slot_id(cur[1]) != 16'h67 ||
        slot_addr(cur[2]) != 32'h8010 || slot_id(cur[2]) != 16'h89 || slot_addr(cur[3]) != 32'h8020 ||
        slot_addr(cur[4]) != 32'hff14 || slot_addr(cur[5]) != 32'hff2a || slot_addr(cur[6]) != 32'hff38 ||
        cur[7].kind != SLOT_LIB_HDR || slot_addr(cur[10]) != 32'h8030 || slot_addr(cur[11]) != 32'hfff4) begin
      failures++;
      $display("FAIL example order");
    end
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < N; i++) begin
        cur[i] = '{SLOT_BASIC, basic_payload(1'($urandom), 16'(i), 32'($urandom_range(0, 5)) * 4)};
        cur_dead[i] = ($urandom_range(0, 5) == 0);
      end
      if ($urandom_range(0, 1) == 1) begin
        int p;
        p = $urandom_range(0, N - 3);
        cur[p] = '{SLOT_LIB_HDR, 64'(t)};
        cur[p+1] = '{SLOT_LIB_ADR, 64'(t)};
        cur[p+2] = '{SLOT_LIB_LEN, 64'(t)};
        cur_dead[p +: 3] = 3'b000;
      end
      run($sformatf("random %0d", t));
    end
    checks++;
    if (n_swaps == 0) begin failures++; $display("FAIL: no swap happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
