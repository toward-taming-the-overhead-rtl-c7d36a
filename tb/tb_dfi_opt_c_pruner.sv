// tb_dfi_opt_c_pruner -- self-checking test of the optimization-C PE array.
//
// Directed cases (a repeated load is pruned; a store to the same address or a
// library packet in between keeps it; only the nearest repeat is marked by a
// column, later repeats by later columns), then random buffers drawn from a
// few addresses and identifiers so that repeats are common. Expected marks
// come from dfi_ref_pkg::ref_redundant, a sequential model of the rule.
module tb_dfi_opt_c_pruner;
  import dfi_pkg::*;
  import dfi_ref_pkg::*;

  localparam int N = 12;
  slot_t        slots [N];
  logic [N-1:0] valid, redundant;
  int checks = 0, failures = 0;

  dfi_opt_c_pruner #(.N(N)) dut (.slots, .valid, .redundant);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // load a packet list (library packets take three slots) and compare
  task automatic run(pkt_q_t q, string name);
    bit red[$];
    int s;
    bit [N-1:0] exp_v;
    ref_redundant(q, red);
    s = 0; exp_v = '0;
    valid = '0;
    for (int i = 0; i < N; i++) slots[i] = '{kind: slot_kind_e'($urandom_range(0, 3)), payload: {$urandom, $urandom}};
    foreach (q[i]) begin
      if (q[i].kind == PKT_LIB) begin
        slots[s] = '{kind: SLOT_LIB_HDR, payload: 64'(q[i].id)};
        slots[s+1] = '{kind: SLOT_LIB_ADR, payload: {q[i].st_addr, q[i].ld_addr}};
        slots[s+2] = '{kind: SLOT_LIB_LEN, payload: q[i].len};
        valid[s +: 3] = 3'b111;
        s += 3;
      end else begin
        slots[s] = '{kind: SLOT_BASIC, payload: basic_payload(q[i].is_load, q[i].id, q[i].addr)};
        valid[s] = 1'b1;
        exp_v[s] = red[i];
        s++;
      end
    end
    #1;
    checks++;
    if (redundant !== exp_v) begin
      failures++;
      $display("FAIL %s: got %b expected %b", name, redundant, exp_v);
    end
  endtask

  initial begin
    pkt_q_t q;
    int n_red = 0;
    // L(A,5) S(B) L(A,5): second load pruned
    run('{mk_basic(1, 5, 32'h80a0), mk_basic(0, 9, 32'h7000), mk_basic(1, 5, 32'h80a0)}, "repeat");
    checks++; if (redundant[2] !== 1'b1) failures++;
    // L(A,5) S(A) L(A,5): store in between keeps the second load
    run('{mk_basic(1, 5, 32'h80a0), mk_basic(0, 9, 32'h80a0), mk_basic(1, 5, 32'h80a0)}, "store between");
    checks++; if (redundant[2] !== 1'b0) failures++;
    // different identifier: kept
    run('{mk_basic(1, 5, 32'h80a0), mk_basic(1, 6, 32'h80a0)}, "other id");
    // library packet in between: kept
    run('{mk_basic(1, 5, 32'h80a0), mk_lib(3, 1, 1, 0, 32'h100, 32'h200, 4), mk_basic(1, 5, 32'h80a0)}, "library");
    // three equal loads: P1 marked by column 0, P2 by column 1
    run('{mk_basic(1, 5, 32'h10), mk_basic(1, 5, 32'h10), mk_basic(1, 5, 32'h10)}, "chain");
    checks++; if (redundant[2:0] !== 3'b110) failures++;
    for (int t = 0; t < 300; t++) begin
      int len;
      q = {};
      len = $urandom_range(1, N);
      for (int i = 0; i < len; i++) begin
        if ($urandom_range(0, 9) == 0 && (len - i) >= 3) begin
          q.push_back(mk_lib(16'($urandom_range(1, 3)), 1, 1, 0, 32'h40, 32'h80, 8));
          i += 2;
        end else begin
          q.push_back(mk_basic(1'($urandom_range(0, 3) != 0), 16'($urandom_range(1, 2)),
                               32'($urandom_range(0, 2)) * 4));
        end
      end
      run(q, $sformatf("random %0d", t));
      n_red += $countones(redundant);
    end
    checks++;
    if (n_red == 0) begin failures++; $display("FAIL random cases never pruned"); end
    $display("random cases pruned %0d packets", n_red);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
