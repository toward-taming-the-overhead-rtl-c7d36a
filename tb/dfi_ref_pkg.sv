// dfi_ref_pkg -- reference models shared by the testbenches.
//
// Written independently of the RTL, from the rules of the design:
//   * fp8_value / comp_decode: meaning of a 15-bit compressed packet;
//   * ref_redundant: optimization C applied to a block in program order;
//   * ref_block_out: the packets a block should produce after C and E
//     (live basic packets stably sorted by address between library packets);
//   * word_decoder: turns the 32-bit word stream of the packet FIFO back into
//     DFI packets, as the checker next to memory does.
package dfi_ref_pkg;
  import dfi_pkg::*;

  typedef dfi_pkt_t pkt_q_t[$];

  function automatic dfi_pkt_t mk_basic(bit is_load, bit [15:0] id, bit [31:0] addr);
    dfi_pkt_t p;
    p = '0;
    p.kind = PKT_BASIC; p.is_load = is_load; p.id = id; p.addr = addr;
    return p;
  endfunction

  function automatic dfi_pkt_t mk_lib(bit [15:0] id, bit ld, bit st, bit len64,
                                      bit [31:0] ld_addr, bit [31:0] st_addr, bit [63:0] len);
    dfi_pkt_t p;
    p = '0;
    p.kind = PKT_LIB; p.id = id; p.l_load = ld; p.l_store = st; p.l_len64 = len64;
    p.ld_addr = ld ? ld_addr : 32'h0;
    p.st_addr = st ? st_addr : 32'h0;
    p.len = len64 ? len : {32'h0, len[31:0]};
    return p;
  endfunction

  function automatic bit pkt_eq(dfi_pkt_t a, dfi_pkt_t b);
    if (a.kind != b.kind || a.id != b.id) return 0;
    if (a.kind == PKT_BASIC) return a.is_load == b.is_load && a.addr == b.addr;
    return a.l_load == b.l_load && a.l_store == b.l_store && a.l_len64 == b.l_len64 &&
           a.ld_addr == b.ld_addr && a.st_addr == b.st_addr && a.len == b.len;
  endfunction

  function automatic string pkt_str(dfi_pkt_t p);
    if (p.kind == PKT_BASIC)
      return $sformatf("%s id=%0h addr=%h", p.is_load ? "L" : "S", p.id, p.addr);
    return $sformatf("LIB id=%0h ld=%0d st=%0d l64=%0d %h %h len=%0h",
                     p.id, p.l_load, p.l_store, p.l_len64, p.ld_addr, p.st_addr, p.len);
  endfunction

  // Optimization C on packets in program order: a load is redundant when the
  // nearest later packet that is a library packet, a store to the same address,
  // or a load of the same address and id, is such a load (per earlier load).
  function automatic void ref_redundant(input pkt_q_t q, output bit red[$]);
    red = {};
    foreach (q[i]) red.push_back(1'b0);
    foreach (q[i]) begin
      if (q[i].kind != PKT_BASIC || !q[i].is_load) continue;
      for (int j = i + 1; j < q.size(); j++) begin
        if (q[j].kind != PKT_BASIC) break;
        if (q[j].addr != q[i].addr) continue;
        if (!q[j].is_load) break;
        if (q[j].id == q[i].id) begin red[j] = 1'b1; break; end
      end
    end
  endfunction

  // Expected packet sequence of one block after optimizations C (if en_c) and
  // E (if en_e).
  function automatic pkt_q_t ref_block_out(pkt_q_t q, bit en_c, bit en_e);
    bit red[$];
    pkt_q_t out, seg;
    out = {}; seg = {};
    if (en_c) ref_redundant(q, red);
    else foreach (q[i]) red.push_back(1'b0);
    for (int i = 0; i <= q.size(); i++) begin
      if (i == q.size() || q[i].kind == PKT_LIB) begin
        // stable insertion sort of the segment by address
        if (en_e)
          for (int a = 1; a < seg.size(); a++) begin
            dfi_pkt_t t;
            int b;
            t = seg[a];
            b = a - 1;
            while (b >= 0 && seg[b].addr > t.addr) begin seg[b+1] = seg[b]; b--; end
            seg[b+1] = t;
          end
        foreach (seg[s]) out.push_back(seg[s]);
        seg = {};
        if (i < q.size()) out.push_back(q[i]);
      end else if (!red[i]) begin
        seg.push_back(q[i]);
      end
    end
    return out;
  endfunction

  // value of an 8-bit base-16 float {sign, exp[2:0], mant[3:0]}
  function automatic longint fp8_value(bit [7:0] f);
    longint v;
    v = longint'(f[3:0]) << (4 * f[6:4]);
    return f[7] ? -v : v;
  endfunction

  class word_decoder;
    bit [31:0] prev_addr;
    bit [15:0] prev_id;
    int        need;      // words still expected for the current item
    int        step;
    dfi_pkt_t  cur;
    pkt_q_t    out;
    int        n_pair, n_one, n_basic, n_lib;

    function new();
      prev_addr = 0; prev_id = 0; need = 0; step = 0; out = {};
      n_pair = 0; n_one = 0; n_basic = 0; n_lib = 0;
    endfunction

    function void code(bit [14:0] c);
      dfi_pkt_t p;
      bit [15:0] idd;
      idd = {{10{c[13]}}, c[13:8]};
      p = mk_basic(c[14], prev_id + idd, prev_addr + 32'(fp8_value(c[7:0])));
      prev_addr = p.addr; prev_id = p.id;
      out.push_back(p);
    endfunction

    function void push(bit [31:0] w);
      if (need == 0) begin
        unique case (w[31:30])
          2'b00: begin cur = mk_basic(w[16], w[15:0], 0); need = 1; step = 1; end
          2'b01: begin code(w[14:0]); code(w[29:15]); n_pair++; end
          2'b11: begin code(w[14:0]); n_one++; end
          default: begin
            cur = mk_lib(w[15:0], w[19], w[20], w[18], 0, 0, 0);
            step = 10;
            need = int'(w[19]) + int'(w[20]) + 1 + int'(w[18]);
            if (!w[19]) step = 11;
            if (!w[19] && !w[20]) step = 12;
          end
        endcase
      end else begin
        if (step == 1) begin
          cur.addr = w; prev_addr = w; prev_id = cur.id; n_basic++;
        end else if (step == 10) begin
          cur.ld_addr = w; step = cur.l_store ? 11 : 12;
        end else if (step == 11) begin
          cur.st_addr = w; step = 12;
        end else if (step == 12) begin
          cur.len[31:0] = w; step = 13;
        end else begin
          cur.len[63:32] = w;
        end
        need--;
        if (need == 0) begin
          if (cur.kind == PKT_LIB) n_lib++;
          out.push_back(cur);
        end
      end
    endfunction
  endclass

endpackage
