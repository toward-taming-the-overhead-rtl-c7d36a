// dfi_tx_buffer -- transmission buffer of the info-collector: collects DFI
// packets into a block, optimizes and compresses the block, and writes it as
// 32-bit words towards the packet FIFO memory.
//
// Instead of sending every packet to memory on its own, packets are gathered
// in a register file of BUF_BYTES bytes (8-byte slots; a basic packet takes
// one slot, a library packet three). When the next packet does not fit, when
// the buffer is full, or when flush_req is high, the block is processed:
//   PRUNE  one cycle: the optimization-C array (dfi_opt_c_pruner) marks
//          redundant loads as dead (EN_OPT_C).
//   SORT   optimization E (dfi_opt_e_sorter), one odd-even phase per cycle,
//          until two phases in a row swap nothing (at most N+1 phases)
//          (EN_OPT_E).
//   EMIT   the live entries in buffer order, one output word per cycle:
//          a basic packet whose differences to the previously emitted basic
//          packet fit (dfi_compressor, EN_COMPRESS) becomes a 15-bit code;
//          two codes share one TAG_PAIR word, a lone code goes out as a
//          TAG_ONE word before anything else is written. Other basic packets
//          take a TAG_BASIC header word and an address word; a library packet
//          a TAG_LIB header word (the indicator bits of the original DFI
//          store) followed by its load address, store address, length low and
//          length high words, each only when present.
// New packets are refused (in_ready low) while a block is processed, which
// stalls the parser and so the core. The buffer, its 2 KB default size, the
// C and E optimizations and compression after optimization follow the paper;
// the slot layout, the flush conditions, the word formats and the stall
// policy are this design's choices.
//
// Interface: in_* valid/ready stream of dfi_pkt_t; out_* valid/ready stream
// of 32-bit words (out_word is registered). ev_* are one-cycle event pulses
// for statistics: ev_flush at the start of a block, ev_pruned (number pruned)
// in the PRUNE cycle, ev_swap for every sort phase that swapped, ev_pair /
// ev_one / ev_basic / ev_lib when such an item is written.
module dfi_tx_buffer
  import dfi_pkg::*;
#(
  parameter int unsigned BUF_BYTES   = 2048,
  parameter bit          EN_OPT_C    = 1'b1,
  parameter bit          EN_OPT_E    = 1'b1,
  parameter bit          EN_COMPRESS = 1'b1,
  localparam int unsigned N  = BUF_BYTES / SLOT_BYTES,
  localparam int unsigned CW = $clog2(N + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  dfi_pkt_t      in_pkt,
  input  logic          flush_req,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [DW-1:0] out_word,
  output logic          busy,
  output logic          ev_flush,
  output logic [CW-1:0] ev_pruned,
  output logic          ev_swap,
  output logic          ev_pair,
  output logic          ev_one,
  output logic          ev_basic,
  output logic          ev_lib
);

  typedef enum logic [1:0] {B_FILL, B_PRUNE, B_SORT, B_EMIT} bstate_e;

  bstate_e       state;
  slot_t         slots [N];
  logic [N-1:0]  dead;
  logic [CW-1:0] count;

  // ---------------- fill ----------------
  logic [CW-1:0] need;
  logic          fits;
  assign need      = (in_pkt.kind == PKT_LIB) ? CW'(3) : CW'(1);
  assign fits      = (CW'(N) - count) >= need;
  assign in_ready  = (state == B_FILL) && fits;
  assign busy      = (state != B_FILL);

  logic start_block;
  assign start_block = (state == B_FILL) && (count != '0) &&
                       ((in_valid && !fits) || flush_req || (count == CW'(N)));

  // ---------------- optimization C ----------------
  logic [N-1:0] valid_v, redundant;
  always_comb
    for (int j = 0; j < N; j++) valid_v[j] = (CW'(j) < count);

  dfi_opt_c_pruner #(.N(N)) u_opt_c (
    .slots(slots), .valid(valid_v), .redundant(redundant)
  );

  // ---------------- optimization E ----------------
  slot_t        sorted [N];
  logic [N-1:0] sorted_dead;
  logic         phase_odd, phase_swapped;
  logic         idle_phase;       // previous phase swapped nothing
  logic [CW:0]  phase_cnt;

  dfi_opt_e_sorter #(.N(N)) u_opt_e (
    .slots_i(slots), .dead_i(dead), .odd(phase_odd),
    .slots_o(sorted), .dead_o(sorted_dead), .swapped(phase_swapped)
  );

  // ---------------- compression / emission ----------------
  logic [CW-1:0]       k;          // entry being emitted
  logic [2:0]          sub;        // word within a multi-word item
  logic [AW-1:0]       prev_addr;
  logic [IDW-1:0]      prev_id;
  logic                pend_valid;
  logic [CPKT_W-1:0]   pend_code;
  logic                comp_ok;
  logic [CPKT_W-1:0]   comp_code;
  slot_t               cur, nxt1, nxt2;

  always_comb begin
    cur  = slots[k[CW-1:0] < CW'(N) ? k : '0];
    nxt1 = slots[(k + 1) < CW'(N) ? k + 1 : '0];
    nxt2 = slots[(k + 2) < CW'(N) ? k + 2 : '0];
  end

  dfi_compressor u_comp (
    .prev_addr(prev_addr), .prev_id(prev_id),
    .cur_addr(slot_addr(cur)), .cur_id(slot_id(cur)), .cur_is_load(slot_is_load(cur)),
    .ok(comp_ok), .code(comp_code)
  );

  // library item words: 0 header, 1 load address, 2 store address,
  // 3 length low, 4 length high; returns the next word present after w (5 = end)
  function automatic logic [2:0] lib_next(logic [2:0] w, logic [63:0] hdr);
    logic [2:0] n;
    n = w + 3'd1;
    if (n == 3'd1 && !hdr[BIT_LLOAD]) n = 3'd2;
    if (n == 3'd2 && !hdr[BIT_LSTOR]) n = 3'd3;
    if (n == 3'd4 && !hdr[BIT_LEN64]) n = 3'd5;
    return n;
  endfunction

  logic out_free;
  assign out_free = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= B_FILL;
      count      <= '0;
      dead       <= '0;
      phase_odd  <= 1'b0;
      idle_phase <= 1'b0;
      phase_cnt  <= '0;
      k          <= '0;
      sub        <= '0;
      prev_addr  <= '0;
      prev_id    <= '0;
      pend_valid <= 1'b0;
      pend_code  <= '0;
      out_valid  <= 1'b0;
      out_word   <= '0;
      ev_flush   <= 1'b0;
      ev_pruned  <= '0;
      ev_swap    <= 1'b0;
      ev_pair    <= 1'b0;
      ev_one     <= 1'b0;
      ev_basic   <= 1'b0;
      ev_lib     <= 1'b0;
      for (int i = 0; i < N; i++) slots[i] <= '0;
    end else begin
      ev_flush  <= 1'b0;
      ev_pruned <= '0;
      ev_swap   <= 1'b0;
      ev_pair   <= 1'b0;
      ev_one    <= 1'b0;
      ev_basic  <= 1'b0;
      ev_lib    <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;

      unique case (state)
        B_FILL: begin
          if (in_valid && in_ready) begin
            if (in_pkt.kind == PKT_LIB) begin
              slots[count]     <= '{kind: SLOT_LIB_HDR,
                                    payload: {43'b0, in_pkt.l_store, in_pkt.l_load,
                                              in_pkt.l_len64, 1'b1, 1'b0, in_pkt.id}};
              slots[count + 1] <= '{kind: SLOT_LIB_ADR, payload: {in_pkt.st_addr, in_pkt.ld_addr}};
              slots[count + 2] <= '{kind: SLOT_LIB_LEN, payload: in_pkt.len};
              count            <= count + CW'(3);
            end else begin
              slots[count] <= '{kind: SLOT_BASIC,
                                payload: basic_payload(in_pkt.is_load, in_pkt.id, in_pkt.addr)};
              count        <= count + CW'(1);
            end
          end else if (start_block) begin
            state    <= B_PRUNE;
            ev_flush <= 1'b1;
          end
        end

        B_PRUNE: begin
          logic [CW-1:0] np;
          np = '0;
          for (int j = 0; j < N; j++) begin
            dead[j] <= !valid_v[j] || (EN_OPT_C && redundant[j]);
            if (EN_OPT_C && valid_v[j] && redundant[j]) np = np + CW'(1);
          end
          ev_pruned  <= np;
          phase_odd  <= 1'b0;
          idle_phase <= 1'b0;
          phase_cnt  <= '0;
          state      <= EN_OPT_E ? B_SORT : B_EMIT;
          k          <= '0;
          sub        <= '0;
        end

        B_SORT: begin
          slots      <= sorted;
          dead       <= sorted_dead;
          phase_odd  <= !phase_odd;
          phase_cnt  <= phase_cnt + 1'b1;
          idle_phase <= !phase_swapped;
          ev_swap    <= phase_swapped;
          if ((idle_phase && !phase_swapped) || (phase_cnt >= (CW+1)'(N))) state <= B_EMIT;
        end

        B_EMIT: begin
          if (out_free) begin
            if (k >= count) begin
              // end of block: write a lone pending code, then accept packets again
              if (pend_valid) begin
                out_valid  <= 1'b1;
                out_word   <= {TAG_ONE, 15'b0, pend_code};
                pend_valid <= 1'b0;
                ev_one     <= 1'b1;
              end else begin
                state <= B_FILL;
                count <= '0;
              end
            end else if (dead[k]) begin
              k <= k + 1'b1;
            end else if (cur.kind == SLOT_BASIC) begin
              if (EN_COMPRESS && comp_ok && sub == 3'd0) begin
                prev_addr <= slot_addr(cur);
                prev_id   <= slot_id(cur);
                k         <= k + 1'b1;
                if (pend_valid) begin
                  out_valid  <= 1'b1;
                  out_word   <= {TAG_PAIR, comp_code, pend_code};
                  pend_valid <= 1'b0;
                  ev_pair    <= 1'b1;
                end else begin
                  pend_valid <= 1'b1;
                  pend_code  <= comp_code;
                end
              end else if (pend_valid) begin
                out_valid  <= 1'b1;
                out_word   <= {TAG_ONE, 15'b0, pend_code};
                pend_valid <= 1'b0;
                ev_one     <= 1'b1;
              end else if (sub == 3'd0) begin
                out_valid <= 1'b1;
                out_word  <= {TAG_BASIC, 13'b0, slot_is_load(cur), slot_id(cur)};
                sub       <= 3'd1;
              end else begin
                out_valid <= 1'b1;
                out_word  <= slot_addr(cur);
                prev_addr <= slot_addr(cur);
                prev_id   <= slot_id(cur);
                sub       <= 3'd0;
                k         <= k + 1'b1;
                ev_basic  <= 1'b1;
              end
            end else if (pend_valid) begin
              out_valid  <= 1'b1;
              out_word   <= {TAG_ONE, 15'b0, pend_code};
              pend_valid <= 1'b0;
              ev_one     <= 1'b1;
            end else begin
              // library packet: cur = header, nxt1 = addresses, nxt2 = length
              out_valid <= 1'b1;
              unique case (sub)
                3'd0:    out_word <= {TAG_LIB, 9'b0, cur.payload[20:0]};
                3'd1:    out_word <= nxt1.payload[31:0];
                3'd2:    out_word <= nxt1.payload[63:32];
                3'd3:    out_word <= nxt2.payload[31:0];
                default: out_word <= nxt2.payload[63:32];
              endcase
              if (lib_next(sub, cur.payload) == 3'd5) begin
                sub    <= 3'd0;
                k      <= k + CW'(3);
                ev_lib <= 1'b1;
              end else begin
                sub <= lib_next(sub, cur.payload);
              end
            end
          end
        end

        default: state <= B_FILL;
      endcase
    end
  end

  // Handshake rules of the output stream.
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_word));
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    count <= CW'(N));

endmodule
