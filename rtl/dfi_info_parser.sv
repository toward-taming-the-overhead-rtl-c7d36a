// dfi_info_parser -- front end of the info-collector (DFI store recognition
// and DFI packet generation).
//
// Every memory operation of the main processor passes through this block on
// its way to the memory controller. It follows the decision flow of the
// info-collector:
//   * Until both dfi_global and packet_mem_addr are known, a store whose data
//     equals the dfi_dummy (resp. packet_dummy) signature records its address
//     as dfi_global (resp. packet_mem_addr); each is recorded once. Such a
//     set-up store is consumed. Any other operation is relayed.
//   * Afterwards a store to dfi_global is a DFI store. Its data word is
//     decoded: bit 16 = type (1 = load), bits 15:0 = identifier, bit 17 =
//     library call, bit 18 = 64-bit length, bit 19 = library loads, bit 20 =
//     library stores, bit 21 = function-return protection.
//       - plain load/store verification: a basic packet {type, id, address of
//         the preceding ordinary load/store} is emitted at once;
//       - return-address protection: the next DFI store carries the pointer
//         to the return address, which completes a basic packet;
//       - library call: the following DFI stores carry the load address (if
//         bit 19), the store address (if bit 20), the length low word and, if
//         bit 18, the length high word; then one library packet is emitted.
//     DFI stores are consumed, not relayed.
//   * Any other load or store is relayed unchanged and its address is kept
//     as the target address for the next basic packet. A load or store that
//     falls into the packet FIFO region [packet_mem_addr, +FIFO_BYTES) raises
//     fifo_violation; such a store is dropped.
// Bits 16..20, the dfi_dummy value 123456 and the one-time capture follow the
// paper. The return indicator bit, the packet_dummy value, the FIFO size,
// dropping of violating stores and the handshakes are this design's choices.
//
// Interface: cpu_* is a valid/ready request stream from the core; relay_* is
// a valid/ready stream to the memory controller; pkt_* is a valid/ready
// stream of dfi_pkt_t to the transmission buffer. Both outputs are
// registered; an operation is accepted when both output registers can take a
// new value, so the parser adds one cycle of latency and, with both outputs
// ready, takes one operation per cycle.
module dfi_info_parser
  import dfi_pkg::*;
#(
  parameter logic [DW-1:0] DFI_DUMMY    = DFI_DUMMY_DEFAULT,
  parameter logic [DW-1:0] PACKET_DUMMY = PACKET_DUMMY_DEFAULT,
  parameter int unsigned   FIFO_BYTES   = 65536
) (
  input  logic           clk,
  input  logic           rst_n,
  // from the core
  input  logic           cpu_valid,
  output logic           cpu_ready,
  input  mem_op_t        cpu_op,
  // to the memory controller
  output logic           relay_valid,
  input  logic           relay_ready,
  output mem_op_t        relay_op,
  // to the transmission buffer
  output logic           pkt_valid,
  input  logic           pkt_ready,
  output dfi_pkt_t       pkt,
  // captured set-up addresses
  output logic           dfi_global_def,
  output logic [AW-1:0]  dfi_global,
  output logic           packet_mem_def,
  output logic [AW-1:0]  packet_mem_addr,
  // one-cycle pulse: an ordinary access hit the packet FIFO region
  output logic           fifo_violation
);

  typedef enum logic [2:0] {
    S_IDLE, S_RET, S_LIB_LD, S_LIB_ST, S_LEN_LO, S_LEN_HI
  } state_e;

  state_e         state;
  logic [AW-1:0]  last_addr;
  dfi_pkt_t       hold;      // packet being assembled

  logic accept;
  assign cpu_ready = (!relay_valid || relay_ready) && (!pkt_valid || pkt_ready);
  assign accept    = cpu_valid && cpu_ready;

  logic setup_done, is_dfi_store, in_fifo;
  assign setup_done   = dfi_global_def && packet_mem_def;
  assign is_dfi_store = setup_done && cpu_op.we && (cpu_op.addr == dfi_global);
  assign in_fifo      = packet_mem_def &&
                        (cpu_op.addr >= packet_mem_addr) &&
                        ((cpu_op.addr - packet_mem_addr) < AW'(FIFO_BYTES));

  // next state after the library header or an address word
  function automatic state_e lib_next_after_hdr(logic ld, logic st);
    if (ld)      return S_LIB_LD;
    else if (st) return S_LIB_ST;
    else         return S_LEN_LO;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state           <= S_IDLE;
      last_addr       <= '0;
      hold            <= '0;
      relay_valid     <= 1'b0;
      relay_op        <= '0;
      pkt_valid       <= 1'b0;
      pkt             <= '0;
      dfi_global_def  <= 1'b0;
      dfi_global      <= '0;
      packet_mem_def  <= 1'b0;
      packet_mem_addr <= '0;
      fifo_violation  <= 1'b0;
    end else begin
      if (relay_valid && relay_ready) relay_valid <= 1'b0;
      if (pkt_valid && pkt_ready)     pkt_valid   <= 1'b0;
      fifo_violation <= 1'b0;

      if (accept) begin
        if (cpu_op.we && !setup_done &&
            ((cpu_op.data == DFI_DUMMY && !dfi_global_def) ||
             (cpu_op.data == PACKET_DUMMY && !packet_mem_def))) begin
          // step F: record dfi_global or packet_mem_addr
          if (cpu_op.data == DFI_DUMMY && !dfi_global_def) begin
            dfi_global_def <= 1'b1;
            dfi_global     <= cpu_op.addr;
          end else begin
            packet_mem_def  <= 1'b1;
            packet_mem_addr <= cpu_op.addr;
          end
        end else if (is_dfi_store) begin
          // step D: interpret the DFI store
          unique case (state)
            S_IDLE: begin
              hold         <= '0;
              hold.id      <= cpu_op.data[IDW-1:0];
              hold.is_load <= cpu_op.data[BIT_TYPE];
              if (cpu_op.data[BIT_LIB]) begin
                hold.kind    <= PKT_LIB;
                hold.l_load  <= cpu_op.data[BIT_LLOAD];
                hold.l_store <= cpu_op.data[BIT_LSTOR];
                hold.l_len64 <= cpu_op.data[BIT_LEN64];
                state <= lib_next_after_hdr(cpu_op.data[BIT_LLOAD], cpu_op.data[BIT_LSTOR]);
              end else if (cpu_op.data[BIT_RET]) begin
                hold.kind <= PKT_BASIC;
                state     <= S_RET;
              end else begin
                // step I: regular store/load verification
                pkt_valid   <= 1'b1;
                pkt         <= '0;
                pkt.kind    <= PKT_BASIC;
                pkt.is_load <= cpu_op.data[BIT_TYPE];
                pkt.id      <= cpu_op.data[IDW-1:0];
                pkt.addr    <= last_addr;
              end
            end
            S_RET: begin
              // step H: pointer to the return address
              pkt_valid <= 1'b1;
              pkt       <= hold;
              pkt.addr  <= cpu_op.data;
              state     <= S_IDLE;
            end
            S_LIB_LD: begin
              hold.ld_addr <= cpu_op.data;
              state        <= hold.l_store ? S_LIB_ST : S_LEN_LO;
            end
            S_LIB_ST: begin
              hold.st_addr <= cpu_op.data;
              state        <= S_LEN_LO;
            end
            S_LEN_LO: begin
              if (hold.l_len64) begin
                hold.len[31:0] <= cpu_op.data;
                state          <= S_LEN_HI;
              end else begin
                // step G: library packet complete
                pkt_valid <= 1'b1;
                pkt       <= hold;
                pkt.len   <= {32'b0, cpu_op.data};
                state     <= S_IDLE;
              end
            end
            S_LEN_HI: begin
              pkt_valid <= 1'b1;
              pkt       <= hold;
              pkt.len   <= {cpu_op.data, hold.len[31:0]};
              state     <= S_IDLE;
            end
            default: state <= S_IDLE;
          endcase
        end else begin
          // step J: data relay; remember the target address
          last_addr <= cpu_op.addr;
          if (in_fifo) fifo_violation <= 1'b1;
          if (!(in_fifo && cpu_op.we)) begin
            relay_valid <= 1'b1;
            relay_op    <= cpu_op;
          end
        end
      end
    end
  end

  // Output streams must hold their value while stalled.
  a_pkt_stable: assert property (@(posedge clk) disable iff (!rst_n)
    pkt_valid && !pkt_ready |=> pkt_valid && $stable(pkt));
  a_relay_stable: assert property (@(posedge clk) disable iff (!rst_n)
    relay_valid && !relay_ready |=> relay_valid && $stable(relay_op));

endmodule
