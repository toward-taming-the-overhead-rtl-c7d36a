// dfi_pkg -- types and constants shared by the DFI info-collector.
//
// The info-collector watches the memory operations of the main processor,
// recognises instrumentation stores ("DFI stores") and turns them into DFI
// packets for a checker that sits next to memory. This package holds:
//   * the memory-operation bundle seen on the processor side and on the
//     memory-controller side (mem_op_t),
//   * the bit positions of the indicators inside the data word of a DFI store
//     (bit 16 = type, bits 15:0 = identifier, bits 17..20 = library-call
//     indicators; these follow the paper's examples),
//   * the DFI packet produced by the parser (dfi_pkt_t),
//   * the transmission-buffer slot (slot_t) and the 32-bit word formats
//     written into the packet FIFO memory.
// Word formats, the return-address indicator bit and the signature value of
// the packet_mem_addr store are this design's own choices; see README.md.
package dfi_pkg;

  localparam int unsigned AW  = 32;  // address width of the main processor
  localparam int unsigned DW  = 32;  // data word width
  localparam int unsigned IDW = 16;  // instruction identifier width

  // Indicator bits in the data of a DFI store.
  localparam int unsigned BIT_TYPE  = 16; // 0 = store (write), 1 = load (read)
  localparam int unsigned BIT_LIB   = 17; // target is a library function call
  localparam int unsigned BIT_LEN64 = 18; // data length sent as two words
  localparam int unsigned BIT_LLOAD = 19; // library function loads data
  localparam int unsigned BIT_LSTOR = 20; // library function stores data
  localparam int unsigned BIT_RET   = 21; // function-return protection (own choice)

  // Signature values of the two set-up stores.
  localparam logic [DW-1:0] DFI_DUMMY_DEFAULT    = 32'd123456;
  localparam logic [DW-1:0] PACKET_DUMMY_DEFAULT = 32'd654321;

  // A memory operation as it travels from the core to the memory controller.
  typedef struct packed {
    logic          we;    // 1 = store, 0 = load
    logic [AW-1:0] addr;
    logic [DW-1:0] data;
  } mem_op_t;

  typedef enum logic [0:0] {PKT_BASIC = 1'b0, PKT_LIB = 1'b1} pkt_kind_e;

  // DFI packet as produced by the parser. Basic packets use is_load, id, addr;
  // library packets use id, the l* flags, ld_addr, st_addr and len.
  typedef struct packed {
    pkt_kind_e      kind;
    logic           is_load;
    logic [IDW-1:0] id;
    logic [AW-1:0]  addr;
    logic           l_load;
    logic           l_store;
    logic           l_len64;
    logic [AW-1:0]  ld_addr;
    logic [AW-1:0]  st_addr;
    logic [63:0]    len;
  } dfi_pkt_t;

  // Transmission-buffer slot: 64 payload bits (8 bytes) plus a kind tag. A
  // basic packet takes one slot, a library packet three.
  typedef enum logic [1:0] {
    SLOT_BASIC   = 2'd0,
    SLOT_LIB_HDR = 2'd1,  // payload = {.., lstore, lload, len64, 1, id}
    SLOT_LIB_ADR = 2'd2,  // payload = {st_addr, ld_addr}
    SLOT_LIB_LEN = 2'd3   // payload = len
  } slot_kind_e;

  typedef struct packed {
    slot_kind_e  kind;
    logic [63:0] payload;
  } slot_t;

  localparam int unsigned SLOT_BYTES = 8;

  // Basic slot payload helpers: {15'b0, is_load, id, addr}
  function automatic logic [63:0] basic_payload(logic is_load, logic [IDW-1:0] id,
                                                logic [AW-1:0] addr);
    return {15'b0, is_load, id, addr};
  endfunction
  function automatic logic [AW-1:0] slot_addr(slot_t s);
    return s.payload[AW-1:0];
  endfunction
  function automatic logic [IDW-1:0] slot_id(slot_t s);
    return s.payload[AW+IDW-1:AW];
  endfunction
  function automatic logic slot_is_load(slot_t s);
    return s.payload[AW+IDW];
  endfunction

  // Tags in bits 31:30 of the first word of every item in the packet FIFO.
  localparam logic [1:0] TAG_BASIC = 2'b00; // header word, then address word
  localparam logic [1:0] TAG_PAIR  = 2'b01; // two compressed packets, [14:0] first
  localparam logic [1:0] TAG_LIB   = 2'b10; // header word, then ld/st addr, len lo, len hi
  localparam logic [1:0] TAG_ONE   = 2'b11; // one compressed packet in [14:0]

  // Compressed packet: {is_load, id_delta[5:0], addr_fp8[7:0]} = 15 bits.
  // addr_fp8 = {sign, exp[2:0], mant[3:0]}, value = (-1)^sign * mant * 16^exp.
  localparam int unsigned CPKT_W  = 15;
  localparam int unsigned IDD_W   = 6;

endpackage
