// dfi_opt_c_pe -- one processing element of the optimization-C array.
//
// Compares an earlier packet Pa (the column's packet) with a later packet Pb.
// R is asserted when Pa and Pb are both loads with the same target address
// and the same identifier and the disable input Din is low: Pb is then a
// redundant load check and may be pruned. Dout disables the PEs further down
// the column when
//   (1) Pb is a store to Pa's target address (the pair would no longer be
//       adjacent loads of the same value), or Pb is a library-packet slot,
//       whose address range is not compared (this design's conservative
//       choice);
//   (2) this PE has just asserted R (only the nearest redundant packet is
//       marked per column); or
//   Din is already high.
// The R/Din/Dout behaviour follows the paper's description of the PE; the
// library-packet rule and the valid inputs are this design's additions.
// Purely combinational.
module dfi_opt_c_pe
  import dfi_pkg::*;
(
  input  slot_t pa,
  input  logic  pa_valid,
  input  slot_t pb,
  input  logic  pb_valid,
  input  logic  din,
  output logic  r,
  output logic  dout
);
  logic both_basic, same_addr, same_id, store_hit;

  always_comb begin
    both_basic = pa_valid && pb_valid && (pa.kind == SLOT_BASIC) && (pb.kind == SLOT_BASIC);
    same_addr  = slot_addr(pa) == slot_addr(pb);
    same_id    = slot_id(pa) == slot_id(pb);
    r          = !din && both_basic && slot_is_load(pa) && slot_is_load(pb) && same_addr && same_id;
    store_hit  = both_basic && slot_is_load(pa) && !slot_is_load(pb) && same_addr;
    dout       = din || r || store_hit || (pb_valid && pb.kind != SLOT_BASIC);
  end
endmodule
