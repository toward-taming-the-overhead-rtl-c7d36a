// dfi_opt_e_sorter -- one step of runtime optimization E (sorting by target
// address).
//
// Optimization E reorders the basic packets of the transmission buffer by
// target address so that neighbouring packets have small address differences
// and compress well. Packets with equal addresses keep their relative order,
// and the basic packets before and after a library packet are sorted
// separately (a library packet never moves and nothing moves across it).
// Checks of different addresses are independent, so the checker's verdicts do
// not change.
//
// The paper gives the function but no circuit. This design uses odd-even
// transposition sorting: one call of this block is one phase, comparing the
// disjoint neighbour pairs (k, k+1) with k even (odd = 0) or k odd (odd = 1)
// and swapping a pair when both are basic packets and the first has the larger
// key. The key is {dead, address}: entries already pruned (dead) are pushed
// to the end of their segment, where the emitter skips them. Swapping only on
// a strictly larger key keeps the sort stable. N phases always sort N
// entries; the caller may stop earlier, after two phases in a row without a
// swap. Purely combinational; N/2 comparators.
module dfi_opt_e_sorter
  import dfi_pkg::*;
#(
  parameter int unsigned N = 256
) (
  input  slot_t        slots_i [N],
  input  logic [N-1:0] dead_i,
  input  logic         odd,
  output slot_t        slots_o [N],
  output logic [N-1:0] dead_o,
  output logic         swapped
);

  function automatic logic [AW:0] key(slot_t s, logic dead);
    return {dead, slot_addr(s)};
  endfunction

  always_comb begin
    slots_o = slots_i;
    dead_o  = dead_i;
    swapped = 1'b0;
    for (int k = 0; k + 1 < N; k++) begin
      if ((k % 2) == int'(odd)) begin
        if (slots_i[k].kind == SLOT_BASIC && slots_i[k+1].kind == SLOT_BASIC &&
            key(slots_i[k], dead_i[k]) > key(slots_i[k+1], dead_i[k+1])) begin
          slots_o[k]   = slots_i[k+1];
          slots_o[k+1] = slots_i[k];
          dead_o[k]    = dead_i[k+1];
          dead_o[k+1]  = dead_i[k];
          swapped      = 1'b1;
        end
      end
    end
  end

endmodule
