// dfi_opt_c_pruner -- runtime optimization C over the transmission buffer.
//
// Optimization C: when two load packets have the same target address and the
// same identifier, and no store to that address lies between them, the later
// one checks nothing new and is pruned. The circuit is the triangular array
// of processing elements (dfi_opt_c_pe) described for it: column i holds
// packet Pi and compares it with every later packet Pj, j > i, from the
// nearest one downwards; the disable signal runs down the column so that only
// the nearest redundant packet of a column is marked, and a store to the same
// address stops the column. The R outputs of a row are ORed, so packet Pj is
// redundant if any earlier column marks it.
//
// Interface: slots/valid give the N buffer entries in program order (entry 0
// oldest); redundant[j] is high when entry j may be dropped. Purely
// combinational; N*(N-1)/2 PEs. N = 256 is the 2 KB buffer of 8-byte slots.
// Column i is a chain of N-1-i PEs; PE k of it compares Pi with P(i+1+k),
// and its Dout feeds the Din of PE k+1.
module dfi_opt_c_pruner
  import dfi_pkg::*;
#(
  parameter int unsigned N = 256
) (
  input  slot_t        slots     [N],
  input  logic [N-1:0] valid,
  output logic [N-1:0] redundant
);
  // column i: one PE per later packet j = i+1 .. N-1 (row k = j-i-1)
  for (genvar i = 0; i < N - 1; i++) begin : g_col
    localparam int unsigned M = N - 1 - i;
    logic [M-1:0] r_c;
    logic [M:0]   d_c;
    assign d_c[0] = 1'b0;
    for (genvar k = 0; k < M; k++) begin : g_pe
      dfi_opt_c_pe u_pe (
        .pa(slots[i]), .pa_valid(valid[i]),
        .pb(slots[i+1+k]), .pb_valid(valid[i+1+k]),
        .din(d_c[k]), .r(r_c[k]), .dout(d_c[k+1])
      );
    end
  end
  // row OR
  logic [N-1:0] col_r [N];
  for (genvar i = 0; i < N - 1; i++) begin : g_colv
    assign col_r[i] = {g_col[i].r_c, {(i+1){1'b0}}};
  end
  assign col_r[N-1] = '0;
  always_comb begin
    redundant = '0;
    for (int i = 0; i < N; i++) redundant |= col_r[i];
  end
endmodule
