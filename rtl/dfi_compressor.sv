// dfi_compressor -- lossless compression of one basic DFI packet against the
// packet sent before it.
//
// The target address is coded as its difference from the previous packet's
// address, in an 8-bit floating-point form with a base-16 exponent:
//   value = (-1)^sign * mant * 16^exp,  mant in 0..15, exp in 0..7,
// which covers -15*2^28 .. 15*2^28. A difference is compressible only if it is
// exactly such a value; the smallest exponent is used. The identifier is
// coded as its plain binary difference from the previous identifier. With the
// type bit this gives a 15-bit compressed packet, so two fit in one 32-bit
// word. The base-16 float, its 1/4/3-bit split and the 15-bit total follow the
// paper. The 6-bit two's-complement identifier difference (what is left of
// the 15 bits) and the bit order {is_load, id_delta, sign, exp, mant} are this
// design's choices.
//
// Purely combinational: ok is high when both differences fit; code is then
// the compressed packet. A decoder rebuilds addr = prev_addr + value and
// id = prev_id + sign_extend(id_delta).
module dfi_compressor
  import dfi_pkg::*;
(
  input  logic [AW-1:0]     prev_addr,
  input  logic [IDW-1:0]    prev_id,
  input  logic [AW-1:0]     cur_addr,
  input  logic [IDW-1:0]    cur_id,
  input  logic              cur_is_load,
  output logic              ok,
  output logic [CPKT_W-1:0] code
);

  logic [AW-1:0]  diff;
  logic           sign;
  logic [AW-1:0]  mag;
  logic           addr_ok;
  logic [2:0]     exp_sel;
  logic [3:0]     mant_sel;
  logic [IDW-1:0] id_diff;
  logic           id_ok;

  always_comb begin
    diff = cur_addr - prev_addr;
    sign = diff[AW-1];
    mag  = sign ? (~diff + 1'b1) : diff;   // |diff|; 2^31 stays 2^31 (too large anyway)
    addr_ok  = 1'b0;
    exp_sel  = '0;
    mant_sel = '0;
    // search from the largest exponent down so the smallest valid one wins
    for (int e = 7; e >= 0; e--) begin
      logic [AW-1:0] low_mask;
      logic [AW-1:0] shifted;
      low_mask = (AW'(1) << (4 * e)) - 1'b1;
      shifted  = mag >> (4 * e);
      if (((mag & low_mask) == '0) && (shifted <= AW'(15))) begin
        addr_ok  = 1'b1;
        exp_sel  = 3'(e);
        mant_sel = shifted[3:0];
      end
    end
    if (mag == '0) sign = 1'b0;

    id_diff = cur_id - prev_id;
    // fits in 6-bit two's complement when bits 15:5 are all equal
    id_ok = (id_diff[IDW-1:IDD_W-1] == '0) || (id_diff[IDW-1:IDD_W-1] == '1);

    ok   = addr_ok && id_ok;
    code = {cur_is_load, id_diff[IDD_W-1:0], sign, exp_sel, mant_sel};
  end

endmodule
