// tb_dfi_compressor -- self-checking test of the packet compressor.
//
// Directed cases from the address-locality examples (stride 4 and stride
// 0x400, the latter coded as significand 4, exponent 2) and the range limits,
// then random cases. The expected "fits" verdict is computed by brute force
// over all 8-bit floats and 6-bit identifier differences; when the packet
// fits, the code is decoded with the reference decoder and must give back the
// current address and identifier with the smallest exponent.
module tb_dfi_compressor;
  import dfi_pkg::*;
  import dfi_ref_pkg::*;

  logic [31:0] prev_addr, cur_addr;
  logic [15:0] prev_id, cur_id;
  logic        cur_is_load, ok;
  logic [14:0] code;
  int checks = 0, failures = 0;

  dfi_compressor dut (.prev_addr, .prev_id, .cur_addr, .cur_id, .cur_is_load, .ok, .code);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // brute-force reference
  function automatic void ref_fit(input bit [31:0] pa, input bit [31:0] ca,
                                  input bit [15:0] pi, input bit [15:0] ci,
                                  output bit fits, output int min_e);
    bit a_ok;
    bit [15:0] d;
    a_ok = 0; min_e = -1;
    for (int f = 0; f < 256; f++) begin
      if (32'(pa + 32'(fp8_value(8'(f)))) == ca) begin
        if (!a_ok || (f[6:4] < min_e)) min_e = f[6:4];
        a_ok = 1;
      end
    end
    d = ci - pi;
    fits = a_ok && ($signed(d) >= -32) && ($signed(d) <= 31);
  endfunction

  task automatic check_case(bit [31:0] pa, bit [31:0] ca, bit [15:0] pi, bit [15:0] ci, bit ld);
    bit fits;
    int min_e;
    prev_addr = pa; cur_addr = ca; prev_id = pi; cur_id = ci; cur_is_load = ld;
    #1;
    ref_fit(pa, ca, pi, ci, fits, min_e);
    checks++;
    if (ok !== fits) begin
      failures++;
      $display("FAIL ok=%0d expected %0d: %h->%h id %h->%h", ok, fits, pa, ca, pi, ci);
    end else if (fits) begin
      checks++;
      if (32'(pa + 32'(fp8_value(code[7:0]))) != ca || 16'(pi + {{10{code[13]}}, code[13:8]}) != ci ||
          code[14] != ld || int'(code[6:4]) != min_e) begin
        failures++;
        $display("FAIL code %h for %h->%h id %h->%h", code, pa, ca, pi, ci);
      end
    end
  endtask

  initial begin
    // Example A: stride 4 -> significand 4, exponent 0
    check_case(32'h8000, 32'h8004, 16'd12, 16'd12, 1'b0);
    checks++; if (code[7:0] != 8'h04) begin failures++; $display("FAIL stride 4 code %h", code); end
    // Example B: stride 0x400 -> sign 0, significand 4, exponent 2
    check_case(32'h8000, 32'h8400, 16'd12, 16'd12, 1'b0);
    checks++; if (code[7:0] != 8'h24) begin failures++; $display("FAIL stride 0x400 code %h", code); end
    // negative stride
    check_case(32'h8400, 32'h8000, 16'd5, 16'd3, 1'b1);
    checks++; if (code[7:0] != 8'hA4) begin failures++; $display("FAIL -0x400 code %h", code); end
    // limits: 15*2^28 fits, 16*2^28 and 17 do not; id delta 31/-32 fit, 32 does not
    check_case(32'h0, 32'hF000_0000, 16'd0, 16'd0, 1'b0);
    check_case(32'hF000_0000, 32'h0, 16'd0, 16'd0, 1'b0);
    check_case(32'h0, 32'h11, 16'd0, 16'd0, 1'b0);
    check_case(32'h100, 32'h100, 16'd40, 16'd71, 1'b0);
    check_case(32'h100, 32'h100, 16'd40, 16'd8, 1'b0);
    check_case(32'h100, 32'h100, 16'd40, 16'd72, 1'b0);
    for (int n = 0; n < 400; n++) begin
      bit [31:0] pa, ca;
      bit [15:0] pi, ci;
      int sel;
      pa = $urandom; pi = 16'($urandom);
      sel = $urandom_range(0, 3);
      case (sel)
        0: ca = $urandom;
        1: ca = pa + ((32'($urandom_range(0, 15))) << (4 * $urandom_range(0, 7)));
        2: ca = pa - ((32'($urandom_range(0, 15))) << (4 * $urandom_range(0, 7)));
        default: ca = pa + 32'($urandom_range(0, 40)) - 20;
      endcase
      ci = ($urandom_range(0, 3) == 0) ? 16'($urandom) : 16'(pi + 16'($urandom_range(0, 70)) - 35);
      check_case(pa, ca, pi, ci, 1'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
