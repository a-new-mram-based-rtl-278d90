// fp_ref_pkg: reference arithmetic for the accelerator testbenches.
//
// Integer models of the accelerator's number format and operations, written
// directly from their definitions (not from the RTL's step sequences):
// 32-bit values with 23 mantissa bits, 8 exponent bits (bias 127), exponent 0
// meaning zero, truncating rounding, exponent taken modulo 256.
// ref_add aligns the smaller operand by truncating right shift, adds or
// subtracts the mantissas, then normalises with at most 24 left shifts.
// Also: random operand generation with a bounded exponent range.
package fp_ref_pkg;

  function automatic logic [31:0] ref_mul(input logic [31:0] a, input logic [31:0] b);
    logic        sa = a[31], sb = b[31];
    int unsigned ea = a[30:23], eb = b[30:23];
    logic [47:0] p;
    logic [22:0] man;
    int          e;
    logic        ov;
    if (ea == 0 || eb == 0) return 32'h0;
    p   = 48'({1'b1, a[22:0]}) * 48'({1'b1, b[22:0]});
    ov  = p[47];
    man = ov ? p[46:24] : p[45:23];
    e   = int'(ea) + int'(eb) - 127 + (ov ? 1 : 0);
    return {sa ^ sb, 8'(e), man};
  endfunction

  function automatic logic [31:0] ref_add(input logic [31:0] a, input logic [31:0] b);
    int unsigned ea = a[30:23], eb = b[30:23];
    longint      ma, mb, bg, sml, s;
    int          d, e, ad;
    logic        sg;
    ma = longint'({(ea != 0), a[22:0]});
    mb = longint'({(eb != 0), b[22:0]});
    d  = int'(ea) - int'(eb);
    if (d < 0) begin bg = mb; sml = ma; e = int'(eb); sg = b[31]; ad = -d; end
    else       begin bg = ma; sml = mb; e = int'(ea); sg = a[31]; ad = d;  end
    if (ad > 24) sml = 0;
    else         sml = sml >> ad;
    s = (a[31] != b[31]) ? bg - sml : bg + sml;
    if (s < 0) begin s = -s; sg = ~sg; end
    if (s >= (64'd1 << 24)) begin s = s >> 1; e = e + 1; end
    for (int i = 0; i < 24; i++) begin
      if (s[23] == 1'b0) begin s = (s << 1) & 64'hFF_FFFF; e = e - 1; end
    end
    if (s[23] == 1'b0) begin e = 0; sg = 1'b0; end
    return {sg, 8'(e), s[22:0]};
  endfunction

  // Random normal value with exponent in [127-span, 127+span], or zero.
  function automatic logic [31:0] rand_fp(input int span, input int zero_pct = 5);
    logic [31:0] v;
    int          e;
    if (int'($urandom_range(99)) < zero_pct) return 32'h0;
    e = 127 - span + int'($urandom_range(2 * span));
    v = {1'($urandom), 8'(e), 23'($urandom)};
    return v;
  endfunction

endpackage
