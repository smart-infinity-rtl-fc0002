// fp32_pkg -- IEEE-754 single-precision arithmetic used by the optimizer datapath.
//
// The updater works on FP32 master parameters and optimizer states (mixed-precision
// training keeps these in FP32). The functions below are combinational and
// synthesizable: multiply, add, divide and square root, each correctly rounded to
// nearest-even for normal operands and results. Subnormal inputs are read as zero and
// results that would be subnormal are flushed to signed zero (a common FPGA
// simplification; the paper does not discuss number formats beyond "FP32").
// Infinities and NaNs propagate; invalid operations return the canonical quiet NaN.
// The rounding helper takes a 27-bit mantissa with the leading one at bit 26,
// guard at bit 2, round at bit 1 and sticky at bit 0.
package fp32_pkg;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP_QNAN = 32'h7fc0_0000;
  localparam fp32_t FP_ONE  = 32'h3f80_0000;
  localparam fp32_t FP_ZERO = 32'h0000_0000;

  function automatic logic fp_is_nan(fp32_t a);
    return (a[30:23] == 8'hff) && (a[22:0] != '0);
  endfunction

  function automatic logic fp_is_inf(fp32_t a);
    return (a[30:23] == 8'hff) && (a[22:0] == '0);
  endfunction

  function automatic logic fp_is_zero(fp32_t a);
    return a[30:23] == 8'h00;  // subnormals count as zero
  endfunction

  // Round to nearest-even and pack. exp is the biased exponent of mant[26].
  function automatic fp32_t fp_round_pack(logic sign, int exp, logic [26:0] mant);
    logic        up;
    logic [24:0] m;
    int          e;
    up = mant[2] & (mant[1] | mant[0] | mant[3]);
    m  = {1'b0, mant[26:3]} + 25'(up);
    e  = exp;
    if (m[24]) begin
      m = m >> 1;
      e = e + 1;
    end
    if (e >= 255) return {sign, 8'hff, 23'd0};
    if (e <= 0)   return {sign, 31'd0};
    return {sign, e[7:0], m[22:0]};
  endfunction

  function automatic fp32_t fp_mul(fp32_t a, fp32_t b);
    logic        s;
    logic [47:0] p;
    logic [26:0] mant;
    int          e;
    s = a[31] ^ b[31];
    if (fp_is_nan(a) || fp_is_nan(b)) return FP_QNAN;
    if (fp_is_inf(a) || fp_is_inf(b)) begin
      if (fp_is_zero(a) || fp_is_zero(b)) return FP_QNAN;
      return {s, 8'hff, 23'd0};
    end
    if (fp_is_zero(a) || fp_is_zero(b)) return {s, 31'd0};
    p = {24'd0, 1'b1, a[22:0]} * {24'd0, 1'b1, b[22:0]};
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47]) begin
      mant = {p[47:22], |p[21:0]};
      e    = e + 1;
    end else begin
      mant = {p[46:21], |p[20:0]};
    end
    return fp_round_pack(s, e, mant);
  endfunction

  function automatic fp32_t fp_add(fp32_t a, fp32_t b);
    fp32_t       x, y;
    logic [49:0] mx, my, shifted;
    logic [50:0] sum;
    logic [26:0] mant;
    logic        sticky;
    int          d, lead, e;
    if (fp_is_nan(a) || fp_is_nan(b)) return FP_QNAN;
    if (fp_is_inf(a) && fp_is_inf(b)) return (a[31] == b[31]) ? a : FP_QNAN;
    if (fp_is_inf(a)) return a;
    if (fp_is_inf(b)) return b;
    if (fp_is_zero(a) && fp_is_zero(b)) return {a[31] & b[31], 31'd0};
    if (fp_is_zero(a)) return b;
    if (fp_is_zero(b)) return a;
    // order by magnitude so that x >= y
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    d  = int'(x[30:23]) - int'(y[30:23]);
    mx = {1'b1, x[22:0], 26'd0};
    my = {1'b1, y[22:0], 26'd0};
    if (d >= 50) begin
      shifted = 50'd1;              // whole operand collapses into the sticky bit
    end else begin
      shifted = my >> d;
      sticky  = (my & ((50'd1 << d) - 50'd1)) != '0;
      shifted[0] = shifted[0] | sticky;
    end
    if (x[31] == y[31]) sum = {1'b0, mx} + {1'b0, shifted};
    else                sum = {1'b0, mx} - {1'b0, shifted};
    if (sum == '0) return FP_ZERO;
    lead = 0;
    for (int i = 0; i < 51; i++) if (sum[i]) lead = i;
    e = int'(x[30:23]) + lead - 49;
    if (lead >= 26) begin
      mant   = 27'(sum >> (lead - 26));
      sticky = (sum & ((51'd1 << (lead - 26)) - 51'd1)) != '0;
      mant[0] = mant[0] | sticky;
    end else begin
      mant = 27'(sum << (26 - lead));
    end
    return fp_round_pack(x[31], e, mant);
  endfunction

  function automatic fp32_t fp_sub(fp32_t a, fp32_t b);
    return fp_add(a, {~b[31], b[30:0]});
  endfunction

  function automatic fp32_t fp_div(fp32_t a, fp32_t b);
    logic        s;
    logic [50:0] num, q, r;
    logic [26:0] mant;
    int          e;
    s = a[31] ^ b[31];
    if (fp_is_nan(a) || fp_is_nan(b)) return FP_QNAN;
    if (fp_is_inf(a)) return fp_is_inf(b) ? FP_QNAN : {s, 8'hff, 23'd0};
    if (fp_is_inf(b)) return {s, 31'd0};
    if (fp_is_zero(b)) return fp_is_zero(a) ? FP_QNAN : {s, 8'hff, 23'd0};
    if (fp_is_zero(a)) return {s, 31'd0};
    num = {1'b1, a[22:0], 27'd0};
    q   = num / {27'd0, 1'b1, b[22:0]};
    r   = num % {27'd0, 1'b1, b[22:0]};
    e   = int'(a[30:23]) - int'(b[30:23]) + 127;
    if (q[27]) begin
      mant = {q[27:2], q[1] | q[0] | (r != '0)};
    end else begin
      mant = {q[26:1], q[0] | (r != '0)};
      e    = e - 1;
    end
    return fp_round_pack(s, e, mant);
  endfunction

  function automatic fp32_t fp_sqrt(fp32_t a);
    logic [53:0] rad, rem, root, trial;
    logic [26:0] mant;
    int          ue;
    if (fp_is_nan(a)) return FP_QNAN;
    if (fp_is_zero(a)) return {a[31], 31'd0};
    if (a[31]) return FP_QNAN;
    if (fp_is_inf(a)) return a;
    ue = int'(a[30:23]) - 127;
    if (ue[0]) begin
      rad = {29'd0, 1'b1, a[22:0], 1'b0} << 29;
      ue  = ue - 1;
    end else begin
      rad = {30'd0, 1'b1, a[22:0]} << 29;
    end
    // bit-serial restoring integer square root, 27 result bits
    rem  = '0;
    root = '0;
    for (int i = 26; i >= 0; i--) begin
      rem   = (rem << 2) | 54'((rad >> (2 * i)) & 54'd3);
      trial = (root << 2) | 54'd1;
      root  = root << 1;
      if (rem >= trial) begin
        rem  = rem - trial;
        root = root | 54'd1;
      end
    end
    mant = {root[26:1], root[0] | (rem != '0)};
    return fp_round_pack(1'b0, (ue >>> 1) + 127, mant);
  endfunction

endpackage
