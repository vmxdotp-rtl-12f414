// mx_ref_pkg: golden model of one MX dot-product-accumulate operation for the
// testbenches. It works differently from the hardware on purpose: every
// product, the scales and the accumulator are placed exactly on one 640-bit
// fixed-point grid (bit i has weight 2^(i-320)), summed there without any
// loss, and the exact sum is rounded to FP32 or BF16 (nearest-even, with
// subnormals and overflow to infinity) by a bit-serial search.
package mx_ref_pkg;

  localparam int GW  = 640;
  localparam int OFS = 320;

  // Value of one element as (sign, integer significand, exponent); returns
  // 1 in `special` for NaN (2) or infinity (1).
  function automatic void elem_val(input int fmt, input logic [7:0] x,
                                   output logic s, output int sig, output int ex,
                                   output int special);
    int e, m, ebits, mbits, bias;
    case (fmt)
      0: begin ebits = 5; mbits = 2; bias = 15; end
      1: begin ebits = 4; mbits = 3; bias = 7; end
      default: begin ebits = 2; mbits = 1; bias = 1; end
    endcase
    s = x[ebits + mbits];
    e = int'(x >> mbits) & ((1 << ebits) - 1);
    m = int'(x) & ((1 << mbits) - 1);
    special = 0;
    if (fmt == 0 && e == 31) special = (m == 0) ? 1 : 2;
    if (fmt == 1 && e == 15 && m == 7) special = 2;
    if (e == 0) begin
      sig = m;
      ex  = 1 - bias - mbits;
    end else begin
      sig = m + (1 << mbits);
      ex  = e - bias - mbits;
    end
  endfunction

  function automatic logic [GW-1:0] place(int unsigned mag, int ex);
    logic [GW-1:0] v;
    v = GW'(mag);
    return v << (ex + OFS);
  endfunction

  // fmt: 0 E5M2, 1 E4M3, 2 E2M1; bf16: accumulate in BF16 (acc in c[15:0]).
  function automatic logic [31:0] mxdpa(int fmt, bit bf16, logic [63:0] a,
                                        logic [63:0] b, logic [7:0] sa,
                                        logic [7:0] sb, logic [31:0] acc_in);
    logic signed [GW-1:0] tot;
    logic [GW-1:0] mag;
    logic [31:0] acc, nan_v;
    logic sa_, sb_, rs;
    int siga, sigb, exa, exb, spa, spb, n, w, ae, p, top, e, lsb, i;
    bit any_nan, pinf, ninf;
    logic [GW-1:0] q;
    logic rbit, sticky;
    int unsigned qi;
    logic [31:0] r;

    nan_v = bf16 ? 32'h0000_7fc0 : 32'h7fc0_0000;
    acc   = bf16 ? {acc_in[15:0], 16'h0} : acc_in;
    n = (fmt == 2) ? 16 : 8;
    w = (fmt == 2) ? 4 : 8;
    any_nan = (sa == 8'hff) || (sb == 8'hff);
    pinf = 0; ninf = 0;
    tot = '0;
    for (int j = 0; j < n; j++) begin
      elem_val(fmt, 8'((a >> (w*j)) & ((64'd1 << w) - 1)), sa_, siga, exa, spa);
      elem_val(fmt, 8'((b >> (w*j)) & ((64'd1 << w) - 1)), sb_, sigb, exb, spb);
      if (spa == 2 || spb == 2) any_nan = 1;
      if ((spa == 1 && sigb == 0) || (spb == 1 && siga == 0)) any_nan = 1;
      if (spa == 1 || spb == 1) begin
        if (sa_ ^ sb_) ninf = 1; else pinf = 1;
      end else begin
        if (sa_ ^ sb_) tot = tot - $signed(place(siga * sigb, exa + exb + int'(sa) + int'(sb) - 254));
        else           tot = tot + $signed(place(siga * sigb, exa + exb + int'(sa) + int'(sb) - 254));
      end
    end
    if (pinf && ninf) any_nan = 1;
    ae = int'(acc[30:23]);
    if (ae == 255 && acc[22:0] != 0) any_nan = 1;
    if (ae == 255 && acc[22:0] == 0) begin
      if ((pinf && acc[31]) || (ninf && !acc[31])) any_nan = 1;
    end
    if (any_nan) return nan_v;
    if (pinf || ninf) return bf16 ? {16'h0, ninf, 15'h7f80} : {ninf, 31'h7f80_0000};
    if (ae == 255) return bf16 ? {16'h0, acc[31:16]} : acc;
    if (tot == 0) return acc_in;    // nothing added: accumulator unchanged

    // add the accumulator exactly
    if (acc[30:0] != 0) begin
      if (ae == 0) q = place(acc[22:0], 1 - 150);
      else         q = place({1'b1, acc[22:0]}, ae - 150);
      if (acc[31]) tot = tot - $signed(q); else tot = tot + $signed(q);
    end
    if (tot == 0) return 32'h0;
    rs  = tot[GW-1];
    mag = rs ? -tot : tot;
    top = 0;
    for (i = 0; i < GW; i++) if (mag[i]) top = i;
    p = bf16 ? 8 : 24;
    e = top - OFS;                 // exponent of the leading bit
    if (e < -126) e = -126;
    lsb = e - (p - 1) + OFS;       // grid index of the result LSB
    q = mag >> lsb;
    rbit = (lsb > 0) ? mag[lsb-1] : 1'b0;
    sticky = 0;
    for (i = 0; i < lsb - 1; i++) if (mag[i]) sticky = 1;
    qi = int'(q[31:0]);
    if (rbit && (sticky || qi[0])) qi = qi + 1;
    if (qi >= (1 << p)) begin
      qi = qi >> 1;
      e = e + 1;
    end
    if (qi < (1 << (p - 1))) e = -127;        // subnormal
    if (e > 127) r = {rs, 8'hff, 23'h0};
    else         r = {rs, 8'(e + 127), 23'(qi << (24 - p))};
    return bf16 ? {16'h0, r[31:16]} : r;
  endfunction

endpackage
