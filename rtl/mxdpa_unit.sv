// mxdpa_unit: one MX dot-product-accumulate (MX-DPA) lane of an FPU.
//
// Computes   acc + 2^(sa-127) * 2^(sb-127) * sum_j a[j] * b[j]
// where a and b are FLEN = 64 bit words of packed elements (8 x FP8 E5M2 or
// E4M3, or 16 x FP4 E2M1; element j sits in bits [j*w +: w]), sa and sb are
// E8M0 block scales and acc is an FP32 or a BF16 accumulator (BF16 in
// op_c[15:0]). The formula, the formats and the block sizes 8 / 16 follow the
// paper; how the unit computes it is this design's own choice:
//   stage 1: every product a[j]*b[j] is exact (at most 8 significand bits);
//            the products are shifted onto a common fixed-point grid
//            (LSB = 2^-32) and summed exactly in a 72-bit signed integer.
//   stage 2: the sum, scaled by the two block exponents, is added to the
//            accumulator with a 101-bit alignment window plus a sticky bit
//            and rounded ONCE to FP32 or BF16, round-to-nearest-even, with
//            subnormal results and overflow to infinity.
// Special values (own choice where the OCP MX rules leave room): a NaN
// element, a NaN scale (0xFF) or a NaN accumulator, inf*0 and inf-inf give
// the canonical quiet NaN; an all-zero dot product returns acc unchanged.
//
// Interface: op_a / op_b elements, op_c = {16'b0, sb, sa, acc}; in_valid /
// in_tag are carried along. Timing: fully pipelined, one operation per cycle,
// result and out_valid / out_tag two cycles after in_valid (LATENCY = 2).
module mxdpa_unit
  import mx_pkg::*;
#(
  parameter int unsigned TAG_W = 8
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             in_valid_i,
  input  logic [TAG_W-1:0] in_tag_i,
  input  mx_fmt_e          mx_fmt_i,
  input  acc_fmt_e         acc_fmt_i,
  input  logic [63:0]      op_a_i,
  input  logic [63:0]      op_b_i,
  input  logic [63:0]      op_c_i,
  output logic             out_valid_o,
  output logic [TAG_W-1:0] out_tag_o,
  output logic [31:0]      result_o
);

  localparam int unsigned SUM_W = 72;   // 16 products of < 2^67 each, plus sign
  localparam int unsigned WIN   = 101;  // alignment window incl. sticky bit 0
  localparam int          GRID  = -32;  // exponent of the product-sum LSB

  // ---------------------------------------------------------------------
  // Element decoding: value = (-1)^s * sig * 2^exp, sig up to 4 bits.
  // ---------------------------------------------------------------------
  typedef struct packed {
    logic       s;
    logic [3:0] sig;
    logic signed [6:0] exp;
    logic       nan;
    logic       inf;
  } elem_t;

  function automatic elem_t decode(mx_fmt_e f, logic [7:0] x);
    elem_t r;
    logic [4:0] e;
    r = '0;
    unique case (f)
      FMT_E5M2: begin
        e     = x[6:2];
        r.s   = x[7];
        r.sig = {1'b0, (e != 0), x[1:0]};
        r.exp = 7'(((e == 0) ? 1 : int'(e)) - 17);
        r.nan = (e == 5'd31) && (x[1:0] != 0);
        r.inf = (e == 5'd31) && (x[1:0] == 0);
      end
      FMT_E4M3: begin
        e     = {1'b0, x[6:3]};
        r.s   = x[7];
        r.sig = {(e != 0), x[2:0]};
        r.exp = 7'(((e == 0) ? 1 : int'(e)) - 10);
        r.nan = (x[6:0] == 7'h7f);
      end
      default: begin  // FMT_E2M1, 4-bit element in x[3:0]
        e     = {3'b0, x[2:1]};
        r.s   = x[3];
        r.sig = {2'b0, (e != 0), x[0]};
        r.exp = 7'(((e == 0) ? 1 : int'(e)) - 2);
      end
    endcase
    return r;
  endfunction

  // ---------------------------------------------------------------------
  // Stage 1: exact sum of products
  // ---------------------------------------------------------------------
  logic signed [SUM_W-1:0] sum_d;
  logic                    pos_inf_d, neg_inf_d, nan_d;
  logic [9:0]              sc_d;      // sa + sb
  logic [31:0]             acc_d;     // accumulator widened to FP32

  always_comb begin
    elem_t ea, eb;
    logic [7:0] xa, xb;
    logic [7:0] psig;
    int         sh;
    logic [SUM_W-1:0] term;
    sum_d     = '0;
    pos_inf_d = 1'b0;
    neg_inf_d = 1'b0;
    nan_d     = 1'b0;
    for (int j = 0; j < 16; j++) begin
      // inactive FP8 positions (j >= 8) read as zero elements
      if (mx_fmt_i == FMT_E2M1) begin
        xa = {4'b0, op_a_i[4*j +: 4]};
        xb = {4'b0, op_b_i[4*j +: 4]};
      end else if (j < 8) begin
        xa = op_a_i[8*(j%8) +: 8];
        xb = op_b_i[8*(j%8) +: 8];
      end else begin
        xa = '0;
        xb = '0;
      end
      ea = decode(mx_fmt_i, xa);
      eb = decode(mx_fmt_i, xb);
      nan_d = nan_d | ea.nan | eb.nan
            | (ea.inf && eb.sig == 0) | (eb.inf && ea.sig == 0);
      if (ea.inf || eb.inf) begin
        if (ea.s ^ eb.s) neg_inf_d = 1'b1;
        else             pos_inf_d = 1'b1;
      end
      psig = ea.sig * eb.sig;
      sh   = int'(ea.exp) + int'(eb.exp) - GRID;   // 0 .. 58
      term = SUM_W'(psig) << sh;
      if (ea.s ^ eb.s) sum_d = sum_d - $signed(term);
      else             sum_d = sum_d + $signed(term);
    end
    sc_d  = 10'(op_c_i[39:32]) + 10'(op_c_i[47:40]);
    nan_d = nan_d | (op_c_i[39:32] == 8'hff) | (op_c_i[47:40] == 8'hff)
          | (pos_inf_d & neg_inf_d);
    acc_d = (acc_fmt_i == ACC_BF16) ? {op_c_i[15:0], 16'h0} : op_c_i[31:0];
  end

  logic                    v1_q;
  logic [TAG_W-1:0]        tag1_q;
  acc_fmt_e                accf1_q;
  logic signed [SUM_W-1:0] sum_q;
  logic                    pinf_q, ninf_q, nan_q;
  logic [9:0]              sc_q;
  logic [31:0]             acc_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      v1_q    <= 1'b0;
      tag1_q  <= '0;
      accf1_q <= ACC_FP32;
      sum_q   <= '0;
      pinf_q  <= 1'b0;
      ninf_q  <= 1'b0;
      nan_q   <= 1'b0;
      sc_q    <= '0;
      acc_q   <= '0;
    end else begin
      v1_q <= in_valid_i;
      if (in_valid_i) begin
        tag1_q  <= in_tag_i;
        accf1_q <= acc_fmt_i;
        sum_q   <= sum_d;
        pinf_q  <= pos_inf_d;
        ninf_q  <= neg_inf_d;
        nan_q   <= nan_d;
        sc_q    <= sc_d;
        acc_q   <= acc_d;
      end
    end
  end

  // ---------------------------------------------------------------------
  // Stage 2: scale, add accumulator, round once
  // ---------------------------------------------------------------------
  function automatic int msb_idx(logic [WIN-1:0] v);
    int r;
    r = -1;
    for (int i = 0; i < WIN; i++) if (v[i]) r = i;
    return r;
  endfunction

  // Round magnitude m (bit 0 at exponent lsb_exp, bit 0 may be a sticky bit)
  // to an FP32-range value with p significand bits (24: FP32, 8: BF16).
  // Returns {sign, biased exponent, fraction} in FP32 layout, fraction
  // left-aligned (BF16 uses the upper 16 bits).
  function automatic logic [31:0] round_fp(logic s, logic [WIN-1:0] m, int lsb_exp, int p);
    int pos, e, sh, be;
    logic [WIN-1:0] sig, mask;
    logic rb, st, inc;
    logic [31:0] r;
    pos = msb_idx(m);
    if (pos < 0) return {s, 31'h0};
    e = lsb_exp + pos;
    if (e < -126) e = -126;
    sh = (e - (p - 1)) - lsb_exp;
    rb = 1'b0;
    st = 1'b0;
    if (sh <= 0) begin
      sig = m << (-sh);
    end else if (sh > WIN) begin
      sig = '0;
      st  = |m;
    end else begin
      sig  = m >> sh;
      rb   = m[sh-1];
      mask = (WIN'(1) << (sh - 1)) - WIN'(1);
      st   = |(m & mask);
    end
    inc = rb & (st | sig[0]);
    sig = sig + WIN'(inc);
    if (sig[p]) begin
      sig = sig >> 1;
      e   = e + 1;
    end
    be = sig[p-1] ? e + 127 : 0;
    if (be >= 255) begin
      r = {s, 8'hff, 23'h0};
    end else begin
      r = {s, 8'(be), 23'h0};
      if (p == 24) r[22:0] = sig[22:0];
      else         r[22:16] = sig[6:0];
    end
    return r;
  endfunction

  logic [31:0] res_d;

  always_comb begin
    logic            sx, sy, sl, ss, sr;
    logic [WIN-1:0]  mx, my, ml, msm, lv, sv, d, mask;
    int              ex, ey, el, es, px, py, pl, psm, hl, hs, t, rr;
    logic [7:0]      ae;
    logic            a_inf, a_nan, x_inf;
    logic [WIN:0]    dd;
    logic [31:0]     rnd;

    hs = 0; t = 0; rr = 0; mask = '0; dd = '0; sr = 1'b0; d = '0; rnd = '0; res_d = '0;
    // dot product as sign / magnitude / LSB exponent
    sx = sum_q[SUM_W-1];
    mx = sx ? WIN'(-sum_q) : WIN'(sum_q);
    ex = GRID + int'(sc_q) - 254;
    // accumulator
    ae    = acc_q[30:23];
    sy    = acc_q[31];
    my    = WIN'({(ae != 0), acc_q[22:0]});
    ey    = ((ae == 0) ? 1 : int'(ae)) - 150;
    a_nan = (ae == 8'hff) && (acc_q[22:0] != 0);
    a_inf = (ae == 8'hff) && (acc_q[22:0] == 0);
    x_inf = pinf_q | ninf_q;

    px = msb_idx(mx);
    py = msb_idx(my);
    // order by magnitude of the leading bit; a zero operand is the small one
    if (px >= 0 && (py < 0 || ex + px >= ey + py)) begin
      sl = sx; ml = mx; el = ex; pl = px;
      ss = sy; msm = my; es = ey; psm = py;
    end else begin
      sl = sy; ml = my; el = ey; pl = py;
      ss = sx; msm = mx; es = ex; psm = px;
    end
    hl = el + pl;
    // large operand: leading bit at window bit 99
    lv = (pl >= 0) ? (ml << (99 - pl)) : '0;
    // small operand: same grid, bits below window bit 1 fold into bit 0
    sv = '0;
    if (psm >= 0) begin
      hs = es + psm;
      t  = 99 - (hl - hs) - psm;    // window position of the small LSB
      if (t >= 1) begin
        sv = msm << t;
      end else begin
        rr = 1 - t;
        if (rr >= WIN) begin
          sv = WIN'(|msm);
        end else begin
          mask = (WIN'(1) << rr) - WIN'(1);
          sv   = ((msm >> rr) << 1) | WIN'(|(msm & mask));
        end
      end
    end
    if (sl == ss) begin
      dd = {1'b0, lv} + {1'b0, sv};
      sr = sl;
    end else if (lv >= sv) begin
      dd = {1'b0, lv} - {1'b0, sv};
      sr = sl;
    end else begin
      dd = {1'b0, sv} - {1'b0, lv};
      sr = ss;
    end
    if (dd == 0) sr = sl & ss;
    // bit 99 has weight 2^hl, so bit 0 has weight 2^(hl-99); a carry out
    // of the addition is folded down by one bit first.
    if (dd[WIN]) begin
      d   = dd[WIN:1] | WIN'(dd[0]);
      rnd = round_fp(sr, d, hl - 98, (accf1_q == ACC_BF16) ? 8 : 24);
    end else begin
      d   = dd[WIN-1:0];
      rnd = round_fp(sr, d, hl - 99, (accf1_q == ACC_BF16) ? 8 : 24);
    end
    if (px < 0 && !x_inf) rnd = acc_q;   // nothing to add: acc unchanged

    if (nan_q || a_nan || (x_inf && a_inf && (pinf_q != !sy)))
      res_d = (accf1_q == ACC_BF16) ? {16'h0, BF16_QNAN} : FP32_QNAN;
    else if (x_inf)
      res_d = (accf1_q == ACC_BF16) ? {16'h0, ninf_q, 15'h7f80} : {ninf_q, 31'h7f80_0000};
    else if (a_inf)
      res_d = (accf1_q == ACC_BF16) ? {16'h0, acc_q[31:16]} : acc_q;
    else
      res_d = (accf1_q == ACC_BF16) ? {16'h0, rnd[31:16]} : rnd;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      out_valid_o <= 1'b0;
      out_tag_o   <= '0;
      result_o    <= '0;
    end else begin
      out_valid_o <= v1_q;
      if (v1_q) begin
        out_tag_o <= tag1_q;
        result_o  <= res_d;
      end
    end
  end

endmodule
