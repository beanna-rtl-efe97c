// bfloat16 fused multiply-add: y = round(a * b + c).
//
// This is the "Bfloat16 multiply-add" unit of every processing element. The
// partial-sum accumulators reuse it as an adder (b = 1.0) and the
// normalization unit as the batch-norm scale-and-shift. bfloat16 is 1 sign,
// 8 exponent (bias 127) and 7 stored mantissa bits, as in the paper.
//
// How it works: the 8x8-bit significand product is exact (16 bits). Product
// and addend are placed in a 50-bit window aligned to the larger exponent;
// the smaller one is shifted right and the bits shifted out are ORed into the
// lowest window bit (sticky). The two are added or subtracted, the magnitude
// is normalised by a leading-one search and rounded once to 8 significant
// bits, round to nearest, ties to even.
//
// The paper gives only the format and the unit's name. The following are this
// design's own choices: single rounding (fused), subnormal inputs read as zero
// and subnormal results flushed to a signed zero, overflow to infinity, NaN
// inputs, inf*0 and inf-inf give the quiet NaN 0x7FC0. Exact zero results are
// +0 except (-0) + (-0).
//
// Purely combinational; no clock.
module bf16_fma
  import beanna_pkg::*;
(
  input  word_t a,
  input  word_t b,
  input  word_t c,
  output word_t y
);

  localparam int unsigned WIN = 48;   // alignment window below the carry bits

  logic       sa, sb, sc, sp;
  logic [7:0] ea, eb, ec;
  logic [6:0] ma, mb, mc;
  logic       za, zb, zc, zp;
  logic       nan_a, nan_b, nan_c, inf_a, inf_b, inf_c, inf_p;

  always_comb begin
    {sa, ea, ma} = a;
    {sb, eb, mb} = b;
    {sc, ec, mc} = c;
    sp    = sa ^ sb;
    za    = (ea == 8'd0);
    zb    = (eb == 8'd0);
    zc    = (ec == 8'd0);
    zp    = za | zb;
    nan_a = (ea == 8'hFF) && (ma != 7'd0);
    nan_b = (eb == 8'hFF) && (mb != 7'd0);
    nan_c = (ec == 8'hFF) && (mc != 7'd0);
    inf_a = (ea == 8'hFF) && (ma == 7'd0);
    inf_b = (eb == 8'hFF) && (mb == 7'd0);
    inf_c = (ec == 8'hFF) && (mc == 7'd0);
    inf_p = inf_a | inf_b;
  end

  // Operands as M * 2^(E - 127 - 14), M with two integer bits.
  logic [15:0]       m_p, m_c;
  logic signed [11:0] e_p, e_c;

  always_comb begin
    m_p = {8'd0, 1'b1, ma} * {8'd0, 1'b1, mb};
    m_c = zc ? 16'd0 : {1'b0, 1'b1, mc, 7'd0};
    e_p = $signed({4'd0, ea}) + $signed({4'd0, eb}) - 12'sd127;
    e_c = $signed({4'd0, ec});
  end

  // Alignment, addition, normalisation and rounding.
  logic               swap;          // addend is the larger operand
  logic [15:0]        m_l, m_s;
  logic               s_l, s_s;
  logic signed [11:0] e_l;
  logic [11:0]        d;
  logic [WIN-1:0]     w_l, w_s, w_s_full;
  logic [2*WIN-1:0]   shifted;
  logic               sticky;
  logic [WIN:0]       mag;
  logic               s_r;
  int unsigned        lead;
  logic [WIN:0]       norm;
  logic [6:0]         frac;
  logic               guard, rsticky, rnd;
  logic [8:0]         sig_r;
  logic signed [12:0] e_r;
  word_t              y_gen;

  always_comb begin
    swap = (e_c > e_p);
    m_l  = swap ? m_c : m_p;
    m_s  = swap ? m_p : m_c;
    s_l  = swap ? sc  : sp;
    s_s  = swap ? sp  : sc;
    e_l  = swap ? e_c : e_p;
    d    = swap ? 12'(e_c - e_p) : 12'(e_p - e_c);

    shifted  = '0;
    w_l      = {m_l, {(WIN-16){1'b0}}};
    w_s_full = {m_s, {(WIN-16){1'b0}}};
    if (d >= 12'(WIN)) begin
      w_s    = '0;
      sticky = (m_s != 16'd0);
    end else begin
      shifted = {w_s_full, {WIN{1'b0}}} >> d;
      w_s     = shifted[2*WIN-1:WIN];
      sticky  = (shifted[WIN-1:0] != '0);
    end
    w_s[0] = w_s[0] | sticky;

    if (s_l == s_s) begin
      mag = {1'b0, w_l} + {1'b0, w_s};
      s_r = s_l;
    end else if (w_l >= w_s) begin
      mag = {1'b0, w_l} - {1'b0, w_s};
      s_r = s_l;
    end else begin
      mag = {1'b0, w_s} - {1'b0, w_l};
      s_r = s_s;
    end

    lead = 0;
    for (int i = 0; i <= WIN; i++) begin
      if (mag[i]) lead = i;
    end
    norm    = mag << (WIN - lead);          // leading one at bit WIN
    frac    = norm[WIN-1 -: 7];
    guard   = norm[WIN-8];
    rsticky = (norm[WIN-9:0] != '0);
    rnd     = guard & (rsticky | frac[0]);
    sig_r   = {1'b1, frac} + {8'd0, rnd};
    // value = 1.frac * 2^(e_l + lead - (WIN-2) - 127 + 127)
    e_r     = 13'(e_l) + 13'(lead) - 13'(WIN - 2);
    if (sig_r[8]) begin                    // rounding carried into a new bit
      e_r   = e_r + 13'sd1;
      frac  = sig_r[7:1];
    end else begin
      frac  = sig_r[6:0];
    end

    if (mag == '0)              y_gen = 16'h0000;
    else if (e_r <= 13'sd0)     y_gen = {s_r, 15'd0};
    else if (e_r >= 13'sd255)   y_gen = {s_r, 8'hFF, 7'd0};
    else                        y_gen = {s_r, e_r[7:0], frac};
  end

  // Special operands.
  always_comb begin
    if (nan_a || nan_b || nan_c || (inf_a && zb) || (inf_b && za) ||
        (inf_p && inf_c && (sp != sc)))
      y = BF16_QNAN;
    else if (inf_p)
      y = {sp, 8'hFF, 7'd0};
    else if (inf_c)
      y = {sc, 8'hFF, 7'd0};
    else if (zp && zc)
      y = {sp & sc, 15'd0};
    else if (zp)
      y = c;
    else
      y = y_gen;                           // with zc the product alone, rounded
  end

endmodule
