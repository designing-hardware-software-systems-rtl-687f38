// fp_fma: single-precision fused multiply-add, r = a * b + c.
//
// This is the arithmetic unit (FPU) of a core, in the configuration used for
// both workloads: fused multiply-add, one result per clock. The product a*b
// is kept exact (48-bit significand), aligned against c with guard, round and
// sticky bits, added or subtracted, normalised and rounded once, to nearest
// with ties to even. That single rounding is what makes it "fused".
//
// Purely combinational; the caller registers the result (the core controller
// puts one register after it, so the unit accepts one operation per cycle).
//
// Number handling is this design's choice (the paper says only that the
// cores use floating point): subnormal inputs are read as zero and subnormal
// results are flushed to a signed zero; overflow gives infinity; any NaN,
// inf*0 or inf-inf gives the quiet NaN 0x7fc00000. An exact cancellation
// gives +0.
module fp_fma (
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic [31:0] c,
  output logic [31:0] r
);

  localparam logic [31:0] QNAN = 32'h7fc0_0000;

  logic        sa, sb, sc, sp;
  logic [7:0]  ea, eb, ec;
  logic [23:0] ma, mb, mc;
  logic        a_zero, b_zero, c_zero, a_inf, b_inf, c_inf, a_nan, b_nan, c_nan;
  logic [47:0] pm;

  always_comb begin
    sa = a[31]; sb = b[31]; sc = c[31];
    ea = a[30:23]; eb = b[30:23]; ec = c[30:23];
    a_zero = (ea == 8'd0); b_zero = (eb == 8'd0); c_zero = (ec == 8'd0);
    a_inf  = (ea == 8'hff) && (a[22:0] == '0);
    b_inf  = (eb == 8'hff) && (b[22:0] == '0);
    c_inf  = (ec == 8'hff) && (c[22:0] == '0);
    a_nan  = (ea == 8'hff) && (a[22:0] != '0);
    b_nan  = (eb == 8'hff) && (b[22:0] != '0);
    c_nan  = (ec == 8'hff) && (c[22:0] != '0);
    ma = a_zero ? 24'd0 : {1'b1, a[22:0]};
    mb = b_zero ? 24'd0 : {1'b1, b[22:0]};
    mc = c_zero ? 24'd0 : {1'b1, c[22:0]};
    sp = sa ^ sb;
    pm = ma * mb;
  end

  // Datapath: both operands carry their leading one at bit 47, then three
  // extra bits (guard, round, sticky) and one bit of headroom for the carry.
  logic signed [11:0] pe, pe_raw, e_big, e_small, er0, er;
  logic [47:0]        pn, op_big, op_small;
  logic               s_big, s_small, eff_sub, sticky, neg, rnd, st, inc;
  logic [51:0]        xs, ys, sum_raw, sum, sn;
  logic [11:0]        d;
  logic [5:0]         lead;
  logic [24:0]        m25;
  logic [23:0]        mant0, mant;
  logic [50:0]        shifted_out_mask;

  always_comb begin
    // Product, normalised so that its leading one sits at bit 47.
    pe_raw = $signed({4'd0, ea}) + $signed({4'd0, eb}) - 12'sd127;
    pn = pm[47] ? pm : {pm[46:0], 1'b0};
    pe = pm[47] ? pe_raw + 12'sd1 : pe_raw;

    // Larger exponent first; a zero addend never becomes the larger one.
    if (c_zero || (!(a_zero || b_zero) && (pe >= $signed({4'd0, ec})))) begin
      op_big = pn; e_big = pe; s_big = sp;
      op_small = {mc, 24'd0}; e_small = $signed({4'd0, ec}); s_small = sc;
    end else begin
      op_big = {mc, 24'd0}; e_big = $signed({4'd0, ec}); s_big = sc;
      op_small = pn; e_small = pe; s_small = sp;
    end
    eff_sub = s_big ^ s_small;
    d = 12'(e_big - e_small);

    // Align the smaller operand, collecting the bits shifted out as sticky.
    xs = {1'b0, op_big, 3'b000};
    shifted_out_mask = '0;
    if (d > 12'd50) begin
      ys = '0;
      sticky = (op_small != '0);
    end else begin
      shifted_out_mask = (51'd1 << d) - 51'd1;
      ys = {1'b0, op_small, 3'b000} >> d;
      sticky = (({op_small, 3'b000} & shifted_out_mask) != '0);
    end

    sum_raw = eff_sub ? (xs - (ys | 52'(sticky))) : (xs + (ys | 52'(sticky)));
    neg = eff_sub && sum_raw[51];
    sum = neg ? -sum_raw : sum_raw;

    // Leading one position.
    lead = 6'd0;
    for (int i = 0; i < 52; i++) if (sum[i]) lead = 6'(i);

    sn   = sum << (6'd51 - lead);
    er0  = e_big + $signed({6'd0, lead}) - 12'sd50;
    mant0 = sn[51:28];
    rnd  = sn[27];
    st   = (sn[26:0] != '0);
    inc  = rnd & (st | mant0[0]);
    m25  = {1'b0, mant0} + 25'(inc);
    mant = m25[24] ? m25[24:1] : m25[23:0];
    er   = m25[24] ? er0 + 12'sd1 : er0;

    // Result selection, specials first.
    if (a_nan || b_nan || c_nan || ((a_inf || b_inf) && (a_zero || b_zero)) ||
        ((a_inf || b_inf) && c_inf && (sp != sc))) begin
      r = QNAN;
    end else if (a_inf || b_inf) begin
      r = {sp, 8'hff, 23'd0};
    end else if (c_inf) begin
      r = c;
    end else if ((a_zero || b_zero) && c_zero) begin
      r = {sp & sc, 31'd0};
    end else if (a_zero || b_zero) begin
      r = c;
    end else if (sum == '0) begin
      r = 32'd0;
    end else if (er >= 12'sd255) begin
      r = {s_big ^ neg, 8'hff, 23'd0};
    end else if (er <= 12'sd0) begin
      r = {s_big ^ neg, 31'd0};
    end else begin
      r = {s_big ^ neg, er[7:0], mant[22:0]};
    end
  end

endmodule
