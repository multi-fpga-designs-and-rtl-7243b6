// Single-precision floating-point adder, y = a + b (combinational).
//
// PTRANS computes C = B + A^T in float (DATA_TYPE = float); this is the adder used
// once per value lane of the receive kernel. The paper only names the addition; the
// adder itself is this design's: the operands are aligned to the larger exponent with
// guard, round and sticky bits, added or subtracted, normalised with a leading-zero
// count and rounded to nearest even. Subnormal inputs count as zero and subnormal
// results are flushed to zero; infinities and NaNs follow IEEE 754 (NaN result is the
// quiet NaN 0x7FC00000). Exact zero results are +0 except (-0)+(-0).
module fp32_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);

  logic        sa, sb, sl, ss;
  logic [7:0]  ea, eb, el, es;
  logic [23:0] ma, mb, ml, ms;          // mantissas with hidden bit
  logic        a_nan, b_nan, a_inf, b_inf;
  logic [7:0]  d;
  logic [26:0] ml_x, ms_x, ms_sh;       // mantissa, guard, round, sticky
  logic        sticky;
  logic [27:0] sum;
  logic [4:0]  lz;
  logic [27:0] norm;
  logic signed [9:0] e_norm;
  logic [23:0] mant_r;
  logic        rnd_up;
  logic [24:0] mant_inc;
  logic signed [9:0] e_fin;
  logic [22:0] frac_fin;

  always_comb begin
    sa = a[31]; sb = b[31];
    ea = a[30:23]; eb = b[30:23];
    ma = (ea == 8'd0) ? 24'd0 : {1'b1, a[22:0]};
    mb = (eb == 8'd0) ? 24'd0 : {1'b1, b[22:0]};
    a_nan = (ea == 8'hFF) && (a[22:0] != 23'd0);
    b_nan = (eb == 8'hFF) && (b[22:0] != 23'd0);
    a_inf = (ea == 8'hFF) && (a[22:0] == 23'd0);
    b_inf = (eb == 8'hFF) && (b[22:0] == 23'd0);

    // Order operands by magnitude.
    if ({ea, ma} >= {eb, mb}) begin
      sl = sa; el = ea; ml = ma; ss = sb; es = eb; ms = mb;
    end else begin
      sl = sb; el = eb; ml = mb; ss = sa; es = ea; ms = ma;
    end
    if (ms == 24'd0) es = el;            // zero operand: no shift needed

    d    = el - es;
    ml_x = {ml, 3'b000};
    ms_x = {ms, 3'b000};
    if (d >= 8'd27) begin
      ms_sh  = 27'd0;
      sticky = (ms != 24'd0);
    end else begin
      ms_sh  = ms_x >> d;
      sticky = ((ms_x & ((27'd1 << d) - 27'd1)) != 27'd0);
    end
    ms_sh[0] = ms_sh[0] | sticky;

    if (sl == ss) sum = {1'b0, ml_x} + {1'b0, ms_sh};
    else          sum = {1'b0, ml_x} - {1'b0, ms_sh};

    // Leading-zero count of the 28-bit sum.
    lz = 5'd28;
    for (int i = 0; i < 28; i++) begin
      if (sum[i]) lz = 5'(27 - i);
    end

    // Normalise so that the hidden bit sits at bit 26.
    norm   = 28'd0;
    e_norm = 10'sd0;
    if (sum[27]) begin
      norm   = {1'b0, sum[27:2], sum[1] | sum[0]};
      e_norm = $signed({2'b00, el}) + 10'sd1;
    end else begin
      norm   = sum << (lz - 5'd1);
      e_norm = $signed({2'b00, el}) - $signed({5'd0, lz}) + 10'sd1;
    end

    // Round to nearest even: norm[26:3] mantissa, [2] guard, [1] round, [0] sticky.
    mant_r   = norm[26:3];
    rnd_up   = norm[2] && (norm[1] || norm[0] || norm[3]);
    mant_inc = {1'b0, mant_r} + {24'd0, rnd_up};
    e_fin    = e_norm;
    frac_fin = mant_inc[22:0];
    if (mant_inc[24]) begin
      e_fin    = e_norm + 10'sd1;
      frac_fin = mant_inc[23:1];
    end

    if (a_nan || b_nan || (a_inf && b_inf && (sa != sb))) begin
      y = 32'h7FC0_0000;
    end else if (a_inf) begin
      y = a;
    end else if (b_inf) begin
      y = b;
    end else if (sum == 28'd0) begin
      y = {sa & sb, 31'd0};
    end else if (e_fin >= 10'sd255) begin
      y = {sl, 8'hFF, 23'd0};
    end else if (e_fin <= 10'sd0) begin
      y = {sl, 31'd0};
    end else begin
      y = {sl, e_fin[7:0], frac_fin};
    end
  end

endmodule
