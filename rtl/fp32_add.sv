// fp32_add: combinational IEEE-754 single-precision adder, one lane of the
// merge unit's vector ALU (red.cais.global.add.f32 reduces FP32 data).
//
// How it works: the operand with the larger magnitude is aligned first, the
// other mantissa is shifted right keeping guard, round and sticky bits, the
// two are added or subtracted, the result is normalised and rounded to
// nearest-even.  Subnormal inputs and results are flushed to signed zero
// (a common GPU "ftz" mode); infinities and NaNs propagate (a NaN result is
// the canonical quiet NaN 0x7fc00000).  The paper names only the FP32 add;
// the rounding mode and the flush-to-zero choice are this design's own.
//
// Interface: a, b in, s out, all FP32 bit patterns.  Timing: purely
// combinational, no clock.
module fp32_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] s
);
  logic        sa, sb, sl, ss;
  logic [7:0]  ea, eb, el, es;
  logic [23:0] ma, mb, ml, ms;          // with hidden bit
  logic [7:0]  d;
  logic [26:0] ms_sh;                   // mantissa, guard, round, sticky
  logic [27:0] sum;                     // one carry bit extra
  logic [26:0] norm;
  logic [9:0]  e_res;
  logic [4:0]  lz;
  logic [24:0] rnd;
  logic        a_nan, b_nan, a_inf, b_inf, eff_sub;

  always_comb begin
    sa = a[31]; ea = a[30:23];
    sb = b[31]; eb = b[30:23];
    // flush subnormals: a zero exponent means zero mantissa
    ma = (ea == 8'd0) ? 24'd0 : {1'b1, a[22:0]};
    mb = (eb == 8'd0) ? 24'd0 : {1'b1, b[22:0]};
    a_nan = (ea == 8'hff) && (a[22:0] != 23'd0);
    b_nan = (eb == 8'hff) && (b[22:0] != 23'd0);
    a_inf = (ea == 8'hff) && (a[22:0] == 23'd0);
    b_inf = (eb == 8'hff) && (b[22:0] == 23'd0);

    // larger magnitude first
    if ({ea, ma} >= {eb, mb}) begin
      sl = sa; el = ea; ml = ma; ss = sb; es = eb; ms = mb;
    end else begin
      sl = sb; el = eb; ml = mb; ss = sa; es = ea; ms = ma;
    end
    d = el - es;
    eff_sub = sl ^ ss;

    // align the smaller operand, collecting a sticky bit
    if (d >= 8'd27) begin
      ms_sh = {26'd0, (ms != 24'd0)};
    end else begin
      ms_sh = {ms, 3'b000} >> d;
      if (d > 8'd3) begin
        // bits shifted out below the sticky position
        ms_sh[0] = ms_sh[0] | (({ms, 3'b000} & ((27'd1 << d) - 27'd1)) != 27'd0);
      end
    end

    if (eff_sub) sum = {1'b0, ml, 3'b000} - {1'b0, ms_sh};
    else         sum = {1'b0, ml, 3'b000} + {1'b0, ms_sh};

    // normalise
    lz    = 5'd0;
    norm  = 27'd0;
    e_res = {2'b00, el};
    if (sum[27]) begin
      norm  = {sum[27:2], sum[1] | sum[0]};
      e_res = e_res + 10'd1;
    end else begin
      for (int i = 26; i >= 0; i--) begin
        if (sum[i] && lz == 5'd0 && norm == 27'd0) begin
          lz   = 5'(26 - i);
          norm = sum[26:0] << (26 - i);
        end
      end
      e_res = e_res - {5'd0, lz};
    end

    // round to nearest even on guard/round/sticky
    rnd = {1'b0, norm[26:3]};
    if (norm[2] && (norm[1] || norm[0] || norm[3])) rnd = rnd + 25'd1;
    if (rnd[24]) begin
      rnd   = rnd >> 1;
      e_res = e_res + 10'd1;
    end

    // assemble
    if (a_nan || b_nan || (a_inf && b_inf && (sa != sb))) begin
      s = 32'h7fc0_0000;
    end else if (a_inf) begin
      s = a;
    end else if (b_inf) begin
      s = b;
    end else if (sum == 28'd0) begin
      s = {sa & sb, 31'd0};                 // exact zero: +0 unless both -0
    end else if (e_res[9] || e_res == 10'd0) begin
      s = {sl, 31'd0};                      // underflow: flush to zero
    end else if (e_res >= 10'd255) begin
      s = {sl, 8'hff, 23'd0};               // overflow to infinity
    end else begin
      s = {sl, e_res[7:0], rnd[22:0]};
    end
  end
endmodule
