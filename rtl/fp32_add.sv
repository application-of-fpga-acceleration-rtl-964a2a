// fp32_add: combinational IEEE-754 single-precision adder, y = a + b.
//
// The accelerator computes in floating point; this adder is the basic unit
// of its butterflies and complex multipliers. How it is built is this design's
// own choice: the operand of smaller magnitude is aligned to the larger one
// with guard, round and sticky bits, the mantissas are added or subtracted,
// the result is normalised with a leading-zero count and rounded to nearest,
// ties to even. Subnormal inputs are read as zero and results below the normal
// range are flushed to zero (sign kept). Overflow gives infinity; a NaN input
// or inf - inf gives the quiet NaN 0x7FC00000. An exact cancellation gives +0.
// Purely combinational: the enclosing stage registers the result.
module fp32_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);

  logic        sa, sb, sl, ss;
  logic [7:0]  ea, eb, el, es;
  logic [23:0] ma, mb, ml, ms;
  logic        a_nan, b_nan, a_inf, b_inf;
  logic [7:0]  d;
  logic [26:0] ml_x, ms_x, ms_al;
  logic        sticky;
  logic [27:0] sum;
  logic [26:0] norm;
  logic [4:0]  lz;
  logic signed [9:0] e_res;
  logic [24:0] rnd;
  logic        rup;

  always_comb begin
    sa = a[31]; ea = a[30:23];
    sb = b[31]; eb = b[30:23];
    ma = (ea == 0) ? 24'd0 : {1'b1, a[22:0]};
    mb = (eb == 0) ? 24'd0 : {1'b1, b[22:0]};
    a_nan = (ea == 8'hFF) && (a[22:0] != 0);
    b_nan = (eb == 8'hFF) && (b[22:0] != 0);
    a_inf = (ea == 8'hFF) && (a[22:0] == 0);
    b_inf = (eb == 8'hFF) && (b[22:0] == 0);

    // order operands by magnitude (subnormals already read as zero)
    if ({ea, ma} >= {eb, mb}) begin
      sl = sa; el = ea; ml = ma; ss = sb; es = eb; ms = mb;
    end else begin
      sl = sb; el = eb; ml = mb; ss = sa; es = ea; ms = ma;
    end
    if (ml == 0) el = 8'd0;
    if (ms == 0) es = el;

    // align the smaller operand, keeping a sticky bit
    d      = el - es;
    ml_x   = {ml, 3'b000};
    ms_x   = {ms, 3'b000};
    if (d >= 8'd27) begin
      ms_al  = 27'd0;
      sticky = (ms != 0);
    end else begin
      ms_al  = ms_x >> d;
      sticky = ((ms_x & ((27'd1 << d) - 27'd1)) != 0);
    end
    ms_al[0] = ms_al[0] | sticky;

    // add or subtract magnitudes
    e_res = signed'({2'b00, el});
    norm  = '0;
    lz    = '0;
    if (sl == ss) begin
      sum = {1'b0, ml_x} + {1'b0, ms_al};
      if (sum[27]) begin
        norm  = {sum[27:2], sum[1] | sum[0]};
        e_res = e_res + 10'sd1;
      end else begin
        norm  = sum[26:0];
      end
    end else begin
      sum = {1'b0, ml_x} - {1'b0, ms_al};
      for (int i = 26; i >= 0; i--) begin
        if (sum[i]) begin
          lz = 5'(26 - i);
          break;
        end
      end
      norm  = sum[26:0] << lz;
      e_res = e_res - signed'({5'b0, lz});
    end

    // round to nearest even on guard / round / sticky
    rup = norm[2] && (norm[1] || norm[0] || norm[3]);
    rnd = {1'b0, norm[26:3]} + {24'd0, rup};
    if (rnd[24]) begin
      rnd   = rnd >> 1;
      e_res = e_res + 10'sd1;
    end

    // pack, with the special cases
    if (a_nan || b_nan || (a_inf && b_inf && (sa != sb))) begin
      y = 32'h7FC0_0000;
    end else if (a_inf) begin
      y = a;
    end else if (b_inf) begin
      y = b;
    end else if (ml == 0) begin
      y = {sa & sb, 31'b0};               // 0 + 0
    end else if (sum == 0) begin
      y = 32'h0000_0000;                  // exact cancellation
    end else if (e_res <= 0) begin
      y = {sl, 31'b0};                    // flush to zero
    end else if (e_res >= 10'sd255) begin
      y = {sl, 8'hFF, 23'b0};             // overflow
    end else begin
      y = {sl, e_res[7:0], rnd[22:0]};
    end
  end

endmodule
