// fp32_mul: combinational IEEE-754 single-precision multiplier, y = a * b.
//
// Used four times in every twiddle-factor complex multiplier of the FFT. The
// 24 x 24 bit mantissa product is normalised by at most one place and rounded
// to nearest, ties to even. Subnormal inputs are read as zero and results
// below the normal range are flushed to a signed zero; overflow gives a signed
// infinity; a NaN input or inf * 0 gives the quiet NaN 0x7FC00000. These
// choices, and the structure, are this design's own. Purely combinational.
module fp32_mul (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);

  logic        s;
  logic [7:0]  ea, eb;
  logic [23:0] ma, mb;
  logic        a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;
  logic [47:0] p;
  logic [23:0] m;
  logic        g, st, rup;
  logic [24:0] rnd;
  logic signed [9:0] e_res;

  always_comb begin
    s  = a[31] ^ b[31];
    ea = a[30:23];
    eb = b[30:23];
    ma = {1'b1, a[22:0]};
    mb = {1'b1, b[22:0]};
    a_nan  = (ea == 8'hFF) && (a[22:0] != 0);
    b_nan  = (eb == 8'hFF) && (b[22:0] != 0);
    a_inf  = (ea == 8'hFF) && (a[22:0] == 0);
    b_inf  = (eb == 8'hFF) && (b[22:0] == 0);
    a_zero = (ea == 8'h00);
    b_zero = (eb == 8'h00);

    p     = ma * mb;
    e_res = signed'({2'b00, ea}) + signed'({2'b00, eb}) - 10'sd127;
    if (p[47]) begin
      m     = p[47:24];
      g     = p[23];
      st    = |p[22:0];
      e_res = e_res + 10'sd1;
    end else begin
      m     = p[46:23];
      g     = p[22];
      st    = |p[21:0];
    end
    rup = g && (st || m[0]);
    rnd = {1'b0, m} + {24'd0, rup};
    if (rnd[24]) begin
      rnd   = rnd >> 1;
      e_res = e_res + 10'sd1;
    end

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) begin
      y = 32'h7FC0_0000;
    end else if (a_inf || b_inf) begin
      y = {s, 8'hFF, 23'b0};
    end else if (a_zero || b_zero) begin
      y = {s, 31'b0};
    end else if (e_res <= 0) begin
      y = {s, 31'b0};
    end else if (e_res >= 10'sd255) begin
      y = {s, 8'hFF, 23'b0};
    end else begin
      y = {s, e_res[7:0], rnd[22:0]};
    end
  end

endmodule
