// ace_fp_add: combinational IEEE-754 binary floating-point adder, EW exponent bits and MW
// fraction bits (EW=5/MW=10 is FP16, EW=8/MW=23 is FP32).
//
// The operand of larger magnitude is kept, the other one is shifted right to the same exponent
// with guard, round and sticky bits, the two significands are added or subtracted, the sum is
// normalised (down into the subnormal range where needed) and rounded to nearest, ties to even.
// Subnormal inputs and outputs, infinities and NaNs are handled; every NaN result is the quiet
// NaN with only the top fraction bit set. An exact zero sum of operands of opposite sign is +0.
// The paper states only that the ALU adds FP16 or FP32 values; the IEEE rounding is this
// design's choice.
module ace_fp_add #(
  parameter int unsigned EW = 5,
  parameter int unsigned MW = 10
) (
  input  logic [EW+MW:0] a,
  input  logic [EW+MW:0] b,
  output logic [EW+MW:0] y
);
  localparam int unsigned SW = MW + 1;      // significand with hidden bit
  localparam int unsigned WW = SW + 4;      // carry + significand + guard, round, sticky
  localparam logic [EW-1:0] EMAX = '1;

  logic          sa, sb, sx, sy;
  logic [EW-1:0] ea, eb;
  logic [MW-1:0] ma, mb;
  logic          a_nan, b_nan, a_inf, b_inf;
  logic [SW-1:0] siga, sigb, sigx, sigy;
  logic [EW-1:0] expa, expb, ex, ey;
  logic [WW-1:0] xe, ye, ysh, sum, mask;
  logic          lost, rnd_up;
  int            d, e;
  logic [SW:0]   mant;

  always_comb begin
    {sa, ea, ma} = a;
    {sb, eb, mb} = b;
    a_nan = (ea == EMAX) && (ma != '0);
    b_nan = (eb == EMAX) && (mb != '0);
    a_inf = (ea == EMAX) && (ma == '0);
    b_inf = (eb == EMAX) && (mb == '0);
    siga  = {ea != '0, ma};
    sigb  = {eb != '0, mb};
    expa  = (ea == '0) ? EW'(1) : ea;
    expb  = (eb == '0) ? EW'(1) : eb;

    // order the operands by magnitude
    if ({ea, ma} >= {eb, mb}) begin
      sx = sa; ex = expa; sigx = siga; sy = sb; ey = expb; sigy = sigb;
    end else begin
      sx = sb; ex = expb; sigx = sigb; sy = sa; ey = expa; sigy = siga;
    end

    // align the smaller operand, folding shifted-out bits into the sticky bit
    d    = int'(ex) - int'(ey);
    xe   = {1'b0, sigx, 3'b000};
    ye   = {1'b0, sigy, 3'b000};
    mask = '0;
    lost = 1'b0;
    if (d >= int'(WW)) begin
      ysh  = {{(WW-1){1'b0}}, sigy != '0};
    end else begin
      mask = (WW'(1) << d) - WW'(1);
      lost = (ye & mask) != '0;
      ysh  = (ye >> d) | {{(WW-1){1'b0}}, lost};
    end

    sum = (sx == sy) ? xe + ysh : xe - ysh;
    e   = int'(ex);

    // normalise
    if (sum[WW-1]) begin
      sum = {1'b0, sum[WW-1:2], sum[1] | sum[0]};
      e   = e + 1;
    end else begin
      for (int k = 0; k < int'(SW) + 3; k++) begin
        if (!sum[WW-2] && e > 1) begin
          sum = sum << 1;
          e   = e - 1;
        end
      end
    end

    // round to nearest even
    rnd_up = sum[2] && (sum[1] || sum[0] || sum[3]);
    mant   = {1'b0, sum[WW-2:3]} + {{SW{1'b0}}, rnd_up};
    if (mant[SW]) begin
      mant = mant >> 1;
      e    = e + 1;
    end

    // pack
    if (a_nan || b_nan || (a_inf && b_inf && (sa != sb))) begin
      y = {1'b0, EMAX, 1'b1, {(MW-1){1'b0}}};
    end else if (a_inf) begin
      y = a;
    end else if (b_inf) begin
      y = b;
    end else if (sum == '0) begin
      y = {(sx == sy) ? sx : 1'b0, {(EW+MW){1'b0}}};
    end else if (e >= int'(EMAX)) begin
      y = {sx, EMAX, {MW{1'b0}}};
    end else begin
      y = {sx, mant[SW-1] ? EW'(e) : EW'(0), mant[MW-1:0]};
    end
  end
endmodule
