// fp32_add -- combinational IEEE-754 single-precision adder/subtractor.
//
// y = a + b (sub = 0) or y = a - b (sub = 1), rounded to nearest, ties to
// even. The larger-magnitude operand is kept as is; the smaller one is
// shifted right inside a 50-bit field (24 mantissa bits plus 26 guard bits)
// and every bit shifted past the field is OR-ed ("jammed") into the lowest
// bit, which is enough for exact rounding. The sum is normalised with a
// leading-one search, then rounded.
//
// Simplifications, all this design's own choices: subnormal inputs count as
// zero and results below the smallest normal number are flushed to a signed
// zero; results too large become infinity; an infinity or NaN operand is
// passed to the output without further IEEE special-case handling. An exact
// cancellation gives +0.
//
// Timing: purely combinational; the caller registers the result.
module fp32_add
  import dfgm_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  input  logic  sub,
  output fp32_t y
);

  logic        sa, sb, sx, sy;
  logic [7:0]  ea, eb, ex, ey;
  logic [23:0] ma, mb, mx, my;
  logic [7:0]  d;
  logic [49:0] fx, fy, fy_sh;
  logic        sticky;
  logic [50:0] s;
  logic        eff_sub;
  logic [5:0]  lead;
  logic        found;
  logic [50:0] sn;
  logic [24:0] mr;
  logic        g, st;
  logic signed [10:0] er;

  always_comb begin
    sa = a[31];
    sb = b[31] ^ sub;
    ea = a[30:23];
    eb = b[30:23];
    ma = (ea == 8'd0) ? 24'd0 : {1'b1, a[22:0]};
    mb = (eb == 8'd0) ? 24'd0 : {1'b1, b[22:0]};

    // Order by magnitude: x is the larger one.
    if ({ea, a[22:0]} >= {eb, b[22:0]}) begin
      sx = sa; ex = ea; mx = ma;
      sy = sb; ey = eb; my = mb;
    end else begin
      sx = sb; ex = eb; mx = mb;
      sy = sa; ey = ea; my = ma;
    end
    d = ex - ey;

    fx = {mx, 26'd0};
    fy = {my, 26'd0};
    if (d > 8'd49) begin
      fy_sh  = 50'd0;
      sticky = (my != 24'd0);
    end else begin
      fy_sh  = fy >> d;
      sticky = ((fy << (50 - d)) != 50'd0) && (d != 8'd0);
    end
    fy_sh[0] = fy_sh[0] | sticky;

    eff_sub = sx ^ sy;
    s = eff_sub ? ({1'b0, fx} - {1'b0, fy_sh}) : ({1'b0, fx} + {1'b0, fy_sh});

    // Leading one position.
    lead  = 6'd0;
    found = 1'b0;
    for (int i = 50; i >= 0; i--) begin
      if (!found && s[i]) begin
        lead  = 6'(i);
        found = 1'b1;
      end
    end

    sn = s << (6'd50 - lead);
    g  = sn[26];
    st = |sn[25:0];
    mr = {1'b0, sn[50:27]};
    if (g && (st || mr[0])) mr = mr + 25'd1;
    // Leading 1 of fx sits at bit 49 with exponent ex.
    er = $signed({3'b0, ex}) + $signed({5'b0, lead}) - 11'sd49;
    if (mr[24]) begin
      mr = mr >> 1;
      er = er + 11'sd1;
    end

    if (ea == 8'hFF) begin
      y = a;
    end else if (eb == 8'hFF) begin
      y = {sb, b[30:0]};
    end else if (!found) begin
      y = FP32_ZERO;
    end else if (er >= 11'sd255) begin
      y = {sx, FP32_INF[30:0]};
    end else if (er <= 11'sd0) begin
      y = {sx, 31'd0};
    end else begin
      y = {sx, er[7:0], mr[22:0]};
    end
  end

endmodule
