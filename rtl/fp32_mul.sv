// fp32_mul -- combinational IEEE-754 single-precision multiplier.
//
// y = a * b, rounded to nearest, ties to even. The two 24-bit mantissas
// (hidden bit included) give a 48-bit product; depending on its top bit the
// upper 24 bits are taken from bit 47 or bit 46, the next bit is the guard
// bit and the rest form the sticky bit. The exponent is ea + eb - 127, one
// more if the product overflowed into bit 47 or rounding carried out.
//
// Simplifications, this design's own choices: subnormal inputs count as zero,
// results below the smallest normal are flushed to a signed zero, overflow
// gives a signed infinity; infinity/NaN operands give infinity (no NaN
// generation).
//
// Timing: purely combinational.
module fp32_mul
  import dfgm_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  logic               s;
  logic [7:0]         ea, eb;
  logic [23:0]        ma, mb;
  logic [47:0]        p;
  logic [24:0]        mr;
  logic               g, st;
  logic signed [10:0] er;

  always_comb begin
    s  = a[31] ^ b[31];
    ea = a[30:23];
    eb = b[30:23];
    ma = {1'b1, a[22:0]};
    mb = {1'b1, b[22:0]};
    p  = ma * mb;
    er = $signed({3'b0, ea}) + $signed({3'b0, eb}) - 11'sd127;
    if (p[47]) begin
      mr = {1'b0, p[47:24]};
      g  = p[23];
      st = |p[22:0];
      er = er + 11'sd1;
    end else begin
      mr = {1'b0, p[46:23]};
      g  = p[22];
      st = |p[21:0];
    end
    if (g && (st || mr[0])) mr = mr + 25'd1;
    if (mr[24]) begin
      mr = mr >> 1;
      er = er + 11'sd1;
    end

    if (ea == 8'hFF || eb == 8'hFF) begin
      y = {s, FP32_INF[30:0]};
    end else if (ea == 8'd0 || eb == 8'd0) begin
      y = {s, 31'd0};
    end else if (er >= 11'sd255) begin
      y = {s, FP32_INF[30:0]};
    end else if (er <= 11'sd0) begin
      y = {s, 31'd0};
    end else begin
      y = {s, er[7:0], mr[22:0]};
    end
  end

endmodule
