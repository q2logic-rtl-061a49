// fp32_add: combinational IEEE-754 single-precision adder.
//
// Not described by the paper, which only states that amplitudes are
// single-precision floats; the structure is a textbook one chosen here.
// The operand of larger magnitude is kept, the other is aligned to it with
// guard, round and sticky bits, the two are added or subtracted, the result
// is normalised (leading-zero count) and rounded to nearest, ties to even.
// Subnormal inputs and results are flushed to signed zero; an exact
// cancellation gives +0, and (-0) + (-0) gives -0, as IEEE-754 requires.
// An operand with the all-ones exponent gives infinity or a quiet NaN.
// Interface: a, b in, s = a + b out, no clock.
module fp32_add
  import q2l_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t s
);
  logic        swap;
  fp32_t       x, y;               // |x| >= |y|
  logic [7:0]  ex, ey, d;
  logic [27:0] mx, my, sum;        // {carry, hidden, 23 fraction, G, R, S}
  logic [26:0] norm;
  logic [26:0] y_ext;
  logic        sticky;
  logic [4:0]  lz;
  logic signed [10:0] e;
  logic [24:0] mant_r;
  logic        zx, zy;

  always_comb begin
    swap = (b[30:0] > a[30:0]);
    x = swap ? b : a;
    y = swap ? a : b;
    ex = x[30:23]; ey = y[30:23];
    zx = (ex == 8'h00);
    zy = (ey == 8'h00);
    d  = ex - ey;
    mx = {1'b0, 1'b1, x[22:0], 3'b000};
    y_ext = zy ? 27'h0 : {1'b1, y[22:0], 3'b000};
    sticky = 1'b0;
    if (d >= 8'd27) begin
      sticky = (y_ext != 27'h0);
      my = {27'h0, sticky};
    end else begin
      my = {1'b0, y_ext >> d};
      for (int i = 0; i < 27; i++)
        if (i < int'(d) && y_ext[i]) sticky = 1'b1;
      my[0] = my[0] | sticky;
    end
    sum = (x[31] ^ y[31]) ? (mx - my) : (mx + my);
    e = 11'(signed'({3'b000, ex}));
    lz = 5'd0;
    norm = sum[26:0];
    if (sum[27]) begin
      norm = {sum[27:2], sum[1] | sum[0]};
      e = e + 11'sd1;
    end else begin
      for (int i = 0; i < 27; i++)
        if (sum[26 - i] == 1'b0 && lz == 5'(i)) lz = 5'(i + 1);
      norm = sum[26:0] << lz;
      e = e - 11'(lz);
    end
    mant_r = {1'b0, norm[26:3]} + {24'h0, norm[2] & (norm[1] | norm[0] | norm[3])};
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      e = e + 11'sd1;
    end
    if (ex == 8'hFF) begin
      if (x[22:0] != 0 || (ey == 8'hFF && x[31] != y[31]))
        s = {1'b0, 8'hFF, 23'h400000};
      else
        s = x;
    end else if (zx) begin
      // both operands zero (or flushed subnormals)
      s = {x[31] & y[31], 31'h0};
    end else if (sum == 28'h0) begin
      s = 32'h0;
    end else if (e <= 11'sd0) begin
      s = {x[31], 31'h0};
    end else if (e >= 11'sd255) begin
      s = {x[31], 8'hFF, 23'h0};
    end else begin
      s = {x[31], e[7:0], mant_r[22:0]};
    end
  end
endmodule
