// fp32_mul: combinational IEEE-754 single-precision multiplier.
//
// The paper holds every amplitude as a pair of single-precision floats and
// applies gates with floating-point arithmetic; it does not describe the
// arithmetic units themselves, so this one is this design's own. It rounds to
// nearest, ties to even, and flushes subnormal inputs and results to a signed
// zero (the usual FPGA floating-point behaviour). An operand with the
// all-ones exponent gives an infinity or a quiet NaN; NaN payloads are not
// kept. Interface: a, b in, p = a * b out, no clock.
module fp32_mul
  import q2l_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t p
);
  logic        sa, sb, sp;
  logic [7:0]  ea, eb;
  logic [23:0] ma, mb;
  logic [47:0] prod;
  logic [23:0] mant;
  logic        g, st;
  logic [24:0] mant_r;
  logic signed [10:0] e;

  always_comb begin
    sa = a[31]; sb = b[31];
    ea = a[30:23]; eb = b[30:23];
    ma = {1'b1, a[22:0]};
    mb = {1'b1, b[22:0]};
    sp = sa ^ sb;
    prod = ma * mb;
    e = 11'(signed'({3'b000, ea})) + 11'(signed'({3'b000, eb})) - 11'sd127;
    if (prod[47]) begin
      mant = prod[47:24];
      g    = prod[23];
      st   = |prod[22:0];
      e    = e + 11'sd1;
    end else begin
      mant = prod[46:23];
      g    = prod[22];
      st   = |prod[21:0];
    end
    mant_r = {1'b0, mant} + {24'h0, g & (st | mant[0])};
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      e      = e + 11'sd1;
    end
    if (ea == 8'hFF || eb == 8'hFF) begin
      // infinity times zero is NaN, anything else infinite stays infinite
      if ((ea == 8'hFF && a[22:0] != 0) || (eb == 8'hFF && b[22:0] != 0) ||
          ea == 8'h00 || eb == 8'h00)
        p = {1'b0, 8'hFF, 23'h400000};
      else
        p = {sp, 8'hFF, 23'h0};
    end else if (ea == 8'h00 || eb == 8'h00 || e <= 11'sd0) begin
      p = {sp, 31'h0};
    end else if (e >= 11'sd255) begin
      p = {sp, 8'hFF, 23'h0};
    end else begin
      p = {sp, e[7:0], mant_r[22:0]};
    end
  end
endmodule
