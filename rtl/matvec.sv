// matvec: the matrix-vector multiplication unit of a QPU.
//
// Applies a 2x2 complex matrix [a b; c d] to a pair of amplitudes
// (x0, x1), where x0 is the amplitude whose target-qubit bit is 0:
//     y0 = a*x0 + b*x1,   y1 = c*x0 + d*x1.
// The paper gives this function and the single-precision number format; the
// pipeline is this design's choice. Every complex product is
// (pr*xr - pi*xi) + j(pr*xi + pi*xr), each step rounded to single precision:
//   stage 1  16 real products
//   stage 2   8 real sums, giving the four complex products
//   stage 3   4 real sums, giving y0 and y1
// One pair enters and one leaves per cycle while en is high; when en is low
// every stage holds (the QPU stalls the whole pipeline on back-pressure).
// Latency is LATENCY = 3 enabled cycles from in_valid to out_valid.
module matvec
  import q2l_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   en,
  input  logic   in_valid,
  input  cpair_t x,
  input  cplx_t  a,
  input  cplx_t  b,
  input  cplx_t  c,
  input  cplx_t  d,
  output logic   out_valid,
  output cpair_t y
);
  localparam int unsigned LATENCY = 3;

  // term t: 0 = a*x0, 1 = b*x1, 2 = c*x0, 3 = d*x1
  cplx_t m   [4];
  cplx_t v   [4];
  fp32_t rr  [4], ii [4], ri [4], ir [4];     // combinational products
  fp32_t rr_q[4], ii_q[4], ri_q[4], ir_q[4];  // stage 1 registers
  cplx_t t   [4];                              // complex products
  cplx_t t_q [4];                              // stage 2 registers
  cpair_t ysum;
  logic [LATENCY-1:0] vld;

  always_comb begin
    m[0] = a; m[1] = b; m[2] = c; m[3] = d;
    v[0] = x[0]; v[1] = x[1]; v[2] = x[0]; v[3] = x[1];
  end

  for (genvar i = 0; i < 4; i++) begin : g_term
    fp32_mul u_rr (.a(m[i].re), .b(v[i].re), .p(rr[i]));
    fp32_mul u_ii (.a(m[i].im), .b(v[i].im), .p(ii[i]));
    fp32_mul u_ri (.a(m[i].re), .b(v[i].im), .p(ri[i]));
    fp32_mul u_ir (.a(m[i].im), .b(v[i].re), .p(ir[i]));
    fp32_add u_re (.a(rr_q[i]), .b({~ii_q[i][31], ii_q[i][30:0]}), .s(t[i].re));
    fp32_add u_im (.a(ri_q[i]), .b(ir_q[i]), .s(t[i].im));
  end

  for (genvar k = 0; k < 2; k++) begin : g_out
    fp32_add u_re (.a(t_q[2*k].re), .b(t_q[2*k+1].re), .s(ysum[k].re));
    fp32_add u_im (.a(t_q[2*k].im), .b(t_q[2*k+1].im), .s(ysum[k].im));
  end

  always_ff @(posedge clk) begin
    if (en) begin
      rr_q <= rr; ii_q <= ii; ri_q <= ri; ir_q <= ir;
      t_q  <= t;
      y    <= ysum;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  vld <= '0;
    else if (en) vld <= {vld[LATENCY-2:0], in_valid};
  end

  assign out_valid = vld[LATENCY-1];
endmodule
