// fpu: the arithmetic unit of a core: a fused multiply-add and the
// function operators of the published overlay (reciprocal, square root and
// inverse square root).  FMA plus reciprocal is the combination the overlay
// uses when it serves matrix multiplication, LU decomposition and FFT at
// once; the square-root operators are the optional ones.
//
// Operations (op): FOP_FMA   y = +/-(a*b) + c   (neg selects the minus)
//                  FOP_RECIP y = 1/a
//                  FOP_RSQRT y = 1/sqrt(a)
//                  FOP_SQRT  y = sqrt(a) = a * (1/sqrt(a))
//                  FOP_PASS  y = a
// Each function is a piecewise quadratic of the mantissa evaluated with
// FMAs.  The coefficients live in two tables of 2^SEG_BITS segments that
// the host loads through coef_we/coef_idx/coef_data, so the operators are
// configured at run time by loading coefficients, as the published overlay
// does.  coef_idx = {table, segment}:
//   table 0 (1/m):       segment s covers m in 1 + [s, s+1)/2^SEG_BITS
//   table 1 (1/sqrt(m)): segment {h, k} covers m in (1+h) * (1 + [k, k+1)/2^(SEG_BITS-1));
//                        h = 1 when the unbiased exponent is odd (m in [2,4))
// The number of segments, the quadratic order and the pipeline depth are
// this implementation's choices.
//
// Timing: fully pipelined, one operation per cycle, the result LAT cycles
// after in_valid.  The arithmetic is computed in the first stage and then
// delayed LAT-1 stages so that synthesis retiming can spread it.  A TAG_W
// tag travels with each operation (the core uses it for the write-back).
module fpu
  import overlay_pkg::*;
  import fp32_pkg::*;
#(
  parameter int unsigned LAT      = 4,
  parameter int unsigned SEG_BITS = 6,
  parameter int unsigned TAG_W    = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  fop_e                op,
  input  logic                neg,
  input  logic [31:0]         a,
  input  logic [31:0]         b,
  input  logic [31:0]         c,
  input  logic [TAG_W-1:0]    in_tag,
  output logic                out_valid,
  output logic [31:0]         y,
  output logic [TAG_W-1:0]    out_tag,
  input  logic                coef_we,
  input  logic [SEG_BITS:0]   coef_idx,
  input  rcoef_t              coef_data
);
  rcoef_t      coef [2**(SEG_BITS+1)];
  logic [31:0] res;
  logic [SEG_BITS:0] ridx, sidx;

  assign ridx = {1'b0, a[22 -: SEG_BITS]};
  assign sidx = {1'b1, ~a[23], a[22 -: SEG_BITS-1]};

  always_ff @(posedge clk) begin
    if (coef_we) coef[coef_idx] <= coef_data;
  end

  always_comb begin
    unique case (op)
      FOP_FMA:   res = fp_fma(a, b, c, neg);
      FOP_RECIP: res = fp_recip(a, coef[ridx]);
      FOP_RSQRT: res = fp_rsqrt(a, coef[sidx]);
      FOP_SQRT:  res = fp_sqrt(a, coef[sidx]);
      default:   res = a;
    endcase
  end

  logic              v_q [LAT];
  logic [31:0]       y_q [LAT];
  logic [TAG_W-1:0]  t_q [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) v_q[i] <= 1'b0;
    end else begin
      v_q[0] <= in_valid;
      for (int i = 1; i < LAT; i++) v_q[i] <= v_q[i-1];
    end
  end

  always_ff @(posedge clk) begin
    y_q[0] <= res;
    t_q[0] <= in_tag;
    for (int i = 1; i < LAT; i++) begin
      y_q[i] <= y_q[i-1];
      t_q[i] <= t_q[i-1];
    end
  end

  assign out_valid = v_q[LAT-1];
  assign y         = y_q[LAT-1];
  assign out_tag   = t_q[LAT-1];
endmodule
