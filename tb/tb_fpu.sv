// tb_fpu: fused multiply-add against a double-precision reference (at most
// one unit in the last place apart, the reference rounds twice), exact
// cases, negation, pass-through, and the reciprocal, inverse square root
// and square root with quadratic coefficients for 64 segments per table
// (relative error below 1e-6; square roots of negative numbers give the
// quiet NaN, of zero give zero / infinity).  Also checks
// that every result arrives exactly LAT cycles after its operands.
module tb_fpu;
  import overlay_pkg::*;
  import tb_fp_pkg::*;
  localparam int LAT = 4, SEG = 6, TW = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid, neg, out_valid, coef_we;
  fop_e op;
  logic [31:0] a, b, c, y;
  logic [TW-1:0] in_tag, out_tag;
  logic [SEG:0] coef_idx;
  rcoef_t coef_data;
  int checks = 0, failures = 0;
  int cyc = 0;

  typedef struct { int t; fop_e op; logic neg; logic [31:0] a, b, c; } job_t;
  job_t sent [256];

  fpu #(.LAT(LAT), .SEG_BITS(SEG), .TAG_W(TW)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // checker
  always @(posedge clk) if (rst_n && out_valid) begin
    job_t j;
    real  ref_r;
    j = sent[out_tag];
    checks++;
    if (cyc - j.t != LAT) begin failures++; $display("FAIL latency %0d", cyc - j.t); end
    checks++;
    unique case (j.op)
      FOP_FMA: begin
        ref_r = (j.neg ? -1.0 : 1.0) * f2r(j.a) * f2r(j.b) + f2r(j.c);
        if (ulp_diff(y, r2f(ref_r)) > 1) begin
          failures++; $display("FAIL fma %h*%h+%h neg=%0d = %h exp %h", j.a, j.b, j.c, j.neg, y, r2f(ref_r));
        end
      end
      FOP_RECIP: begin
        ref_r = 1.0 / f2r(j.a);
        if ((f2r(y) - ref_r) / ref_r > 1e-6 || (f2r(y) - ref_r) / ref_r < -1e-6) begin
          failures++; $display("FAIL recip %h = %h exp %h", j.a, y, r2f(ref_r));
        end
      end
      FOP_RSQRT, FOP_SQRT: begin
        if (j.a[31] && j.a[30:23] != 0) begin
          if (y != 32'h7fc0_0000) begin failures++; $display("FAIL sqrt of negative %h = %h", j.a, y); end
        end else if (j.a[30:23] == 0) begin
          if (y != (j.op == FOP_SQRT ? {j.a[31], 31'b0} : {j.a[31], 8'hff, 23'b0})) begin
            failures++; $display("FAIL sqrt of zero %h = %h", j.a, y);
          end
        end else begin
          ref_r = (j.op == FOP_SQRT) ? $sqrt(f2r(j.a)) : 1.0 / $sqrt(f2r(j.a));
          if ((f2r(y) - ref_r) / ref_r > 1e-6 || (f2r(y) - ref_r) / ref_r < -1e-6) begin
            failures++; $display("FAIL %s %h = %h exp %h", j.op.name(), j.a, y, r2f(ref_r));
          end
        end
      end
      default: if (y !== j.a) begin failures++; $display("FAIL pass"); end
    endcase
  end

  task automatic issue(input fop_e o, input logic n, input logic [31:0] x, input logic [31:0] w,
                       input logic [31:0] z, input logic [7:0] tg);
    @(negedge clk);
    in_valid = 1; op = o; neg = n; a = x; b = w; c = z; in_tag = tg;
    sent[tg] = '{t: cyc, op: o, neg: n, a: x, b: w, c: z};
  endtask

  initial begin
    int tg;
    in_valid = 0; op = FOP_FMA; neg = 0; a = 0; b = 0; c = 0; in_tag = 0;
    coef_we = 0; coef_idx = 0; coef_data = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int s = 0; s < (1 << SEG); s++) begin
      @(negedge clk); coef_we = 1; coef_idx = (SEG+1)'(s); coef_data = rcoef_t'(recip_coef(s, SEG));
      @(negedge clk); coef_idx = (SEG+1)'(s + (1 << SEG)); coef_data = rcoef_t'(rsqrt_coef(s, SEG));
    end
    @(negedge clk); coef_we = 0;
    tg = 0;
    // exact cases
    issue(FOP_FMA, 0, r2f(3.0), r2f(5.0), r2f(-2.0), 8'(tg++));
    issue(FOP_FMA, 1, r2f(3.0), r2f(5.0), r2f(15.0), 8'(tg++));
    issue(FOP_FMA, 0, r2f(0.0), r2f(5.0), r2f(7.25), 8'(tg++));
    issue(FOP_FMA, 0, r2f(1.5), r2f(1.5), r2f(0.0), 8'(tg++));
    issue(FOP_PASS, 0, 32'h1234_5678, 0, 0, 8'(tg++));
    issue(FOP_RECIP, 0, r2f(1.0), 0, 0, 8'(tg++));
    issue(FOP_RECIP, 0, r2f(-0.375), 0, 0, 8'(tg++));
    issue(FOP_SQRT, 0, r2f(4.0), 0, 0, 8'(tg++));
    issue(FOP_SQRT, 0, r2f(2.0), 0, 0, 8'(tg++));
    issue(FOP_RSQRT, 0, r2f(0.25), 0, 0, 8'(tg++));
    issue(FOP_RSQRT, 0, r2f(0.125), 0, 0, 8'(tg++));
    issue(FOP_SQRT, 0, r2f(-9.0), 0, 0, 8'(tg++));
    issue(FOP_RSQRT, 0, 32'h0000_0000, 0, 0, 8'(tg++));
    issue(FOP_SQRT, 0, 32'h8000_0000, 0, 0, 8'(tg++));
    for (int t = 0; t < 3000; t++) begin
      if ($urandom_range(0, 3) == 0) begin @(negedge clk); in_valid = 0; end
      if (t % 5 == 0) issue(FOP_RECIP, 0, rand_f(), 0, 0, 8'(tg++));
      else if (t % 5 == 1) issue(FOP_RSQRT, 0, {1'b0, rand_f()[30:0]}, 0, 0, 8'(tg++));
      else if (t % 5 == 2) issue(FOP_SQRT, 0, {1'b0, rand_f()[30:0]}, 0, 0, 8'(tg++));
      else issue(FOP_FMA, 1'($urandom), rand_f(), rand_f(), rand_f(), 8'(tg++));
      tg = tg % 256;
    end
    @(negedge clk); in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
