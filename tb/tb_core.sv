// tb_core: one core running a small block matrix product C = A*B
// (C is 3x4, three rank-1 updates as in the overlay's matrix mapping:
// B rows arrive on buffer B, A columns on buffer A, every A element is held
// for a whole row of C), then reciprocals and 1 - a*b sent towards the
// neighbour.  Operands are small integers, so the products are exact and
// compared bit for bit.  Checks the routes of the output words and that
// the first FMA instruction issues one operation per cycle (x*y cycles)
// when its inputs are waiting, the rate behind 2 flops/cycle per core.
module tb_core;
  import overlay_pkg::*;
  import tb_ovl_pkg::*;
  import tb_fp_pkg::*;
  localparam int X = 4, Y = 3, K = 3, CB = 16, SEG = 6;
  logic clk = 0, rst_n = 0;
  logic imem_we, coef_we, start, busy;
  logic [5:0] imem_addr;
  instr_t imem_data;
  logic [SEG:0] coef_idx;
  rcoef_t coef_data;
  logic in_a_push, in_a_full, in_b_push, in_b_full, out_valid, out_pop;
  logic [31:0] in_a_data, in_b_data;
  oword_t out_word;
  int checks = 0, failures = 0;

  core #(.LMEM_WORDS(256), .FIFO_DEPTH(8), .IMEM_DEPTH(64), .FPU_LAT(4), .SEG_BITS(SEG)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int A [Y][K], B [K][X];
  logic [31:0] qa[$], qb[$];
  oword_t got[$];
  real ra [2], fa [2], fb [2];
  int exec1_cycles = 0;

  // stream feeders
  always @(negedge clk) begin
    in_a_push = 0; in_b_push = 0;
    if (rst_n && qa.size() > 0 && !in_a_full && $urandom_range(0, 4) != 0) begin
      in_a_push = 1; in_a_data = qa.pop_front();
    end
    if (rst_n && qb.size() > 0 && !in_b_full && $urandom_range(0, 4) != 0) begin
      in_b_push = 1; in_b_data = qb.pop_front();
    end
    out_pop = out_valid && $urandom_range(0, 2) != 0;
    if (out_pop) got.push_back(out_word);
  end

  always @(posedge clk) if (dut.u_ctrl.state == 3 && dut.u_ctrl.pc == 1) exec1_cycles++;

  initial begin
    instr_t prog [9];
    in_a_push = 0; in_b_push = 0; in_a_data = 0; in_b_data = 0; out_pop = 0;
    imem_we = 0; imem_addr = 0; imem_data = '0; coef_we = 0; coef_idx = 0; coef_data = '0; start = 0;
    prog[0] = i_exec(FOP_PASS, SRC_FIFO_B, SRC_ZERO, SRC_ZERO, X, 1, ag(0), ag(0), ag(0, 1, 0), 1, 0);
    prog[1] = i_exec(FOP_FMA, SRC_FIFO_A, SRC_MEM0, SRC_ZERO, X, Y, ag(0, 1, 0), ag(0), ag(CB, 1, X),
                     1, 0, ROUTE_BUS, 0, 1);
    prog[2] = prog[0];
    prog[3] = i_exec(FOP_FMA, SRC_FIFO_A, SRC_MEM0, SRC_MEM1, X, Y, ag(0, 1, 0), ag(CB, 1, X),
                     ag(CB, 1, X), 1, 0, ROUTE_BUS, 0, 1);
    prog[4] = i_loop(2, K - 1);
    prog[5] = i_exec(FOP_PASS, SRC_MEM0, SRC_ZERO, SRC_ZERO, X, Y, ag(CB, 1, X), ag(0), ag(0), 0, 1);
    prog[6] = i_exec(FOP_RECIP, SRC_FIFO_A, SRC_ZERO, SRC_ZERO, 2, 1, ag(0), ag(0), ag(0), 0, 1,
                     ROUTE_NEXT_A);
    prog[7] = i_exec(FOP_FMA, SRC_FIFO_A, SRC_FIFO_B, SRC_ONE, 2, 1, ag(0), ag(0), ag(0), 0, 1,
                     ROUTE_NEXT_B, 1);
    prog[8] = i_halt();
    for (int i = 0; i < Y; i++) for (int k = 0; k < K; k++) A[i][k] = $urandom_range(0, 20) - 10;
    for (int k = 0; k < K; k++) for (int j = 0; j < X; j++) B[k][j] = $urandom_range(0, 20) - 10;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 9; k++) begin
      @(negedge clk); imem_we = 1; imem_addr = 6'(k); imem_data = prog[k];
    end
    @(negedge clk); imem_we = 0;
    for (int s = 0; s < (1 << SEG); s++) begin
      @(negedge clk); coef_we = 1; coef_idx = (SEG+1)'(s); coef_data = rcoef_t'(recip_coef(s, SEG));
    end
    @(negedge clk); coef_we = 0;
    // first step's operands are waiting before start
    for (int j = 0; j < X; j++) qb.push_back(r2f(real'(B[0][j])));
    for (int i = 0; i < Y; i++) qa.push_back(r2f(real'(A[i][0])));
    wait (qa.size() == 0 && qb.size() == 0);
    repeat (3) @(negedge clk);
    start = 1; @(negedge clk); start = 0;
    for (int k = 1; k < K; k++) begin
      for (int j = 0; j < X; j++) qb.push_back(r2f(real'(B[k][j])));
      for (int i = 0; i < Y; i++) qa.push_back(r2f(real'(A[i][k])));
    end
    for (int t = 0; t < 2; t++) begin ra[t] = 0.5 + real'($urandom_range(1, 1000)) / 100.0; qa.push_back(r2f(ra[t])); end
    for (int t = 0; t < 2; t++) begin
      fa[t] = real'($urandom_range(0, 16)) / 4.0; fb[t] = real'($urandom_range(0, 16)) / 8.0;
      qa.push_back(r2f(fa[t])); qb.push_back(r2f(fb[t]));
    end
    wait (!busy);
    repeat (20) @(negedge clk);
    chk(got.size() == X * Y + 4, $sformatf("output words %0d", got.size()));
    chk(exec1_cycles == X * Y, $sformatf("FMA rate: %0d cycles for %0d operations", exec1_cycles, X * Y));
    if (got.size() == X * Y + 4) begin
      for (int i = 0; i < Y; i++)
        for (int j = 0; j < X; j++) begin
          int s;
          oword_t w;
          s = 0;
          for (int k = 0; k < K; k++) s += A[i][k] * B[k][j];
          w = got.pop_front();
          chk(w.data == r2f(real'(s)) && w.route == ROUTE_BUS, $sformatf("C[%0d][%0d]=%h exp %0d", i, j, w.data, s));
        end
      for (int t = 0; t < 2; t++) begin
        oword_t w;
        real e;
        w = got.pop_front();
        e = (f2r(w.data) - 1.0 / ra[t]) * ra[t];
        chk(e < 1e-6 && e > -1e-6 && w.route == ROUTE_NEXT_A, "recip");
      end
      for (int t = 0; t < 2; t++) begin
        oword_t w;
        w = got.pop_front();
        chk(w.data == r2f(1.0 - fa[t] * fb[t]) && w.route == ROUTE_NEXT_B, "1 - a*b");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
