// tb_overlay_top: end-to-end test of the whole overlay at reduced sizes (4 cores,
// 256-word local memories, a 16-line DMA cache with 4-word lines).
//
// The testbench plays the host processor (it writes programs, switches,
// coefficients and DMA descriptors through the configuration port) and the
// external memory (axi_mem_model on the AXI port).  Two jobs run one after
// the other on the same overlay:
//  1. Matrix multiplication C = A*B with the block algorithm of the overlay:
//     every core owns X columns of C; for each k the DMA scatters row k of B
//     (X words to each core, buffer B) and broadcasts column k of A (buffer
//     A, read through the DMA cache from a row-major A); every core does
//     c[i][j] += a[i][k]*b[k][j] with each A word held for a row of C; at the
//     end the cores send their C blocks over the result bus.  Integer-valued
//     operands make the result exact, so it is compared bit for bit.
//  2. LU decomposition (no pivoting) of an NL x NL matrix (column-major)
//     on a chain of N cores: the core handling column q computes column q
//     of L (with the reciprocal of the pivot) and row q of U, and passes the
//     updated trailing columns to the next core over the neighbour link.
//     With more columns than cores the work is done in passes of N columns:
//     the last core of a pass writes the updated trailing matrix back to
//     memory over the result bus and the next pass streams it in again.
//     Compared with a double-precision reference (relative error 1e-4).
// It counts how often each mechanism of the design happens and fails if
// one never did: DMA cache hits and misses, uncached bursts, stream
// back-pressure from full input buffers, cores waiting on empty buffers,
// held operands, program loops, broadcasts, neighbour transfers, result-bus
// writes and reciprocal operations.  It also prints the cycle counts.
module tb_overlay_top;
  import overlay_pkg::*;
  import tb_ovl_pkg::*;
  import tb_fp_pkg::*;
  localparam int N    = 4;          // cores
  localparam int SEG  = 6;              // reciprocal segments (log2)
  localparam int NM   = 8;         // matrix size for the product
  localparam int X    = NM / N;         // C columns per core
  localparam int Y    = NM;             // C rows per core block
  localparam int NL   = 8;         // LU matrix size
  localparam int AB   = 0, BB = NM * NM, CBASE = 2 * NM * NM;   // external addresses
  localparam int LUA  = 3 * NM * NM, LUR = LUA + NL * NL;
  localparam int CB   = 2 * X;          // C block in local memory

  logic clk = 0, rst_n = 0;
  logic cfg_valid, cfg_ready, dma_idle;
  cfg_addr_t cfg_addr;
  logic [CFG_W-1:0] cfg_data;
  logic [N-1:0] core_busy;
  logic [31:0] m_axi_araddr, m_axi_rdata, m_axi_awaddr, m_axi_wdata;
  logic [7:0] m_axi_arlen, m_axi_awlen;
  logic m_axi_arvalid, m_axi_arready, m_axi_rlast, m_axi_rvalid, m_axi_rready;
  logic m_axi_awvalid, m_axi_awready, m_axi_wlast, m_axi_wvalid, m_axi_wready, m_axi_bvalid, m_axi_bready;
  int checks = 0, failures = 0;
  int cyc = 0;

  overlay_top #(.N_CORES(4), .LMEM_WORDS(256), .FIFO_DEPTH(8), .NUM_LINES(16), .LINE_WORDS(4),
    .MAX_BURST(8)) dut (.*);
  axi_mem_model #(.WORDS(512), .RD_LAT(8), .STALL(1)) mem (
    .clk, .rst_n, .araddr(m_axi_araddr), .arlen(m_axi_arlen), .arvalid(m_axi_arvalid),
    .arready(m_axi_arready), .rdata(m_axi_rdata), .rlast(m_axi_rlast), .rvalid(m_axi_rvalid),
    .rready(m_axi_rready), .awaddr(m_axi_awaddr), .awlen(m_axi_awlen), .awvalid(m_axi_awvalid),
    .awready(m_axi_awready), .wdata(m_axi_wdata), .wlast(m_axi_wlast), .wvalid(m_axi_wvalid),
    .wready(m_axi_wready), .bvalid(m_axi_bvalid), .bready(m_axi_bready));
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------------------------------------------------- mechanisms
  int n_hit, n_miss, n_burst, n_backp, n_wait, n_hold, n_loop, n_bcast, n_left, n_bus, n_recip;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_dma.rstate == 1 && !dut.u_dma.rfin && dut.u_dma.rd.cached && dut.u_dma.lk_hit && dut.u_dma.st_ready) n_hit++;
    if (dut.u_dma.u_cache.fill_start) n_miss++;
    if (m_axi_arvalid && m_axi_arready && m_axi_arlen != 0 && !dut.u_dma.rd.cached) n_burst++;
    if (dut.st_valid && !dut.st_ready) n_backp++;
    if (dut.st_valid && dut.st_ready && dut.st_word.bcast) n_bcast++;
    if (dut.bus_valid) n_bus++;
    for (int i = 0; i < N; i++) begin
      if (dut.u_net.sw[i].a_left && dut.a_push[i]) n_left++;
      if (dut.u_net.sw[i].b_left && dut.b_push[i]) n_left++;
    end
  end
  for (genvar i = 0; i < N; i++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      if (dut.g_core[i].u_core.u_ctrl.state == 3 && !dut.g_core[i].u_core.u_ctrl.iss_valid) n_wait++;
      if (dut.g_core[i].u_core.u_ctrl.iss_valid && dut.g_core[i].u_core.u_ctrl.cur.hold_a
          && !dut.g_core[i].u_core.u_ctrl.pop_a) n_hold++;
      if (dut.g_core[i].u_core.u_ctrl.state == 2 && dut.g_core[i].u_core.u_ctrl.ins.op == OP_LOOP
          && dut.g_core[i].u_core.u_ctrl.remaining != 0) n_loop++;
      if (dut.g_core[i].u_core.u_ctrl.iss_valid && dut.g_core[i].u_core.u_ctrl.cur.fop == FOP_RECIP) n_recip++;
    end
  end

  // ---------------------------------------------------------------- host
  task automatic cfg(input cfg_target_e t, input int core, input int index, input logic [CFG_W-1:0] d);
    @(negedge clk);
    cfg_valid = 1; cfg_addr.target = t; cfg_addr.core = CORE_ID_W'(core);
    cfg_addr.index = 12'(index); cfg_data = d;
    @(posedge clk); while (!cfg_ready) @(posedge clk);
    @(negedge clk); cfg_valid = 0;
  endtask

  task automatic load_prog(input int core, input instr_t p [$]);
    foreach (p[k]) cfg(CT_IMEM, core, k, CFG_W'(p[k]));
  endtask

  task automatic wait_done();
    repeat (4) @(posedge clk);
    while (core_busy != 0 || !dma_idle) @(posedge clk);
  endtask

  int A [NM][NM], B [NM][NM];
  real L [NL][NL];

  initial begin
    instr_t p [$];
    int t0;
    cfg_valid = 0; cfg_addr = '0; cfg_data = '0;
    for (int a = 0; a < 512; a++) mem.mem[a] = 0;
    repeat (3) @(posedge clk); rst_n = 1;

    // ------------------------------------------------ matrix product
    for (int i = 0; i < NM; i++) for (int j = 0; j < NM; j++) begin
      A[i][j] = $urandom_range(0, 14) - 7; B[i][j] = $urandom_range(0, 14) - 7;
      mem.mem[AB + i * NM + j] = r2f(real'(A[i][j]));
      mem.mem[BB + i * NM + j] = r2f(real'(B[i][j]));
    end
    p = {};
    p.push_back(i_exec(FOP_PASS, SRC_FIFO_B, SRC_ZERO, SRC_ZERO, X, 1, ag(0), ag(0), ag(0, 1, 0), 1, 0));
    p.push_back(i_exec(FOP_FMA, SRC_FIFO_A, SRC_MEM0, SRC_ZERO, X, Y, ag(0, 1, 0), ag(0), ag(CB, 1, X),
                       1, 0, ROUTE_BUS, 0, 1));
    p.push_back(p[0]);
    p.push_back(i_exec(FOP_FMA, SRC_FIFO_A, SRC_MEM0, SRC_MEM1, X, Y, ag(0, 1, 0), ag(CB, 1, X),
                       ag(CB, 1, X), 1, 0, ROUTE_BUS, 0, 1));
    p.push_back(i_loop(2, NM - 1));
    p.push_back(i_exec(FOP_PASS, SRC_MEM0, SRC_ZERO, SRC_ZERO, X, Y, ag(CB, 1, X), ag(0), ag(0), 0, 1));
    p.push_back(i_halt());
    for (int c = 0; c < N; c++) begin
      load_prog(c, p);
      cfg(CT_SWITCH, c, 0, '0);
      cfg(CT_WDESC, c, 0, CFG_W'(wdsc(CBASE + c * X, X, 1, Y, NM)));
    end
    t0 = cyc;
    cfg(CT_START, 0, 0, CFG_W'({N{1'b1}}));
    for (int k = 0; k < NM; k++) begin
      cfg(CT_RDESC, 0, 0, CFG_W'(rdsc(BB + k * NM, X, 1, N, X, DEST_SCATTER, 0, 1, 0)));
      cfg(CT_RDESC, 0, 0, CFG_W'(rdsc(AB + k, Y, NM, 1, 0, DEST_BCAST, 0, 0, 1, k == 0)));
    end
    wait_done();
    $display("matrix product %0dx%0d on %0d cores: %0d cycles", NM, NM, N, cyc - t0);
    for (int i = 0; i < NM; i++) for (int j = 0; j < NM; j++) begin
      int s;
      s = 0;
      for (int k = 0; k < NM; k++) s += A[i][k] * B[k][j];
      chk(mem.mem[CBASE + i * NM + j] == r2f(real'(s)),
          $sformatf("C[%0d][%0d] = %h exp %0d", i, j, mem.mem[CBASE + i * NM + j], s));
    end

    // ------------------------------------------------ LU decomposition
    for (int c = 0; c < N; c++)
      for (int s = 0; s < (1 << SEG); s++) cfg(CT_RCOEF, c, s, CFG_W'(recip_coef(s, SEG)));
    for (int i = 0; i < NL; i++) for (int j = 0; j < NL; j++) begin
      L[i][j] = (i == j) ? real'(NL) + 8.0 + real'($urandom_range(0, 16)) / 4.0 : real'($urandom_range(0, 16)) / 8.0 - 1.0;
      mem.mem[LUA + j * NL + i] = r2f(L[i][j]);
      L[i][j] = f2r(mem.mem[LUA + j * NL + i]);
    end
    // The chain has N cores, so the columns are done in passes of N: core g
    // of pass P handles column q = P*N + g.  The last core of a pass sends
    // the updated trailing columns over the result bus back into the result
    // matrix, and the next pass streams that trailing matrix in again.
    t0 = cyc;
    for (int pass = 0; pass * N < NL; pass++) begin
      int q0, m0;
      q0 = pass * N; m0 = NL - q0;
      for (int g = 0; g < N && q0 + g < NL; g++) begin
        int m, q;
        logic last;
        q = q0 + g; m = NL - q; last = (g == N - 1) && (m > 1);
        p = {};
        if (m > 1) begin
          // 0..1: pivot to memory (U), its reciprocal
          p.push_back(i_exec(FOP_PASS, SRC_FIFO_A, SRC_ZERO, SRC_ZERO, 1, 1, ag(0), ag(0), ag(0), 1, 1));
          p.push_back(i_exec(FOP_RECIP, SRC_MEM0, SRC_ZERO, SRC_ZERO, 1, 1, ag(0), ag(0), ag(1), 1, 0));
          // 2: column of L = a * (1/pivot), kept and sent to memory
          p.push_back(i_exec(FOP_FMA, SRC_FIFO_A, SRC_MEM1, SRC_ZERO, m - 1, 1, ag(0), ag(1), ag(4, 1, 0),
                             1, 1));
          // 3..4 per later column: top word is U, the rest a - l*u to the
          // next core (or to memory from the last core of a pass)
          p.push_back(i_exec(FOP_PASS, SRC_FIFO_A, SRC_ZERO, SRC_ZERO, 1, 1, ag(0), ag(0), ag(2), 1, 1));
          p.push_back(i_exec(FOP_FMA, SRC_MEM0, SRC_MEM1, SRC_FIFO_A, m - 1, 1, ag(4, 1, 0), ag(2), ag(0),
                             0, 1, last ? ROUTE_BUS : ROUTE_NEXT_A, 1));
          p.push_back(i_loop(3, m - 1));
          cfg(CT_WDESC, g, 0, CFG_W'(wdsc(LUR + q * NL + q, 1, 1, 1, 0)));
          cfg(CT_WDESC, g, 0, CFG_W'(wdsc(LUR + q * NL + q + 1, m - 1, 1, 1, 0)));
          if (last) cfg(CT_WDESC, g, 0, CFG_W'(wdsc(LUR + (q + 1) * NL + q, m, 1, m - 1, NL)));
          else      cfg(CT_WDESC, g, 0, CFG_W'(wdsc(LUR + (q + 1) * NL + q, m - 1, NL, 1, 0)));
        end else begin
          p.push_back(i_exec(FOP_PASS, SRC_FIFO_A, SRC_ZERO, SRC_ZERO, 1, 1, ag(0), ag(0), ag(0), 0, 1));
          cfg(CT_WDESC, g, 0, CFG_W'(wdsc(LUR + q * NL + q, 1, 1, 1, 0)));
        end
        p.push_back(i_halt());
        load_prog(g, p);
        cfg(CT_SWITCH, g, 0, CFG_W'(switch_t'{a_left: g != 0, b_left: 1'b0}));
      end
      cfg(CT_START, 0, 0, CFG_W'((NL - q0 >= N) ? {N{1'b1}} : ((1 << (NL - q0)) - 1)));
      if (pass == 0) cfg(CT_RDESC, 0, 0, CFG_W'(rdsc(LUA, NL * NL, 1, 1, 0, DEST_CORE, 0, 0, 0)));
      else cfg(CT_RDESC, 0, 0, CFG_W'(rdsc(LUR + q0 * NL + q0, m0, 1, m0, NL, DEST_CORE, 0, 0, 0)));
      wait_done();
    end
    $display("LU %0dx%0d on %0d cores: %0d cycles", NL, NL, N, cyc - t0);
    // reference: in-place Doolittle without pivoting
    for (int k = 0; k < NL - 1; k++) begin
      for (int s = k + 1; s < NL; s++) L[s][k] = L[s][k] / L[k][k];
      for (int j = k + 1; j < NL; j++) for (int i = k + 1; i < NL; i++) L[i][j] -= L[i][k] * L[k][j];
    end
    for (int i = 0; i < NL; i++) for (int j = 0; j < NL; j++) begin
      real g, e;
      g = f2r(mem.mem[LUR + j * NL + i]);
      e = g - L[i][j];
      if (e < 0) e = -e;
      chk(e <= 1e-4 * (1.0 + (L[i][j] < 0 ? -L[i][j] : L[i][j])),
          $sformatf("LU[%0d][%0d] = %f exp %f", i, j, g, L[i][j]));
    end

    $display("mechanisms: cache hits %0d, misses %0d, uncached bursts %0d, stream back-pressure %0d,",
             n_hit, n_miss, n_burst, n_backp);
    $display("  core waits %0d, held operands %0d, loop jumps %0d, broadcast words %0d,",
             n_wait, n_hold, n_loop, n_bcast);
    $display("  neighbour words %0d, bus writes %0d, reciprocals %0d", n_left, n_bus, n_recip);
    chk(n_hit > 0, "cache hit happened");
    chk(n_miss > 0, "cache miss happened");
    chk(n_burst > 0, "uncached burst happened");
    chk(n_backp > 0, "stream back-pressure happened");
    chk(n_wait > 0, "core wait happened");
    chk(n_hold > 0, "held operand happened");
    chk(n_loop > 0, "loop happened");
    chk(n_bcast > 0, "broadcast happened");
    chk(n_left > 0, "neighbour transfer happened");
    chk(n_bus > 0, "bus write happened");
    chk(n_recip == NL - 1, "reciprocals");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
