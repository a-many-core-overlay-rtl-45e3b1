// tb_dma: DMA engine against the behavioural AXI memory (random stalls).
// Read checks: an uncached row walk scattered over two cores (bursts of up
// to MAX_BURST words), a strided uncached walk (single beats), cached
// column walks of a row-major matrix (the first column misses and fetches
// one line per row, the next three columns hit: the number of bursts is
// checked), and a cached read after a write to a cached word (the line must
// have been invalidated).  Write checks: two cores' results arriving on the
// bus in random interleaving land at their descriptors' addresses.
module tb_dma;
  import overlay_pkg::*;
  import tb_ovl_pkg::*;
  localparam int N = 2, LINES = 8, LW = 4, MB = 4;
  logic clk = 0, rst_n = 0;
  logic rdesc_valid, rdesc_ready, wdesc_valid, wdesc_ready;
  rdesc_t rdesc;
  wdesc_t wdesc;
  logic [CORE_ID_W-1:0] wdesc_core;
  logic st_valid, st_ready, bus_valid, idle;
  dword_t st_word;
  logic [31:0] bus_data;
  logic [CORE_ID_W-1:0] bus_core;
  logic [N-1:0] bus_ready;
  logic [31:0] m_axi_araddr, m_axi_rdata, m_axi_awaddr, m_axi_wdata;
  logic [7:0] m_axi_arlen, m_axi_awlen;
  logic m_axi_arvalid, m_axi_arready, m_axi_rlast, m_axi_rvalid, m_axi_rready;
  logic m_axi_awvalid, m_axi_awready, m_axi_wlast, m_axi_wvalid, m_axi_wready, m_axi_bvalid, m_axi_bready;
  int checks = 0, failures = 0;
  dword_t expq[$];
  logic [31:0] busq [N][$];

  dma #(.N_CORES(N), .NUM_LINES(LINES), .LINE_WORDS(LW), .MAX_BURST(MB)) dut (.*);
  axi_mem_model #(.WORDS(1024), .RD_LAT(3), .STALL(1)) mem (
    .clk, .rst_n, .araddr(m_axi_araddr), .arlen(m_axi_arlen), .arvalid(m_axi_arvalid),
    .arready(m_axi_arready), .rdata(m_axi_rdata), .rlast(m_axi_rlast), .rvalid(m_axi_rvalid),
    .rready(m_axi_rready), .awaddr(m_axi_awaddr), .awlen(m_axi_awlen), .awvalid(m_axi_awvalid),
    .awready(m_axi_awready), .wdata(m_axi_wdata), .wlast(m_axi_wlast), .wvalid(m_axi_wvalid),
    .wready(m_axi_wready), .bvalid(m_axi_bvalid), .bready(m_axi_bready));
  always #5 clk = ~clk;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // stream sink
  always @(negedge clk) st_ready = $urandom_range(0, 3) != 0;
  always @(posedge clk) if (rst_n && st_valid && st_ready) begin
    dword_t e;
    chk(expq.size() > 0, "unexpected stream word");
    if (expq.size() > 0) begin
      e = expq.pop_front();
      chk(st_word == e, $sformatf("stream %h/%0d/%0d/%0d exp %h/%0d/%0d/%0d", st_word.data, st_word.core,
          st_word.bcast, st_word.port, e.data, e.core, e.bcast, e.port));
    end
  end

  // bus source: cores offer their words when the DMA is ready for them
  always @(negedge clk) begin
    int c;
    bus_valid = 0; bus_core = 0; bus_data = 0;
    c = $urandom_range(0, N - 1);
    if (rst_n && busq[c].size() > 0 && bus_ready[c] && $urandom_range(0, 1) == 1) begin
      bus_valid = 1; bus_core = CORE_ID_W'(c); bus_data = busq[c].pop_front();
    end
  end

  task automatic push_r(input rdesc_t d);
    @(negedge clk); rdesc_valid = 1; rdesc = d;
    @(posedge clk); while (!rdesc_ready) @(posedge clk);
    @(negedge clk); rdesc_valid = 0;
  endtask

  task automatic push_w(input int c, input wdesc_t d);
    @(negedge clk); wdesc_valid = 1; wdesc = d; wdesc_core = CORE_ID_W'(c);
    @(posedge clk); while (!wdesc_ready) @(posedge clk);
    @(negedge clk); wdesc_valid = 0;
  endtask

  task automatic expect_walk(input rdesc_t d);
    for (int o = 0; o < int'(d.n_out); o++)
      for (int i = 0; i < int'(d.n_in); i++) begin
        dword_t w;
        int a;
        a = int'(d.base) + i * int'(d.s_in) + o * int'(d.s_out);
        w.data = mem.mem[a]; w.core = (d.mode == DEST_SCATTER) ? CORE_ID_W'(int'(d.core) + o) : d.core;
        w.bcast = (d.mode == DEST_BCAST); w.port = d.port;
        expq.push_back(w);
      end
  endtask

  task automatic wait_idle();
    repeat (3) @(posedge clk);
    while (!(idle && expq.size() == 0)) @(posedge clk);
  endtask

  initial begin
    rdesc_t d;
    int b0;
    logic [31:0] w0 [7], w1 [4];
    rdesc_valid = 0; wdesc_valid = 0; rdesc = '0; wdesc = '0; wdesc_core = 0;
    for (int a = 0; a < 1024; a++) mem.mem[a] = $urandom;
    repeat (3) @(posedge clk); rst_n = 1;
    // 1: uncached rows scattered over the cores
    d = rdsc(100, 10, 1, 2, 20, DEST_SCATTER, 0, 0, 0);
    expect_walk(d); push_r(d); wait_idle();
    chk(mem.n_bursts == 6, $sformatf("row bursts %0d", mem.n_bursts));
    // 2: strided uncached
    b0 = mem.n_bursts;
    d = rdsc(300, 5, 3, 1, 0, DEST_CORE, 1, 1, 0);
    expect_walk(d); push_r(d); wait_idle();
    chk(mem.n_bursts - b0 == 5, "single beats");
    // 3: cached columns of an 8x8 row-major matrix at 200
    b0 = mem.n_bursts;
    for (int k = 0; k < 4; k++) begin
      d = rdsc(200 + k, 8, 8, 1, 0, DEST_BCAST, 0, 1, 1, k == 0);
      expect_walk(d); push_r(d);
    end
    wait_idle();
    chk(mem.n_bursts - b0 == 8, $sformatf("cached column bursts %0d", mem.n_bursts - b0));
    // 4: writes from two cores
    push_w(0, wdsc(600, 3, 1, 2, 10));
    push_w(1, wdsc(700, 4, 2, 1, 0));
    push_w(0, wdsc(201, 1, 1, 1, 0));      // overwrites a cached word
    for (int i = 0; i < 7; i++) begin w0[i] = $urandom; busq[0].push_back(w0[i]); end
    for (int i = 0; i < 4; i++) begin w1[i] = $urandom; busq[1].push_back(w1[i]); end
    while (busq[0].size() > 0 || busq[1].size() > 0) @(posedge clk);
    wait_idle();
    for (int o = 0; o < 2; o++) for (int i = 0; i < 3; i++)
      chk(mem.mem[600 + 10 * o + i] == w0[3 * o + i], "write core 0");
    for (int i = 0; i < 4; i++) chk(mem.mem[700 + 2 * i] == w1[i], "write core 1");
    chk(mem.mem[201] == w0[6], "write into cached line");
    // 5: cached read after the write must see the new word
    b0 = mem.n_bursts;
    d = rdsc(200, 4, 1, 1, 0, DEST_CORE, 0, 0, 1);
    expect_walk(d); push_r(d); wait_idle();
    chk(mem.n_bursts - b0 == 1, "invalidated line refetched");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
