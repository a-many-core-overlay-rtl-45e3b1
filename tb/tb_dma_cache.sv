// tb_dma_cache: fills unaligned lines, looks up random addresses near them,
// invalidates and flushes, comparing hit and data with a reference model
// of a fully associative cache with round-robin replacement.  Also checks
// that a line invalidated while it is being filled does not become valid.
module tb_dma_cache;
  localparam int L = 4, W = 4, AW = 16;
  logic clk = 0, rst_n = 0;
  logic flush, lk_hit, fill_start, fill_we, fill_done, inv_valid;
  logic [AW-1:0] lk_addr, fill_addr, inv_addr;
  logic [1:0] fill_off;
  logic [31:0] lk_data, fill_data;
  int checks = 0, failures = 0;
  int mtag [L];
  logic [31:0] mdat [L][W];
  logic mval [L];
  int victim = 0, n_hit = 0, n_miss = 0;

  dma_cache #(.NUM_LINES(L), .LINE_WORDS(W), .AW(AW), .DW(32)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic idle();
    flush = 0; fill_start = 0; fill_we = 0; fill_done = 0; inv_valid = 0;
  endtask

  task automatic lookup(input int a);
    int hl;
    @(negedge clk); idle(); lk_addr = AW'(a); #1;
    hl = -1;
    for (int l = 0; l < L; l++) if (mval[l] && a - mtag[l] >= 0 && a - mtag[l] < W) hl = l;
    chk(lk_hit == (hl >= 0), $sformatf("hit @%0d", a));
    if (hl >= 0) begin n_hit++; chk(lk_data == mdat[hl][a - mtag[hl]], "data"); end
    else n_miss++;
  endtask

  task automatic fill(input int a, input logic kill);
    int v;
    v = victim;
    @(negedge clk); idle(); fill_start = 1; fill_addr = AW'(a);
    mval[v] = 0; mtag[v] = a; victim = (victim + 1) % L;
    for (int w = 0; w < W; w++) begin
      @(negedge clk); idle(); fill_we = 1; fill_off = 2'(w); fill_data = $urandom; mdat[v][w] = fill_data;
      if (kill && w == 1) begin
        inv_valid = 1; inv_addr = AW'(a + 2);
        for (int l = 0; l < L; l++) if (a + 2 - mtag[l] >= 0 && a + 2 - mtag[l] < W) mval[l] = 0;
      end
      fill_done = (w == W - 1);
    end
    if (!kill) mval[v] = 1;
    @(negedge clk); idle();
  endtask

  initial begin
    int base;
    idle(); lk_addr = 0; fill_addr = 0; inv_addr = 0; fill_off = 0; fill_data = 0;
    for (int l = 0; l < L; l++) begin mval[l] = 0; mtag[l] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    base = 1000;
    for (int t = 0; t < 300; t++) begin
      int r;
      r = $urandom_range(0, 19);
      if (r < 5) fill(base + $urandom_range(0, 40), r == 0);
      else if (r < 7) begin
        @(negedge clk); idle(); inv_valid = 1; inv_addr = AW'(base + $urandom_range(0, 44));
        for (int l = 0; l < L; l++)
          if (int'(inv_addr) - mtag[l] >= 0 && int'(inv_addr) - mtag[l] < W) mval[l] = 0;
      end else if (r == 7) begin
        @(negedge clk); idle(); flush = 1;
        for (int l = 0; l < L; l++) mval[l] = 0;
      end else lookup(base + $urandom_range(0, 44));
    end
    chk(n_hit > 20 && n_miss > 20, $sformatf("hits %0d misses %0d", n_hit, n_miss));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
