// dma_cache: cache of burst lines on the DMA read path.
//
// When the DMA needs an element that is not stored sequentially after the
// previous one, it fetches a burst of LINE_WORDS consecutive words that
// starts at the requested element; the first word goes straight to the
// cores and the whole burst is kept here as one line.  Later requests for
// any of those words hit.  This is the behaviour of the published DMA
// cache, whose line size and number of lines are configuration parameters
// (Table I pairs them with the local-memory size: with 32 KB per core the
// line is one word and the cache 1 KB, that is 256 lines).
//
// Because a line starts at the requested address rather than at an aligned
// one, the cache is fully associative: a line with tag t holds words
// t .. t+LINE_WORDS-1 and every line is compared on a lookup (lk_addr ->
// lk_hit/lk_data, combinational).  Lines are replaced round-robin.
// Filling: fill_start allocates the next victim for fill_addr, fill_we
// writes word fill_off of it, fill_done makes it valid.  flush invalidates
// everything; inv_valid invalidates every line holding inv_addr (the DMA
// raises it for each word it writes to memory, which keeps the cache
// coherent with its own writes).  The associative organisation, the
// replacement order and the invalidation are this implementation's choices.
module dma_cache #(
  parameter int unsigned NUM_LINES  = 256,
  parameter int unsigned LINE_WORDS = 1,
  parameter int unsigned AW         = 32,
  parameter int unsigned DW         = 32,
  localparam int unsigned OW        = (LINE_WORDS > 1) ? $clog2(LINE_WORDS) : 1,
  localparam int unsigned LW        = (NUM_LINES > 1) ? $clog2(NUM_LINES) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          flush,
  input  logic [AW-1:0] lk_addr,
  output logic          lk_hit,
  output logic [DW-1:0] lk_data,
  input  logic          fill_start,
  input  logic [AW-1:0] fill_addr,
  input  logic          fill_we,
  input  logic [OW-1:0] fill_off,
  input  logic [DW-1:0] fill_data,
  input  logic          fill_done,
  input  logic          inv_valid,
  input  logic [AW-1:0] inv_addr
);
  logic [AW-1:0] tag   [NUM_LINES];
  logic [DW-1:0] data  [NUM_LINES][LINE_WORDS];
  logic [NUM_LINES-1:0] valid;
  logic [LW-1:0] victim, cur;
  logic          killed;

  function automatic logic covers(input logic [AW-1:0] t, input logic [AW-1:0] a);
    logic [AW-1:0] d;
    d = a - t;
    return d < AW'(LINE_WORDS);
  endfunction

  always_comb begin
    lk_hit  = 1'b0;
    lk_data = '0;
    for (int l = 0; l < NUM_LINES; l++) begin
      if (valid[l] && covers(tag[l], lk_addr)) begin
        lk_hit  = 1'b1;
        lk_data = data[l][OW'(lk_addr - tag[l])];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (fill_start) tag[victim] <= fill_addr;
    if (fill_we) data[cur][fill_off] <= fill_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid  <= '0;
      victim <= '0;
      cur    <= '0;
      killed <= 1'b0;
    end else begin
      if (fill_start) begin
        valid[victim] <= 1'b0;
        cur           <= victim;
        victim        <= (32'(victim) + 1 == NUM_LINES) ? '0 : victim + 1'b1;
        killed        <= 1'b0;
      end
      if (inv_valid) begin
        for (int l = 0; l < NUM_LINES; l++)
          if (covers(tag[l], inv_addr)) valid[l] <= 1'b0;
        if (covers(fill_start ? fill_addr : tag[cur], inv_addr)) killed <= 1'b1;
      end
      if (fill_done && !killed && !(inv_valid && covers(tag[cur], inv_addr))) valid[cur] <= 1'b1;
      if (flush) valid <= '0;
    end
  end
endmodule
