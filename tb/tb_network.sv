// tb_network: random traffic on all paths of the network (DMA stream with
// core, broadcast and unmatched words; neighbour words on both routes; bus
// words) under random buffer-full and bus-ready states and changing switch
// settings.  Every cycle the pushes, data, pops, stream ready and bus
// grant are compared with a reference model that keeps its own
// round-robin pointer.
module tb_network;
  import overlay_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  logic sw_we;
  logic [CORE_ID_W-1:0] sw_core;
  switch_t sw_data;
  logic dma_valid, dma_ready;
  dword_t dma_word;
  logic [N-1:0] out_valid, out_pop, a_full, b_full, a_push, b_push, bus_ready;
  oword_t [N-1:0] out_word;
  logic [N-1:0][31:0] a_data, b_data;
  logic bus_valid;
  logic [31:0] bus_data;
  logic [CORE_ID_W-1:0] bus_core;
  int checks = 0, failures = 0;
  switch_t msw [N];
  int rr = 0;
  int n_bcast = 0, n_left = 0, n_bus = 0, n_block = 0;

  network #(.N_CORES(N)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    sw_we = 0; sw_core = 0; sw_data = '0; dma_valid = 0; dma_word = '0;
    out_valid = 0; out_word = '0; a_full = 0; b_full = 0; bus_ready = 0;
    for (int i = 0; i < N; i++) msw[i] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      logic [N-1:0] ta, tb, ea_push, eb_push, ep, req;
      logic erdy;
      int g, l;
      @(negedge clk);
      sw_we = ($urandom_range(0, 19) == 0);
      sw_core = CORE_ID_W'($urandom_range(0, N));
      sw_data = switch_t'($urandom);
      dma_valid = $urandom_range(0, 1);
      dma_word.data = $urandom; dma_word.core = CORE_ID_W'($urandom_range(0, N));
      dma_word.bcast = ($urandom_range(0, 3) == 0); dma_word.port = 1'($urandom);
      for (int i = 0; i < N; i++) begin
        out_valid[i] = $urandom_range(0, 1);
        out_word[i].data = $urandom;
        out_word[i].route = route_e'($urandom_range(0, 2));
      end
      a_full = N'($urandom); b_full = N'($urandom); bus_ready = N'($urandom);
      #1;
      // reference model
      for (int i = 0; i < N; i++) begin
        logic hit;
        hit = dma_word.bcast || int'(dma_word.core) == i;
        ta[i] = hit && !dma_word.port && !msw[i].a_left;
        tb[i] = hit && dma_word.port && !msw[i].b_left;
      end
      erdy = ((ta & a_full) == 0) && ((tb & b_full) == 0);
      ep = '0;
      for (int i = 0; i < N; i++) begin
        l = (i + N - 1) % N;
        ea_push[i] = dma_valid && erdy && ta[i];
        eb_push[i] = dma_valid && erdy && tb[i];
        if (out_valid[l] && out_word[l].route == ROUTE_NEXT_A && msw[i].a_left && !a_full[i]) begin
          ea_push[i] = 1; ep[l] = 1;
        end
        if (out_valid[l] && out_word[l].route == ROUTE_NEXT_B && msw[i].b_left && !b_full[i]) begin
          eb_push[i] = 1; ep[l] = 1;
        end
        req[i] = out_valid[i] && out_word[i].route == ROUTE_BUS && bus_ready[i];
      end
      g = -1;
      for (int k = 0; k < N; k++) if (g < 0 && req[(rr + k) % N]) g = (rr + k) % N;
      if (g >= 0) ep[g] = 1;
      chk(dma_ready == erdy, "dma_ready");
      chk(a_push == ea_push && b_push == eb_push, $sformatf("push a %b/%b b %b/%b", a_push, ea_push, b_push, eb_push));
      chk(out_pop == ep, $sformatf("pop %b exp %b", out_pop, ep));
      chk(bus_valid == (g >= 0), "bus_valid");
      if (g >= 0) begin
        chk(int'(bus_core) == g && bus_data == out_word[g].data, "bus grant");
        n_bus++;
      end
      for (int i = 0; i < N; i++) begin
        l = (i + N - 1) % N;
        if (a_push[i]) chk(a_data[i] == (msw[i].a_left ? out_word[l].data : dma_word.data), "a_data");
        if (b_push[i]) chk(b_data[i] == (msw[i].b_left ? out_word[l].data : dma_word.data), "b_data");
        if ((ea_push[i] && msw[i].a_left) || (eb_push[i] && msw[i].b_left)) n_left++;
      end
      if (dma_valid && erdy && dma_word.bcast && (ta | tb) != 0) n_bcast++;
      if (dma_valid && !erdy) n_block++;
      @(posedge clk);
      if (g >= 0) rr = (g + 1) % N;
      if (sw_we && int'(sw_core) < N) msw[sw_core] = sw_data;
    end
    chk(n_bcast > 0 && n_left > 0 && n_bus > 0 && n_block > 0, "all paths used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
