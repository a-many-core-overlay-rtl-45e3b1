// network: the adaptable interconnection network between the DMA and
// the cores.
//
// Three kinds of path, selected by per-core switches that the host writes
// at run time (sw_we/sw_core/sw_data):
//  * DMA stream -> cores.  A stream word names a core and an input buffer
//    (A or B), or is a broadcast.  It is delivered to every core whose
//    switch takes that buffer from the DMA and that the word addresses, in
//    one cycle: the stream waits until all of those buffers have room.  A
//    word that no core takes is dropped.
//  * Neighbour links.  A core's output word routed ROUTE_NEXT_A/B goes to
//    buffer A/B of the core to its right (the last core's right-hand
//    neighbour is core 0, so the links form a ring) if that core's switch
//    takes the buffer from the left.  This is the linear array used by the
//    published matrix-multiplication, LU and FFT mappings.
//  * Result bus.  Output words routed ROUTE_BUS go to the DMA write engine,
//    one word per cycle, granted round-robin among the cores whose
//    bus_ready bit the DMA raises.
// The network is combinational: a word moves from an output buffer or the
// stream into an input buffer in the cycle it is accepted.  The published
// overlay describes a network of configurable switches that can act as a
// bus, point-to-point links or a ring; this particular switch set is the
// implementation's choice.
module network
  import overlay_pkg::*;
#(
  parameter int unsigned N_CORES = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // switch configuration
  input  logic                 sw_we,
  input  logic [CORE_ID_W-1:0] sw_core,
  input  switch_t              sw_data,
  // DMA read stream
  input  logic                 dma_valid,
  input  dword_t               dma_word,
  output logic                 dma_ready,
  // core output buffers
  input  logic   [N_CORES-1:0] out_valid,
  input  oword_t [N_CORES-1:0] out_word,
  output logic   [N_CORES-1:0] out_pop,
  // core input buffers
  input  logic   [N_CORES-1:0] a_full,
  input  logic   [N_CORES-1:0] b_full,
  output logic   [N_CORES-1:0] a_push,
  output logic   [N_CORES-1:0] b_push,
  output logic   [N_CORES-1:0][DATA_W-1:0] a_data,
  output logic   [N_CORES-1:0][DATA_W-1:0] b_data,
  // result bus to the DMA write engine
  input  logic   [N_CORES-1:0] bus_ready,
  output logic                 bus_valid,
  output logic [DATA_W-1:0]    bus_data,
  output logic [CORE_ID_W-1:0] bus_core
);
  switch_t [N_CORES-1:0] sw;
  logic    [N_CORES-1:0] dma_tgt_a, dma_tgt_b, bus_req, left_a, left_b, left_ok;
  logic    [$clog2(N_CORES+1)-1:0] rr;   // core with the highest bus priority
  logic    [$clog2(N_CORES+1)-1:0] gnt;
  logic                  gnt_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sw <= '0;
    else if (sw_we && 32'(sw_core) < N_CORES) sw[sw_core] <= sw_data;
  end

  // DMA stream targets
  always_comb begin
    for (int i = 0; i < N_CORES; i++) begin
      logic hit;
      hit = dma_word.bcast || (32'(dma_word.core) == i);
      dma_tgt_a[i] = hit && !dma_word.port && !sw[i].a_left;
      dma_tgt_b[i] = hit &&  dma_word.port && !sw[i].b_left;
    end
  end
  assign dma_ready = ((dma_tgt_a & a_full) == '0) && ((dma_tgt_b & b_full) == '0);

  // neighbour links: word of core i-1 into core i
  always_comb begin
    for (int i = 0; i < N_CORES; i++) begin
      int l;
      l = (i == 0) ? N_CORES - 1 : i - 1;
      left_a[i] = out_valid[l] && out_word[l].route == ROUTE_NEXT_A && sw[i].a_left && !a_full[i];
      left_b[i] = out_valid[l] && out_word[l].route == ROUTE_NEXT_B && sw[i].b_left && !b_full[i];
      left_ok[l] = left_a[i] || left_b[i];
    end
  end

  // result bus, round-robin starting at rr
  always_comb begin
    for (int i = 0; i < N_CORES; i++)
      bus_req[i] = out_valid[i] && out_word[i].route == ROUTE_BUS && bus_ready[i];
    gnt_valid = 1'b0;
    gnt       = '0;
    for (int k = 0; k < N_CORES; k++) begin
      int i;
      i = (32'(rr) + k) % N_CORES;
      if (!gnt_valid && bus_req[i]) begin
        gnt_valid = 1'b1;
        gnt       = $bits(gnt)'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else if (gnt_valid) rr <= (32'(gnt) + 1 == N_CORES) ? '0 : gnt + 1'b1;
  end

  assign bus_valid = gnt_valid;
  assign bus_data  = out_word[gnt].data;
  assign bus_core  = CORE_ID_W'(gnt);

  always_comb begin
    for (int i = 0; i < N_CORES; i++) begin
      int l;
      l = (i == 0) ? N_CORES - 1 : i - 1;
      a_push[i] = (dma_valid && dma_ready && dma_tgt_a[i]) || left_a[i];
      b_push[i] = (dma_valid && dma_ready && dma_tgt_b[i]) || left_b[i];
      a_data[i] = sw[i].a_left ? out_word[l].data : dma_word.data;
      b_data[i] = sw[i].b_left ? out_word[l].data : dma_word.data;
      out_pop[i] = left_ok[i] || (gnt_valid && 32'(gnt) == i);
    end
  end
endmodule
