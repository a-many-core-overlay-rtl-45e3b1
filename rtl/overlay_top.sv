// overlay_top: the many-core overlay, N_CORES cores behind an adaptable
// network, fed by a DMA engine with a read cache that masters an AXI port
// towards the external-memory controller.
//
// The host processor drives the configuration port.  cfg_addr selects what
// a write does (overlay_pkg::cfg_target_e):
//   CT_IMEM   program word `index` of core `core` (cfg_data = instr_t)
//   CT_RCOEF  function coefficients of core `core`, index = {table,
//             segment}: table 0 reciprocal, table 1 inverse square root
//             (cfg_data = rcoef_t)
//   CT_SWITCH network switch of core `core` (cfg_data = switch_t)
//   CT_RDESC  push a DMA read descriptor (cfg_data = rdesc_t)
//   CT_WDESC  push a DMA write descriptor for core `core` (cfg_data = wdesc_t)
//   CT_START  start every core whose bit is set in cfg_data
// A write happens in a cycle with cfg_valid and cfg_ready both high;
// cfg_ready is low only while the addressed descriptor queue is full.
// core_busy shows which cores are still running their programs and
// dma_idle that the DMA has nothing left to do, so a job is finished when
// core_busy is zero and dma_idle is high.
//
// Default sizes are those of the evaluated 16-core matrix-multiplication
// architecture: 16 cores, 32 KB local memory per core, a DMA cache of 1 KB
// with one-word lines (the row of the published cache/memory table for
// 32 KB local memories).  The configuration map is the implementation's.
module overlay_top
  import overlay_pkg::*;
#(
  parameter int unsigned N_CORES    = 16,
  parameter int unsigned LMEM_WORDS = 8192,
  parameter int unsigned FIFO_DEPTH = 32,
  parameter int unsigned IMEM_DEPTH = 64,
  parameter int unsigned FPU_LAT    = 4,
  parameter int unsigned SEG_BITS   = 6,
  parameter int unsigned NUM_LINES  = 256,
  parameter int unsigned LINE_WORDS = 1,
  parameter int unsigned MAX_BURST  = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  // configuration port (host processor)
  input  logic               cfg_valid,
  input  cfg_addr_t          cfg_addr,
  input  logic [CFG_W-1:0]   cfg_data,
  output logic               cfg_ready,
  // status
  output logic [N_CORES-1:0] core_busy,
  output logic               dma_idle,
  // AXI4 master to the memory controller
  output logic [31:0]        m_axi_araddr,
  output logic [7:0]         m_axi_arlen,
  output logic               m_axi_arvalid,
  input  logic               m_axi_arready,
  input  logic [31:0]        m_axi_rdata,
  input  logic               m_axi_rlast,
  input  logic               m_axi_rvalid,
  output logic               m_axi_rready,
  output logic [31:0]        m_axi_awaddr,
  output logic [7:0]         m_axi_awlen,
  output logic               m_axi_awvalid,
  input  logic               m_axi_awready,
  output logic [31:0]        m_axi_wdata,
  output logic               m_axi_wlast,
  output logic               m_axi_wvalid,
  input  logic               m_axi_wready,
  input  logic               m_axi_bvalid,
  output logic               m_axi_bready
);
  localparam int unsigned IAW = $clog2(IMEM_DEPTH);

  logic                 rdesc_ready, wdesc_ready;
  logic                 st_valid, st_ready;
  dword_t               st_word;
  logic                 bus_valid;
  logic [DATA_W-1:0]    bus_data;
  logic [CORE_ID_W-1:0] bus_core;
  logic   [N_CORES-1:0] bus_ready, out_valid, out_pop, a_full, b_full, a_push, b_push;
  oword_t [N_CORES-1:0] out_word;
  logic   [N_CORES-1:0][DATA_W-1:0] a_data, b_data;

  logic do_cfg;
  assign do_cfg    = cfg_valid && cfg_ready;
  assign cfg_ready = (cfg_addr.target == CT_RDESC) ? rdesc_ready :
                     (cfg_addr.target == CT_WDESC) ? wdesc_ready : 1'b1;

  for (genvar i = 0; i < N_CORES; i++) begin : g_core
    logic sel;
    assign sel = do_cfg && 32'(cfg_addr.core) == i;
    core #(
      .LMEM_WORDS(LMEM_WORDS), .FIFO_DEPTH(FIFO_DEPTH), .IMEM_DEPTH(IMEM_DEPTH),
      .FPU_LAT(FPU_LAT), .SEG_BITS(SEG_BITS)
    ) u_core (
      .clk, .rst_n,
      .imem_we(sel && cfg_addr.target == CT_IMEM), .imem_addr(IAW'(cfg_addr.index)),
      .imem_data(instr_t'(cfg_data[INSTR_W-1:0])),
      .coef_we(sel && cfg_addr.target == CT_RCOEF), .coef_idx((SEG_BITS+1)'(cfg_addr.index)),
      .coef_data(rcoef_t'(cfg_data[$bits(rcoef_t)-1:0])),
      .start(do_cfg && cfg_addr.target == CT_START && cfg_data[i]),
      .busy(core_busy[i]),
      .in_a_push(a_push[i]), .in_a_data(a_data[i]), .in_a_full(a_full[i]),
      .in_b_push(b_push[i]), .in_b_data(b_data[i]), .in_b_full(b_full[i]),
      .out_valid(out_valid[i]), .out_word(out_word[i]), .out_pop(out_pop[i]));
  end

  network #(.N_CORES(N_CORES)) u_net (
    .clk, .rst_n,
    .sw_we(do_cfg && cfg_addr.target == CT_SWITCH), .sw_core(cfg_addr.core),
    .sw_data(switch_t'(cfg_data[$bits(switch_t)-1:0])),
    .dma_valid(st_valid), .dma_word(st_word), .dma_ready(st_ready),
    .out_valid, .out_word, .out_pop,
    .a_full, .b_full, .a_push, .b_push, .a_data, .b_data,
    .bus_ready, .bus_valid, .bus_data, .bus_core);

  dma #(
    .N_CORES(N_CORES), .NUM_LINES(NUM_LINES), .LINE_WORDS(LINE_WORDS), .MAX_BURST(MAX_BURST)
  ) u_dma (
    .clk, .rst_n,
    .rdesc_valid(cfg_valid && cfg_addr.target == CT_RDESC),
    .rdesc(rdesc_t'(cfg_data[RDESC_W-1:0])), .rdesc_ready,
    .wdesc_valid(cfg_valid && cfg_addr.target == CT_WDESC), .wdesc_core(cfg_addr.core),
    .wdesc(wdesc_t'(cfg_data[$bits(wdesc_t)-1:0])), .wdesc_ready,
    .st_valid, .st_word, .st_ready,
    .bus_valid, .bus_data, .bus_core, .bus_ready,
    .m_axi_araddr, .m_axi_arlen, .m_axi_arvalid, .m_axi_arready,
    .m_axi_rdata, .m_axi_rlast, .m_axi_rvalid, .m_axi_rready,
    .m_axi_awaddr, .m_axi_awlen, .m_axi_awvalid, .m_axi_awready,
    .m_axi_wdata, .m_axi_wlast, .m_axi_wvalid, .m_axi_wready,
    .m_axi_bvalid, .m_axi_bready,
    .idle(dma_idle));
endmodule
