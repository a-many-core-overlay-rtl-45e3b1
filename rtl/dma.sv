// dma: the DMA engine between external memory (AXI) and the cores.
//
// The host queues descriptors; the engine moves the data.  This follows
// the published overlay, where a DMA configured by the embedded processor
// fetches data from external memory and forwards it to the network, takes
// results back to memory, and has a cache for non-sequential reads.  The
// descriptor formats, queue depths and AXI usage are this implementation's.
//
// Read path (rdesc_t): walks base + i*s_in + o*s_out (word addresses),
// i < n_in, o < n_out, and sends every element as a stream word to a core
// (DEST_CORE), to all cores (DEST_BCAST) or to core "core + o"
// (DEST_SCATTER), input buffer A or B.  Per element:
//  * cached descriptor: look the element up in dma_cache; on a hit send it
//    at once, on a miss read a burst of LINE_WORDS words starting at the
//    element, send the first word as it arrives and keep the burst as a
//    cache line;
//  * uncached descriptor: if s_in is 1 read the rest of the row in bursts
//    of up to MAX_BURST words and send every word, otherwise read single
//    words.
// One read burst is outstanding at a time.
//
// Write path (wdesc_t): each core has its own queue of write descriptors;
// the one at its head gives the addresses of that core's next results on
// the result bus.  bus_ready[c] is high while core c has an active
// descriptor and the write queue has room.  Words are written one AXI
// single-beat transaction at a time and each write invalidates any cache
// line holding the address.
//
// AXI: 32-bit data, byte address = 4 x word address, INCR bursts, full
// strobes (arsize/awsize = 2, arburst/awburst = INCR are implied and not
// driven).  idle is high when no descriptor or word is pending.
module dma
  import overlay_pkg::*;
#(
  parameter int unsigned N_CORES    = 16,
  parameter int unsigned NUM_LINES  = 256,
  parameter int unsigned LINE_WORDS = 1,
  parameter int unsigned MAX_BURST  = 16,
  parameter int unsigned RDQ_DEPTH  = 8,
  parameter int unsigned WDQ_DEPTH  = 4,
  parameter int unsigned WQ_DEPTH   = 8,
  localparam int unsigned OW        = (LINE_WORDS > 1) ? $clog2(LINE_WORDS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // descriptor queues
  input  logic                 rdesc_valid,
  input  rdesc_t               rdesc,
  output logic                 rdesc_ready,
  input  logic                 wdesc_valid,
  input  logic [CORE_ID_W-1:0] wdesc_core,
  input  wdesc_t               wdesc,
  output logic                 wdesc_ready,
  // stream to the network
  output logic                 st_valid,
  output dword_t               st_word,
  input  logic                 st_ready,
  // result bus from the network
  input  logic                 bus_valid,
  input  logic [DATA_W-1:0]    bus_data,
  input  logic [CORE_ID_W-1:0] bus_core,
  output logic [N_CORES-1:0]   bus_ready,
  // AXI4 master
  output logic [31:0]          m_axi_araddr,
  output logic [7:0]           m_axi_arlen,
  output logic                 m_axi_arvalid,
  input  logic                 m_axi_arready,
  input  logic [31:0]          m_axi_rdata,
  input  logic                 m_axi_rlast,
  input  logic                 m_axi_rvalid,
  output logic                 m_axi_rready,
  output logic [31:0]          m_axi_awaddr,
  output logic [7:0]           m_axi_awlen,
  output logic                 m_axi_awvalid,
  input  logic                 m_axi_awready,
  output logic [31:0]          m_axi_wdata,
  output logic                 m_axi_wlast,
  output logic                 m_axi_wvalid,
  input  logic                 m_axi_wready,
  input  logic                 m_axi_bvalid,
  output logic                 m_axi_bready,
  output logic                 idle
);
  // ---------------------------------------------------------------- read
  typedef enum logic [1:0] {R_IDLE, R_LOOK, R_AR, R_DATA} rstate_e;

  rstate_e            rstate;
  rdesc_t             rq_head, rd;
  logic               rq_empty, rq_full;
  logic [MADDR_W-1:0] raddr, rrow;
  logic [CNT_W-1:0]   ri, ro;
  logic [8:0]         blen, beat;
  logic               rfin, r_last_in, r_last_out, advance;
  logic               lk_hit, fwd_beat;
  logic [DATA_W-1:0]  lk_data;
  logic [31:0]        row_left;
  logic [MADDR_W-1:0] wq_addr;   // write queue head, also invalidates the cache

  sync_fifo #(.WIDTH($bits(rdesc_t)), .DEPTH(RDQ_DEPTH)) u_rdq (
    .clk, .rst_n, .push(rdesc_valid && !rq_full), .wdata(rdesc),
    .pop(rstate == R_IDLE && !rq_empty), .rdata(rq_head),
    .empty(rq_empty), .full(rq_full), .count());
  assign rdesc_ready = !rq_full;

  assign r_last_in  = 32'(ri) + 1 >= 32'(rd.n_in);
  assign r_last_out = 32'(ro) + 1 >= 32'(rd.n_out);
  assign row_left   = 32'(rd.n_in) - 32'(ri);
  assign fwd_beat   = !rd.cached || beat == 0;

  always_comb begin
    st_valid = 1'b0;
    st_word  = '0;
    st_word.core  = (rd.mode == DEST_SCATTER) ? rd.core + CORE_ID_W'(ro) : rd.core;
    st_word.bcast = (rd.mode == DEST_BCAST);
    st_word.port  = rd.port;
    advance = 1'b0;
    m_axi_rready = 1'b0;
    if (rstate == R_LOOK && !rfin && rd.cached && lk_hit) begin
      st_valid     = 1'b1;
      st_word.data = lk_data;
      advance      = st_ready;
    end else if (rstate == R_DATA) begin
      if (fwd_beat && !rfin) begin
        st_valid     = m_axi_rvalid;
        st_word.data = m_axi_rdata;
        m_axi_rready = st_ready;
        advance      = st_ready && m_axi_rvalid;
      end else begin
        m_axi_rready = 1'b1;
      end
    end
  end

  assign m_axi_arvalid = (rstate == R_AR);
  assign m_axi_araddr  = {raddr[29:0], 2'b00};
  assign m_axi_arlen   = 8'(blen - 1'b1);

  dma_cache #(.NUM_LINES(NUM_LINES), .LINE_WORDS(LINE_WORDS), .AW(MADDR_W), .DW(DATA_W)) u_cache (
    .clk, .rst_n,
    .flush(rstate == R_IDLE && !rq_empty && rq_head.flush),
    .lk_addr(raddr), .lk_hit, .lk_data,
    .fill_start(rstate == R_LOOK && rd.cached && !lk_hit), .fill_addr(raddr),
    .fill_we(rstate == R_DATA && rd.cached && m_axi_rvalid && m_axi_rready),
    .fill_off(OW'(beat)), .fill_data(m_axi_rdata),
    .fill_done(rstate == R_DATA && rd.cached && m_axi_rvalid && m_axi_rready && m_axi_rlast),
    .inv_valid(m_axi_bvalid && m_axi_bready), .inv_addr(wq_addr));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rstate <= R_IDLE;
      rd     <= '0;
      raddr  <= '0;
      rrow   <= '0;
      ri     <= '0;
      ro     <= '0;
      blen   <= '0;
      beat   <= '0;
      rfin   <= 1'b0;
    end else begin
      if (advance) begin
        if (r_last_in) begin
          ri    <= '0;
          ro    <= ro + 1'b1;
          rrow  <= rrow + rd.s_out;
          raddr <= rrow + rd.s_out;
          if (r_last_out) rfin <= 1'b1;
        end else begin
          ri    <= ri + 1'b1;
          raddr <= raddr + rd.s_in;
        end
      end
      unique case (rstate)
        R_IDLE: if (!rq_empty) begin
          rd     <= rq_head;
          raddr  <= rq_head.base;
          rrow   <= rq_head.base;
          ri     <= '0;
          ro     <= '0;
          rfin   <= 1'b0;
          rstate <= R_LOOK;
        end
        R_LOOK: begin
          if (rfin) rstate <= R_IDLE;
          else if (rd.cached && lk_hit) begin
            if (advance && r_last_in && r_last_out) rstate <= R_IDLE;
          end else begin
            if (rd.cached)            blen <= 9'(LINE_WORDS);
            else if (rd.s_in == 1)    blen <= (row_left < MAX_BURST) ? 9'(row_left) : 9'(MAX_BURST);
            else                      blen <= 9'd1;
            beat   <= '0;
            rstate <= R_AR;
          end
        end
        R_AR: if (m_axi_arready) rstate <= R_DATA;
        R_DATA: if (m_axi_rvalid && m_axi_rready) begin
          beat <= beat + 1'b1;
          if (m_axi_rlast) rstate <= R_LOOK;
        end
        default: rstate <= R_IDLE;
      endcase
    end
  end

  // --------------------------------------------------------------- write
  typedef enum logic [1:0] {W_IDLE, W_ADDR, W_RESP} wstate_e;

  wstate_e                     wstate;
  logic   [N_CORES-1:0]        wdq_empty, wdq_full, wdq_pop, wact;
  wdesc_t [N_CORES-1:0]        wdq_head, wd;
  logic   [N_CORES-1:0][MADDR_W-1:0] waddr, wrow;
  logic   [N_CORES-1:0][CNT_W-1:0]   wi, wo;
  logic                        wq_empty, wq_full, aw_done, w_done;
  logic [DATA_W-1:0]           wq_data;
  logic [MADDR_W-1:0]          bus_addr;

  for (genvar c = 0; c < N_CORES; c++) begin : g_wdq
    sync_fifo #(.WIDTH($bits(wdesc_t)), .DEPTH(WDQ_DEPTH)) u_wdq (
      .clk, .rst_n, .push(wdesc_valid && 32'(wdesc_core) == c && !wdq_full[c]), .wdata(wdesc),
      .pop(wdq_pop[c]), .rdata(wdq_head[c]), .empty(wdq_empty[c]), .full(wdq_full[c]), .count());
    assign wdq_pop[c]   = !wact[c] && !wdq_empty[c];
    assign bus_ready[c] = wact[c] && !wq_full;
  end
  assign wdesc_ready = (32'(wdesc_core) < N_CORES) ? !wdq_full[wdesc_core] : 1'b1;
  assign bus_addr    = waddr[bus_core];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wact  <= '0;
      wd    <= '0;
      waddr <= '0;
      wrow  <= '0;
      wi    <= '0;
      wo    <= '0;
    end else begin
      for (int c = 0; c < N_CORES; c++) begin
        if (wdq_pop[c]) begin
          wact[c]  <= 1'b1;
          wd[c]    <= wdq_head[c];
          waddr[c] <= wdq_head[c].base;
          wrow[c]  <= wdq_head[c].base;
          wi[c]    <= '0;
          wo[c]    <= '0;
        end else if (bus_valid && 32'(bus_core) == c) begin
          if (32'(wi[c]) + 1 >= 32'(wd[c].n_in)) begin
            wi[c]    <= '0;
            wo[c]    <= wo[c] + 1'b1;
            wrow[c]  <= wrow[c] + wd[c].s_out;
            waddr[c] <= wrow[c] + wd[c].s_out;
            if (32'(wo[c]) + 1 >= 32'(wd[c].n_out)) wact[c] <= 1'b0;
          end else begin
            wi[c]    <= wi[c] + 1'b1;
            waddr[c] <= waddr[c] + wd[c].s_in;
          end
        end
      end
    end
  end

  sync_fifo #(.WIDTH(MADDR_W + DATA_W), .DEPTH(WQ_DEPTH)) u_wq (
    .clk, .rst_n, .push(bus_valid), .wdata({bus_addr, bus_data}),
    .pop(wstate == W_RESP && m_axi_bvalid), .rdata({wq_addr, wq_data}),
    .empty(wq_empty), .full(wq_full), .count());

  assign m_axi_awaddr  = {wq_addr[29:0], 2'b00};
  assign m_axi_awlen   = 8'd0;
  assign m_axi_awvalid = (wstate == W_ADDR) && !aw_done;
  assign m_axi_wdata   = wq_data;
  assign m_axi_wlast   = 1'b1;
  assign m_axi_wvalid  = (wstate == W_ADDR) && !w_done;
  assign m_axi_bready  = (wstate == W_RESP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wstate  <= W_IDLE;
      aw_done <= 1'b0;
      w_done  <= 1'b0;
    end else begin
      unique case (wstate)
        W_IDLE: if (!wq_empty) begin
          aw_done <= 1'b0;
          w_done  <= 1'b0;
          wstate  <= W_ADDR;
        end
        W_ADDR: begin
          if (m_axi_awvalid && m_axi_awready) aw_done <= 1'b1;
          if (m_axi_wvalid && m_axi_wready)   w_done  <= 1'b1;
          if ((aw_done || m_axi_awready) && (w_done || m_axi_wready)) wstate <= W_RESP;
        end
        W_RESP: if (m_axi_bvalid) wstate <= W_IDLE;
        default: wstate <= W_IDLE;
      endcase
    end
  end

  assign idle = rq_empty && rstate == R_IDLE && wdq_empty == '1 && wact == '0
             && wq_empty && wstate == W_IDLE;

  a_bus_to_active: assert property (@(posedge clk) disable iff (!rst_n)
    bus_valid |-> (32'(bus_core) < N_CORES && wact[bus_core] && !wq_full));
  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_axi_arvalid && !m_axi_arready |=> m_axi_arvalid && $stable(m_axi_araddr));
endmodule
