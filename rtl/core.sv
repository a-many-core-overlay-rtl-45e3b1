// core: one processing core of the overlay.
//
// A core is a local data memory, an arithmetic unit (FMA, reciprocal,
// square root and inverse square root),
// two input buffers (A, B) and one output buffer on the network side, and a
// controller that runs a small program from its configuration memory.  This
// set of parts is the published core; how they are joined is this
// implementation's choice.
//
// Pipeline of one operation:
//   issue   controller checks the buffers, pops them, sends the two read
//           addresses to local memory; buffer heads and the operation are
//           registered
//   operand memory data arrive; operands a, b, c are selected from the
//           buffer words, the two memory ports and the constants 0 and 1
//   FPU     FPU_LAT cycles
//   write   the result is written to local memory and/or pushed into the
//           output buffer together with its route (bus to the DMA, or
//           buffer A or B of the right-hand neighbour)
// One operation per cycle; a result appears FPU_LAT+1 cycles after issue.
//
// Interface: in_a/in_b push ports report full; the output buffer head is
// out_valid/out_word and is removed with out_pop.  imem_*/coef_* load the
// program and the function coefficients (coef_idx = {table, segment}); start runs the program and busy
// stays high until it halts.
module core
  import overlay_pkg::*;
#(
  parameter int unsigned LMEM_WORDS = 8192,
  parameter int unsigned FIFO_DEPTH = 32,
  parameter int unsigned IMEM_DEPTH = 64,
  parameter int unsigned FPU_LAT    = 4,
  parameter int unsigned SEG_BITS   = 6,
  localparam int unsigned IAW       = $clog2(IMEM_DEPTH),
  localparam int unsigned MAW       = $clog2(LMEM_WORDS)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                imem_we,
  input  logic [IAW-1:0]      imem_addr,
  input  instr_t              imem_data,
  input  logic                coef_we,
  input  logic [SEG_BITS:0]   coef_idx,
  input  rcoef_t              coef_data,
  input  logic                start,
  output logic                busy,
  input  logic                in_a_push,
  input  logic [DATA_W-1:0]   in_a_data,
  output logic                in_a_full,
  input  logic                in_b_push,
  input  logic [DATA_W-1:0]   in_b_data,
  output logic                in_b_full,
  output logic                out_valid,
  output oword_t              out_word,
  input  logic                out_pop
);
  localparam int unsigned OCW   = $clog2(FIFO_DEPTH + 1);
  localparam int unsigned TAG_W = 1 + MAW + 1 + 2;

  typedef struct packed {
    logic           wr_mem;
    logic [MAW-1:0] wr_addr;
    logic           send;
    route_e         route;
  } tag_t;

  logic [DATA_W-1:0]  fa_head, fb_head;
  logic               fa_empty, fb_empty, fo_empty;
  logic [OCW-1:0]     fo_count;
  logic               iss_valid, pop_a, pop_b;
  logic [LADDR_W-1:0] rd0_addr, rd1_addr, wr_addr;
  instr_t             cur;
  logic [DATA_W-1:0]  m0_data, m1_data;

  // stage "operand"
  logic               s1_valid;
  instr_t             s1_ins;
  logic [DATA_W-1:0]  s1_fa, s1_fb;
  logic [MAW-1:0]     s1_wr_addr;
  logic [DATA_W-1:0]  op_a, op_b, op_c;

  // write-back
  logic               wb_valid;
  logic [DATA_W-1:0]  wb_y;
  tag_t               wb_tag, s1_tag;

  sync_fifo #(.WIDTH(DATA_W), .DEPTH(FIFO_DEPTH)) u_fifo_a (
    .clk, .rst_n, .push(in_a_push), .wdata(in_a_data), .pop(pop_a), .rdata(fa_head),
    .empty(fa_empty), .full(in_a_full), .count());
  sync_fifo #(.WIDTH(DATA_W), .DEPTH(FIFO_DEPTH)) u_fifo_b (
    .clk, .rst_n, .push(in_b_push), .wdata(in_b_data), .pop(pop_b), .rdata(fb_head),
    .empty(fb_empty), .full(in_b_full), .count());
  sync_fifo #(.WIDTH($bits(oword_t)), .DEPTH(FIFO_DEPTH)) u_fifo_o (
    .clk, .rst_n, .push(wb_valid && wb_tag.send), .wdata({wb_y, wb_tag.route}),
    .pop(out_pop), .rdata(out_word), .empty(fo_empty), .full(), .count(fo_count));
  assign out_valid = !fo_empty;

  core_ctrl #(.IMEM_DEPTH(IMEM_DEPTH), .OUT_DEPTH(FIFO_DEPTH)) u_ctrl (
    .clk, .rst_n, .imem_we, .imem_addr, .imem_data, .start, .busy,
    .a_empty(fa_empty), .b_empty(fb_empty), .out_count(fo_count),
    .wb_valid, .wb_send(wb_tag.send),
    .iss_valid, .pop_a, .pop_b, .rd0_addr, .rd1_addr, .wr_addr, .cur);

  local_mem #(.WORDS(LMEM_WORDS), .DW(DATA_W)) u_mem (
    .clk,
    .rd0_en(iss_valid), .rd0_addr(rd0_addr[MAW-1:0]), .rd0_data(m0_data),
    .rd1_en(iss_valid), .rd1_addr(rd1_addr[MAW-1:0]), .rd1_data(m1_data),
    .wr_en(wb_valid && wb_tag.wr_mem), .wr_addr(wb_tag.wr_addr), .wr_data(wb_y));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1_valid <= 1'b0;
    else        s1_valid <= iss_valid;
  end

  always_ff @(posedge clk) begin
    if (iss_valid) begin
      s1_ins     <= cur;
      s1_fa      <= fa_head;
      s1_fb      <= fb_head;
      s1_wr_addr <= wr_addr[MAW-1:0];
    end
  end

  function automatic logic [DATA_W-1:0] operand(input src_e s);
    unique case (s)
      SRC_FIFO_A: return s1_fa;
      SRC_FIFO_B: return s1_fb;
      SRC_MEM0:   return m0_data;
      SRC_MEM1:   return m1_data;
      SRC_ONE:    return fp32_pkg::FP_ONE;
      default:    return '0;
    endcase
  endfunction

  assign op_a   = operand(s1_ins.src_a);
  assign op_b   = operand(s1_ins.src_b);
  assign op_c   = operand(s1_ins.src_c);
  assign s1_tag = '{wr_mem: s1_ins.wr_mem, wr_addr: s1_wr_addr, send: s1_ins.send, route: s1_ins.route};

  fpu #(.LAT(FPU_LAT), .SEG_BITS(SEG_BITS), .TAG_W(TAG_W)) u_fpu (
    .clk, .rst_n, .in_valid(s1_valid), .op(s1_ins.fop), .neg(s1_ins.neg),
    .a(op_a), .b(op_b), .c(op_c), .in_tag(s1_tag),
    .out_valid(wb_valid), .y(wb_y), .out_tag(wb_tag),
    .coef_we, .coef_idx, .coef_data);
endmodule
