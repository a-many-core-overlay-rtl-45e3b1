// core_ctrl: the controller of a core, with its configuration memory and
// three address generators (two read ports, one write port).
//
// The core runs a program of vector instructions (overlay_pkg::instr_t).
// After start the controller fetches an instruction (one cycle, the
// configuration memory has a synchronous read) and decodes it (one cycle):
//   OP_HALT  stop; busy falls.
//   OP_LOOP  jump back to tgt until the loop body has run n_in times.
//   OP_EXEC  issue n_in*n_out operations, at most one per cycle.
// An operation is issued when every input buffer it reads holds a word and
// the output buffer will have room for its result (words already in the
// buffer plus results still in the pipeline stay below OUT_DEPTH).  On issue
// the controller pops the buffers it read (a held buffer only on the last
// inner iteration), presents the two read addresses to the local memory and
// hands the operation's fields and write address to the datapath.  At the
// end of an instruction it waits until the pipeline is empty (wb_valid has
// returned every issued operation) before fetching the next one, so an
// instruction may read what the previous one wrote.
// The published overlay names the controller, configuration memory and
// address generator of a core without describing them; the instruction set
// and this sequencing are the implementation's own.
module core_ctrl
  import overlay_pkg::*;
#(
  parameter int unsigned IMEM_DEPTH = 64,
  parameter int unsigned OUT_DEPTH  = 32,
  localparam int unsigned IAW       = $clog2(IMEM_DEPTH),
  localparam int unsigned OCW       = $clog2(OUT_DEPTH + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  // program load
  input  logic               imem_we,
  input  logic [IAW-1:0]     imem_addr,
  input  instr_t             imem_data,
  // run control
  input  logic               start,
  output logic               busy,
  // buffer status
  input  logic               a_empty,
  input  logic               b_empty,
  input  logic [OCW-1:0]     out_count,
  // write-back returning from the pipeline
  input  logic               wb_valid,
  input  logic               wb_send,
  // issue
  output logic               iss_valid,
  output logic               pop_a,
  output logic               pop_b,
  output logic [LADDR_W-1:0] rd0_addr,
  output logic [LADDR_W-1:0] rd1_addr,
  output logic [LADDR_W-1:0] wr_addr,
  output instr_t             cur
);
  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_DECODE, S_EXEC, S_DRAIN} state_e;

  state_e           state;
  logic [PC_W-1:0]  pc;
  logic [CNT_W-1:0] icnt, ocnt, lcnt;
  logic             loop_active;
  logic [15:0]      inflight, inflight_send;
  instr_t           ins;
  logic             ag_load, ag_step, last_in, last_out;
  logic             need_a, need_b, can_issue;
  logic [CNT_W-1:0] remaining;

  cfg_mem #(.DEPTH(IMEM_DEPTH)) u_cfg_mem (
    .clk, .we(imem_we), .waddr(imem_addr), .wdata(imem_data),
    .raddr(IAW'(pc)), .rdata(ins)
  );

  assign ag_load = (state == S_DECODE) && (ins.op == OP_EXEC);
  assign ag_step = iss_valid;

  addr_gen #(.AW(LADDR_W)) u_ag0 (.clk, .rst_n, .load(ag_load), .base(ins.ag0.base),
    .s_in(ins.ag0.s_in), .s_out(ins.ag0.s_out), .step(ag_step), .wrap(last_in), .addr(rd0_addr));
  addr_gen #(.AW(LADDR_W)) u_ag1 (.clk, .rst_n, .load(ag_load), .base(ins.ag1.base),
    .s_in(ins.ag1.s_in), .s_out(ins.ag1.s_out), .step(ag_step), .wrap(last_in), .addr(rd1_addr));
  addr_gen #(.AW(LADDR_W)) u_agw (.clk, .rst_n, .load(ag_load), .base(ins.agw.base),
    .s_in(ins.agw.s_in), .s_out(ins.agw.s_out), .step(ag_step), .wrap(last_in), .addr(wr_addr));

  function automatic logic uses(input instr_t i, input src_e s);
    return (i.src_a == s) || (i.fop == FOP_FMA && (i.src_b == s || i.src_c == s));
  endfunction

  assign last_in  = (32'(icnt) + 1 >= 32'(cur.n_in));
  assign last_out = (32'(ocnt) + 1 >= 32'(cur.n_out));
  assign need_a   = uses(cur, SRC_FIFO_A);
  assign need_b   = uses(cur, SRC_FIFO_B);
  assign can_issue = (state == S_EXEC)
                   && !(need_a && a_empty) && !(need_b && b_empty)
                   && !(cur.send && (32'(out_count) + 32'(inflight_send) >= OUT_DEPTH));
  assign iss_valid = can_issue;
  assign pop_a     = can_issue && need_a && (!cur.hold_a || last_in);
  assign pop_b     = can_issue && need_b && (!cur.hold_b || last_in);
  assign busy      = (state != S_IDLE);
  assign remaining = loop_active ? lcnt : ins.n_in - 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      pc            <= '0;
      icnt          <= '0;
      ocnt          <= '0;
      lcnt          <= '0;
      loop_active   <= 1'b0;
      cur           <= '0;
      inflight      <= '0;
      inflight_send <= '0;
    end else begin
      inflight      <= inflight + 16'(iss_valid) - 16'(wb_valid);
      inflight_send <= inflight_send + 16'(iss_valid && cur.send) - 16'(wb_valid && wb_send);
      unique case (state)
        S_IDLE: if (start) begin
          pc          <= '0;
          loop_active <= 1'b0;
          state       <= S_FETCH;
        end
        S_FETCH: state <= S_DECODE;
        S_DECODE: begin
          unique case (ins.op)
            OP_EXEC: begin
              cur   <= ins;
              icnt  <= '0;
              ocnt  <= '0;
              state <= S_EXEC;
            end
            OP_LOOP: begin
              if (remaining == '0 || ins.n_in == '0) begin
                loop_active <= 1'b0;
                pc          <= pc + 1'b1;
              end else begin
                loop_active <= 1'b1;
                lcnt        <= remaining - 1'b1;
                pc          <= ins.tgt;
              end
              state <= S_FETCH;
            end
            default: state <= S_IDLE;
          endcase
        end
        S_EXEC: if (can_issue) begin
          if (last_in) begin
            icnt <= '0;
            if (last_out) state <= S_DRAIN;
            else          ocnt  <= ocnt + 1'b1;
          end else begin
            icnt <= icnt + 1'b1;
          end
        end
        S_DRAIN: if (inflight == 0 || (inflight == 1 && wb_valid)) begin
          pc    <= pc + 1'b1;
          state <= S_FETCH;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_wb_in_flight: assert property (@(posedge clk) disable iff (!rst_n) wb_valid |-> inflight != 0);
endmodule
