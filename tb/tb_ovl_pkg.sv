// tb_ovl_pkg: helpers shared by the testbenches that program cores.
// They build instruction words (overlay_pkg::instr_t) and DMA descriptors.
package tb_ovl_pkg;
  import overlay_pkg::*;

  function automatic agen_t ag(input int base, input int s_in = 0, input int s_out = 0);
    return '{base: LADDR_W'(base), s_in: LADDR_W'(s_in), s_out: LADDR_W'(s_out)};
  endfunction

  function automatic instr_t i_exec(input fop_e fop, input src_e a, input src_e b, input src_e c,
                                    input int n_in, input int n_out,
                                    input agen_t g0, input agen_t g1, input agen_t gw,
                                    input logic wr_mem, input logic send,
                                    input route_e route = ROUTE_BUS,
                                    input logic neg = 1'b0, input logic hold_a = 1'b0,
                                    input logic hold_b = 1'b0);
    instr_t i;
    i = '0;
    i.op = OP_EXEC; i.fop = fop; i.neg = neg;
    i.src_a = a; i.src_b = b; i.src_c = c;
    i.hold_a = hold_a; i.hold_b = hold_b;
    i.wr_mem = wr_mem; i.send = send; i.route = route;
    i.n_in = CNT_W'(n_in); i.n_out = CNT_W'(n_out);
    i.ag0 = g0; i.ag1 = g1; i.agw = gw;
    return i;
  endfunction

  function automatic instr_t i_loop(input int tgt, input int count);
    instr_t i;
    i = '0;
    i.op = OP_LOOP; i.tgt = PC_W'(tgt); i.n_in = CNT_W'(count);
    return i;
  endfunction

  function automatic instr_t i_halt();
    instr_t i;
    i = '0;
    i.op = OP_HALT;
    return i;
  endfunction

  function automatic rdesc_t rdsc(input int base, input int n_in, input int s_in,
                                  input int n_out, input int s_out, input dest_mode_e mode,
                                  input int core, input logic port, input logic cached,
                                  input logic flush = 1'b0);
    rdesc_t d;
    d.base = MADDR_W'(base); d.n_in = CNT_W'(n_in); d.s_in = MADDR_W'(s_in);
    d.n_out = CNT_W'(n_out); d.s_out = MADDR_W'(s_out); d.mode = mode;
    d.core = CORE_ID_W'(core); d.port = port; d.cached = cached; d.flush = flush;
    return d;
  endfunction

  function automatic wdesc_t wdsc(input int base, input int n_in, input int s_in,
                                  input int n_out, input int s_out);
    wdesc_t d;
    d.base = MADDR_W'(base); d.n_in = CNT_W'(n_in); d.s_in = MADDR_W'(s_in);
    d.n_out = CNT_W'(n_out); d.s_out = MADDR_W'(s_out);
    return d;
  endfunction
endpackage
