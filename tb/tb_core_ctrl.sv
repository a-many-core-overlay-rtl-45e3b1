// tb_core_ctrl: runs a three-instruction program (2-D FMA with a held
// buffer word, a move inside a loop run three times, halt) with random
// buffer-empty stalls and a slowly drained output buffer.  Checks every
// issued operation's addresses and pops against the expected sequence,
// that nothing issues from an empty buffer, that the output buffer can
// never overflow, and that busy falls after the last operation.
module tb_core_ctrl;
  import overlay_pkg::*;
  import tb_ovl_pkg::*;
  localparam int IMEM = 16, OUTD = 4, LAT = 3;
  logic clk = 0, rst_n = 0;
  logic imem_we, start, busy, a_empty, b_empty, wb_valid, wb_send;
  logic [3:0] imem_addr;
  instr_t imem_data, cur;
  logic [2:0] out_count;
  logic iss_valid, pop_a, pop_b;
  logic [LADDR_W-1:0] rd0_addr, rd1_addr, wr_addr;
  int checks = 0, failures = 0;

  core_ctrl #(.IMEM_DEPTH(IMEM), .OUT_DEPTH(OUTD)) dut (.*);
  always #5 clk = ~clk;

  typedef struct { int r0, r1, w; logic pa, pb; } exp_t;
  exp_t expq[$];
  logic [LAT:0] v_pipe, s_pipe;
  int outc, n_iss, n_stall_empty, n_stall_out;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // write-back pipeline and output buffer model
  assign wb_valid  = v_pipe[LAT];
  assign wb_send   = s_pipe[LAT];
  assign out_count = 3'(outc);
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin v_pipe <= '0; s_pipe <= '0; outc <= 0; end
    else begin
      int nc;
      v_pipe <= {v_pipe[LAT-1:0], iss_valid};
      s_pipe <= {s_pipe[LAT-1:0], iss_valid && cur.send};
      nc = outc + (wb_valid && wb_send ? 1 : 0);
      if (nc > 0 && $urandom_range(0, 3) == 0) nc--;
      outc <= nc;
    end
  end

  always @(negedge clk) begin
    a_empty = ($urandom_range(0, 2) == 0);
    b_empty = ($urandom_range(0, 2) == 0);
  end

  always @(posedge clk) if (rst_n) begin
    int pend;
    pend = 0;
    for (int k = 0; k <= LAT; k++) pend += s_pipe[k];
    chk(outc + pend <= OUTD, "output buffer overflow");
    if (iss_valid) begin
      exp_t e;
      n_iss++;
      chk(expq.size() > 0, "unexpected issue");
      if (expq.size() > 0) begin
        e = expq.pop_front();
        chk(int'(rd0_addr) == e.r0 || e.r0 < 0, $sformatf("rd0 %0d exp %0d", rd0_addr, e.r0));
        chk(int'(rd1_addr) == e.r1 || e.r1 < 0, $sformatf("rd1 %0d exp %0d", rd1_addr, e.r1));
        chk(int'(wr_addr) == e.w, $sformatf("wr %0d exp %0d", wr_addr, e.w));
        chk(pop_a == e.pa && pop_b == e.pb, "pops");
      end
      chk(!(pop_a && a_empty) && !(pop_b && b_empty), "pop of empty buffer");
      chk(!(cur.src_a == SRC_FIFO_A && a_empty), "issue with empty A");
    end else if (dut.state == 3) begin
      if (a_empty || b_empty) n_stall_empty++;
      else n_stall_out++;
    end
  end

  initial begin
    instr_t prog [4];
    imem_we = 0; imem_addr = 0; imem_data = '0; start = 0;
    prog[0] = i_exec(FOP_FMA, SRC_FIFO_A, SRC_MEM0, SRC_MEM1, 3, 2, ag(10, 1, 0), ag(100, 1, 3),
                     ag(100, 1, 3), 1, 1, ROUTE_BUS, 0, 1);
    prog[1] = i_exec(FOP_PASS, SRC_FIFO_B, SRC_ZERO, SRC_ZERO, 2, 1, ag(0), ag(0), ag(50, 1, 0), 1, 1);
    prog[2] = i_loop(1, 3);
    prog[3] = i_halt();
    for (int o = 0; o < 2; o++)
      for (int i = 0; i < 3; i++) expq.push_back('{10 + i, 100 + i + 3 * o, 100 + i + 3 * o, i == 2, 0});
    for (int r = 0; r < 3; r++)
      for (int i = 0; i < 2; i++) expq.push_back('{-1, -1, 50 + i, 0, 1});
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 4; k++) begin
      @(negedge clk); imem_we = 1; imem_addr = 4'(k); imem_data = prog[k];
    end
    @(negedge clk); imem_we = 0; start = 1;
    @(negedge clk); start = 0;
    chk(busy, "busy after start");
    wait (!busy);
    repeat (3) @(posedge clk);
    chk(n_iss == 12, $sformatf("issued %0d", n_iss));
    chk(expq.size() == 0, "all expected operations issued");
    chk(n_stall_empty > 0, "stall on empty buffer seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
