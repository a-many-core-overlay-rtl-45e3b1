// tb_cfg_mem: writes random instruction words and reads them back with
// the one-cycle read latency.
module tb_cfg_mem;
  import overlay_pkg::*;
  localparam int DEPTH = 16;
  logic clk = 0, we;
  logic [3:0] waddr, raddr;
  instr_t wdata, rdata;
  instr_t model [DEPTH];
  int checks = 0, failures = 0;

  cfg_mem #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  function automatic instr_t rnd();
    logic [$bits(instr_t)-1:0] v;
    for (int i = 0; i < $bits(instr_t); i += 32) v[i +: 32] = $urandom;
    return instr_t'(v);
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = '0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; waddr = 4'(a); wdata = rnd(); model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      raddr = 4'($urandom);
      we = $urandom_range(0, 1); waddr = 4'($urandom); wdata = rnd();
      @(posedge clk); #1;
      checks++;
      if (rdata !== model[raddr]) begin failures++; $display("FAIL @%0d", raddr); end
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
