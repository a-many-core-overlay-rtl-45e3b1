// tb_local_mem: random writes and two-port reads against an array model;
// checks the one-cycle read latency and that a read of the word being
// written returns the old value.
module tb_local_mem;
  localparam int WORDS = 256, DW = 32, AW = 8;
  logic clk = 0;
  logic rd0_en, rd1_en, wr_en;
  logic [AW-1:0] rd0_addr, rd1_addr, wr_addr;
  logic [DW-1:0] rd0_data, rd1_data, wr_data;
  logic [DW-1:0] model [WORDS];
  int checks = 0, failures = 0;

  local_mem #(.WORDS(WORDS), .DW(DW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [DW-1:0] e0, e1;
    rd0_en = 0; rd1_en = 0; wr_en = 0; rd0_addr = 0; rd1_addr = 0; wr_addr = 0; wr_data = 0;
    // fill
    for (int a = 0; a < WORDS; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(a); wr_data = $urandom; model[a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      rd0_en = 1; rd1_en = 1;
      rd0_addr = AW'($urandom); rd1_addr = AW'($urandom);
      wr_en = $urandom_range(0, 1);
      wr_addr = ($urandom_range(0, 3) == 0) ? rd0_addr : AW'($urandom);
      wr_data = $urandom;
      e0 = model[rd0_addr]; e1 = model[rd1_addr];
      @(posedge clk);
      if (wr_en) model[wr_addr] = wr_data;
      #1;
      checks += 2;
      if (rd0_data !== e0) begin failures++; $display("FAIL port0 @%0d", rd0_addr); end
      if (rd1_data !== e1) begin failures++; $display("FAIL port1 @%0d", rd1_addr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
