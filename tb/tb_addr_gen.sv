// tb_addr_gen: random two-level walks (random base, strides including
// negative ones, loop sizes) compared with base + i*s_in + o*s_out.
module tb_addr_gen;
  localparam int AW = 12;
  logic clk = 0, rst_n = 0;
  logic load, step, wrap;
  logic [AW-1:0] base, s_in, s_out, addr;
  int checks = 0, failures = 0;

  addr_gen #(.AW(AW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    load = 0; step = 0; wrap = 0; base = 0; s_in = 0; s_out = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int ni, no;
      ni = $urandom_range(1, 6); no = $urandom_range(1, 5);
      @(negedge clk);
      load = 1; base = AW'($urandom); s_in = AW'($urandom_range(0, 9) - 3);
      s_out = AW'($urandom); step = 0;
      @(negedge clk); load = 0;
      for (int o = 0; o < no; o++)
        for (int i = 0; i < ni; i++) begin
          logic [AW-1:0] exp_a;
          exp_a = base + AW'(i) * s_in + AW'(o) * s_out;
          checks++;
          if (addr !== exp_a) begin failures++; $display("FAIL i=%0d o=%0d %h %h", i, o, addr, exp_a); end
          // random idle cycles between steps
          if ($urandom_range(0, 3) == 0) begin step = 0; @(negedge clk); end
          step = 1; wrap = (i == ni - 1);
          @(negedge clk); step = 0; wrap = 0;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
