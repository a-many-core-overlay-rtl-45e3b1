// tb_sync_fifo: random push/pop traffic against a queue model; checks the
// head word, the empty/full flags and the count after every cycle.
module tb_sync_fifo;
  localparam int W = 16, D = 5;
  logic clk = 0, rst_n = 0;
  logic push, pop, empty, full;
  logic [W-1:0] wdata, rdata;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];
  int n_full = 0;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    push = 0; pop = 0; wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      chk(empty == (q.size() == 0), "empty");
      chk(full == (q.size() == D), "full");
      chk(int'(count) == q.size(), "count");
      if (q.size() > 0) chk(rdata == q[0], "head");
      if (full) n_full++;
      push  = !full && ($urandom_range(0, 99) < (t < 1500 ? 60 : 40));
      pop   = !empty && ($urandom_range(0, 99) < (t < 1500 ? 40 : 60));
      wdata = W'($urandom);
      @(posedge clk);
      #1;
      if (pop) void'(q.pop_front());
      if (push) q.push_back(wdata);
    end
    chk(n_full > 0, "full state reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
