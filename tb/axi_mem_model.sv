// axi_mem_model: behavioural model of the external memory and its
// controller as seen on the overlay's AXI port (not synthesizable intent;
// testbench only).  Word-addressed array of WORDS 32-bit words.  Read
// bursts (INCR, 4-byte beats) start RD_LAT cycles after the address is
// accepted; writes take the address and the data in any order and answer
// with a write response.  When STALL is set, ready and valid are withheld
// on random cycles to exercise the handshakes.  Counters report the number
// of read bursts, read beats and written words.
module axi_mem_model #(
  parameter int unsigned WORDS  = 4096,
  parameter int unsigned RD_LAT = 4,
  parameter bit          STALL  = 1'b1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] araddr,
  input  logic [7:0]  arlen,
  input  logic        arvalid,
  output logic        arready,
  output logic [31:0] rdata,
  output logic        rlast,
  output logic        rvalid,
  input  logic        rready,
  input  logic [31:0] awaddr,
  input  logic [7:0]  awlen,
  input  logic        awvalid,
  output logic        awready,
  input  logic [31:0] wdata,
  input  logic        wlast,
  input  logic        wvalid,
  output logic        wready,
  output logic        bvalid,
  input  logic        bready
);
  logic [31:0] mem [WORDS];
  int          n_bursts, n_beats, n_writes;

  // read side
  logic        rbusy;
  int          raddr_w, rleft, rwait;
  logic        stall_r;
  always_ff @(posedge clk) stall_r <= STALL && ($urandom_range(0, 3) == 0);

  assign arready = !rbusy;
  assign rvalid  = rbusy && rwait == 0 && !stall_r;
  assign rdata   = mem[raddr_w % WORDS];
  assign rlast   = (rleft == 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rbusy <= 1'b0; raddr_w <= 0; rleft <= 0; rwait <= 0; n_bursts <= 0; n_beats <= 0;
    end else if (!rbusy) begin
      if (arvalid) begin
        rbusy <= 1'b1; raddr_w <= int'(araddr >> 2); rleft <= int'(arlen) + 1; rwait <= RD_LAT;
        n_bursts <= n_bursts + 1;
      end
    end else if (rwait != 0) begin
      rwait <= rwait - 1;
    end else if (rvalid && rready) begin
      n_beats <= n_beats + 1;
      raddr_w <= raddr_w + 1;
      rleft   <= rleft - 1;
      if (rleft == 1) rbusy <= 1'b0;
    end
  end

  // write side
  logic        have_aw, have_w;
  int          waddr_w;
  logic [31:0] wd;
  logic        stall_w;
  always_ff @(posedge clk) stall_w <= STALL && ($urandom_range(0, 3) == 0);

  assign awready = !have_aw && !bvalid && !stall_w;
  assign wready  = !have_w && !bvalid && !stall_w;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_aw <= 1'b0; have_w <= 1'b0; bvalid <= 1'b0; n_writes <= 0; waddr_w <= 0; wd <= '0;
    end else begin
      if (awvalid && awready) begin have_aw <= 1'b1; waddr_w <= int'(awaddr >> 2); end
      if (wvalid && wready)   begin have_w <= 1'b1; wd <= wdata; end
      if (have_aw && have_w && !bvalid) begin
        mem[waddr_w % WORDS] <= wd;
        n_writes <= n_writes + 1;
        bvalid  <= 1'b1;
        have_aw <= 1'b0;
        have_w  <= 1'b0;
      end
      if (bvalid && bready) bvalid <= 1'b0;
    end
  end
endmodule
